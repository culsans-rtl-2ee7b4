// tb_sram_sp: random reads and masked writes on a small RAM, compared with a
// reference array. Checks the one-cycle read latency, that a read in the
// same cycle as a write returns the old contents, that only the masked bits
// change, and that the output holds its value while no access is made.
module tb_sram_sp;
  localparam int Words = 16, Width = 24;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic req, we;
  logic [3:0] addr;
  logic [Width-1:0] wdata, wmask, rdata;
  logic [Width-1:0] ref_mem [Words];

  sram_sp #(.Words(Words), .Width(Width)) dut (
    .clk_i(clk), .req_i(req), .we_i(we), .addr_i(addr),
    .wdata_i(wdata), .wmask_i(wmask), .rdata_o(rdata)
  );

  task automatic check(logic cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    logic [Width-1:0] expect_q;
    logic             pend;
    req = 0; we = 0; addr = 0; wdata = 0; wmask = 0; pend = 0; expect_q = '0;
    // fill every word
    for (int i = 0; i < Words; i++) begin
      @(negedge clk);
      req = 1; we = 1; addr = 4'(i); wmask = '1; wdata = Width'($urandom); ref_mem[i] = wdata;
    end
    @(negedge clk); req = 0; we = 0;
    for (int k = 0; k < 2000; k++) begin
      @(negedge clk);
      if (pend) check(rdata == expect_q, $sformatf("read data at step %0d", k));
      req = ($urandom % 4) != 0;
      we  = $urandom % 2;
      addr = 4'($urandom);
      wdata = Width'($urandom);
      wmask = Width'($urandom);
      if (req) begin
        expect_q = ref_mem[addr];
        pend = 1;
        if (we) ref_mem[addr] = (ref_mem[addr] & ~wmask) | (wdata & wmask);
      end
      // without an access the output keeps the last read value (pend stays)
    end
    // read back everything
    for (int i = 0; i < Words; i++) begin
      @(negedge clk);
      if (pend) check(rdata == expect_q, "read data during final sweep");
      req = 1; we = 0; addr = 4'(i); expect_q = ref_mem[i]; pend = 1;
    end
    @(negedge clk);
    check(rdata == expect_q, "last read");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
