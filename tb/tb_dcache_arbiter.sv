// tb_dcache_arbiter: drives random request patterns on the six SRAM ports of
// the data cache and checks that exactly the lowest-numbered requesting port
// is granted, that its request is the one forwarded, and that nothing is
// granted or forwarded when no port requests. Purely combinational, so each
// pattern is checked after a short settling delay.
module tb_dcache_arbiter;
  import culsans_pkg::*;
  localparam int N = 6;
  int checks = 0, failures = 0;
  sram_req_t req [N];
  sram_req_t req_o;
  logic [N-1:0] gnt;

  dcache_arbiter #(.NumPorts(N)) dut (.req_i(req), .gnt_o(gnt), .req_o(req_o));

  task automatic check(logic cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    int win;
    logic [N-1:0] seen;
    seen = '0;
    for (int k = 0; k < 3000; k++) begin
      for (int i = 0; i < N; i++) begin
        req[i] = '0;
        req[i].valid = ($urandom % 3) == 0;
        req[i].we_meta = $urandom % 2;
        req[i].flags = flags_t'($urandom);
        req[i].addr = line_addr_t'({$urandom, $urandom});
        req[i].data = line_t'({$urandom, $urandom, $urandom, $urandom});
        req[i].data_be = 16'($urandom);
      end
      #1;
      win = -1;
      for (int i = N-1; i >= 0; i--) if (req[i].valid) win = i;
      if (win < 0) begin
        check(gnt == '0 && !req_o.valid, "no grant without a request");
      end else begin
        seen[win] = 1'b1;
        check(gnt == (N'(1) << win), $sformatf("grant to port %0d", win));
        check(req_o == req[win], $sformatf("request of port %0d forwarded", win));
      end
      #1;
    end
    check(seen == '1, "every port won at least once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
