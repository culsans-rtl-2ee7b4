// tb_ace_mux: checks round-robin merging of the coherent requests of three
// cores. With every core requesting continuously, grants must rotate
// 0,1,2,0,...; the forwarded IDs must carry the core index and the coherent
// flag; W beats must follow the AW grant order; R and B must return to the
// core named in the ID.
module tb_ace_mux;
  import culsans_pkg::*;
  localparam int N = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [N-1:0] s_ar_valid, s_ar_ready, s_aw_valid, s_aw_ready, s_w_valid, s_w_ready;
  logic [N-1:0] s_r_valid, s_r_ready, s_b_valid, s_b_ready;
  ar_t s_ar [N]; aw_t s_aw [N]; w_t s_w [N]; r_t s_r [N]; b_t s_b [N];
  logic m_ar_valid, m_ar_ready, m_aw_valid, m_aw_ready, m_w_valid, m_w_ready;
  logic m_r_valid, m_r_ready, m_b_valid, m_b_ready;
  ar_t m_ar; aw_t m_aw; w_t m_w; r_t m_r; b_t m_b;

  ace_mux #(.NumCores(N)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .s_ar_valid_i(s_ar_valid), .s_ar_ready_o(s_ar_ready), .s_ar_i(s_ar),
    .s_aw_valid_i(s_aw_valid), .s_aw_ready_o(s_aw_ready), .s_aw_i(s_aw),
    .s_w_valid_i(s_w_valid),   .s_w_ready_o(s_w_ready),   .s_w_i(s_w),
    .s_r_valid_o(s_r_valid),   .s_r_ready_i(s_r_ready),   .s_r_o(s_r),
    .s_b_valid_o(s_b_valid),   .s_b_ready_i(s_b_ready),   .s_b_o(s_b),
    .m_ar_valid_o(m_ar_valid), .m_ar_ready_i(m_ar_ready), .m_ar_o(m_ar),
    .m_aw_valid_o(m_aw_valid), .m_aw_ready_i(m_aw_ready), .m_aw_o(m_aw),
    .m_w_valid_o(m_w_valid),   .m_w_ready_i(m_w_ready),   .m_w_o(m_w),
    .m_r_valid_i(m_r_valid),   .m_r_ready_o(m_r_ready),   .m_r_i(m_r),
    .m_b_valid_i(m_b_valid),   .m_b_ready_o(m_b_ready),   .m_b_i(m_b)
  );

  task automatic check(logic cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  int aw_order [$];
  initial begin
    s_ar_valid = '0; s_aw_valid = '0; s_w_valid = '0; s_r_ready = '1; s_b_ready = '1;
    m_ar_ready = 1; m_aw_ready = 1; m_w_ready = 1; m_r_valid = 0; m_b_valid = 0; m_r = '0; m_b = '0;
    for (int c = 0; c < N; c++) begin
      s_ar[c] = '0; s_ar[c].addr = addr_t'(c) << 8; s_ar[c].id = 8'h2; s_ar[c].snoop = ArReadShared;
      s_aw[c] = '0; s_aw[c].addr = addr_t'(c) << 8; s_aw[c].id = 8'h1; s_aw[c].snoop = AwWriteBack;
      s_w[c]  = '{data: data_t'(c), strb: '1, last: 1'b1};
    end
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk); #1;

    // AR: all cores request all the time, six grants
    s_ar_valid = '1;
    for (int k = 0; k < 6; k++) begin
      #1;
      check(m_ar_valid && m_ar.addr == (addr_t'(k % N) << 8), $sformatf("AR grant %0d goes to core %0d", k, k % N));
      check(m_ar.id[IdCoreLsb+:IdCoreBits] == 3'(k % N) && m_ar.id[IdCohBit] && m_ar.id[3:0] == 4'h2, "AR ID tagged");
      check(s_ar_ready == (N'(1) << (k % N)), "AR ready only to the winner");
      @(posedge clk);
    end
    s_ar_valid = '0;
    // AW from cores 2 and 1 (core 0 idle); W held back until both AWs passed
    #1;
    s_aw_valid = 3'b110;
    for (int k = 0; k < 2; k++) begin
      logic [N-1:0] acc;
      #1; acc = s_aw_ready;
      check($onehot(acc), "one AW accepted per cycle");
      @(posedge clk); #1;
      s_aw_valid = s_aw_valid & ~acc;
    end
    check(s_aw_valid == '0, "both AWs accepted");
    s_aw_valid = '0;
    // the W of the core granted first must come first
    s_w_valid = 3'b110; #1;
    check(m_w_valid && (m_w.data == 64'd1 || m_w.data == 64'd2), "W from a granted core");
    begin
      data_t first;
      first = m_w.data;
      @(posedge clk); #1;
      check(m_w_valid && m_w.data != first, "second W from the other core");
      @(posedge clk); #1;
      s_w_valid = 0; #1;
      check(!m_w_valid, "no W left");
    end
    // responses routed by the core index in the ID
    for (int c = 0; c < N; c++) begin
      m_r = '0; m_r.id = {3'(c), 1'b1, 4'h2}; m_r.data = 64'hABC0 + data_t'(c); m_r.last = 1; m_r_valid = 1;
      m_b = '0; m_b.id = {3'(c), 1'b1, 4'h1}; m_b_valid = 1;
      #1;
      check(s_r_valid == (N'(1) << c) && s_r[c].data == 64'hABC0 + data_t'(c), $sformatf("R routed to core %0d", c));
      check(s_b_valid == (N'(1) << c), $sformatf("B routed to core %0d", c));
      @(posedge clk); #1;
    end
    m_r_valid = 0; m_b_valid = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
