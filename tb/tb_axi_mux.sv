// tb_axi_mux: three inputs (two core paths and the coherence controller) all
// issue reads and writes at once. Checks that grants rotate, that core-path
// IDs are tagged with the input number and a clear coherent flag while the
// controller's IDs pass unchanged, that W beats leave in AW grant order, and
// that R and B responses are returned to the input named by the ID.
module tb_axi_mux;
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

  axi_mux #(.NumIn(N)) dut (
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

  localparam id_t CtlId = 8'b011_1_0101;  // controller ID with the coherent flag

  initial begin
    int order [$];
    s_ar_valid = '0; s_aw_valid = '0; s_w_valid = '0; s_r_ready = '1; s_b_ready = '1;
    m_ar_ready = 1; m_aw_ready = 1; m_w_ready = 1; m_r_valid = 0; m_b_valid = 0; m_r = '0; m_b = '0;
    for (int c = 0; c < N; c++) begin
      s_ar[c] = '0; s_ar[c].addr = addr_t'(c + 1) << 12; s_ar[c].id = (c == N-1) ? CtlId : 8'h3;
      s_aw[c] = '0; s_aw[c].addr = addr_t'(c + 1) << 12; s_aw[c].id = (c == N-1) ? CtlId : 8'h3;
      s_w[c]  = '{data: data_t'(c + 100), strb: '1, last: 1'b1};
    end
    repeat (2) @(posedge clk); rst_n = 1; @(negedge clk);

    // AR: all inputs request continuously; every input must be served once
    // in any three consecutive grants
    s_ar_valid = '1;
    for (int k = 0; k < 6; k++) begin
      int g;
      #1;
      check(m_ar_valid && $onehot(s_ar_ready), "one AR forwarded");
      g = -1;
      for (int i = 0; i < N; i++) if (s_ar_ready[i]) g = i;
      if (k >= 3) check(g == order[k-3], "AR grants rotate");
      order.push_back(g);
      check(m_ar.addr == s_ar[g].addr, "AR payload of the winner");
      if (g == N-1) check(m_ar.id == CtlId, "controller AR ID unchanged");
      else check(m_ar.id == {3'(g), 1'b0, 4'h3}, $sformatf("core path %0d AR ID tagged", g));
      @(negedge clk);
    end
    s_ar_valid = '0;
    begin
      int a, b, c2;
      a = order[0]; b = order[1]; c2 = order[2];
      check(a != b && b != c2 && a != c2, "three different AR winners");
    end

    // AW from all inputs; record the order, then release W from all at once
    order = {};
    s_aw_valid = '1;
    for (int k = 0; k < N; k++) begin
      logic [N-1:0] acc;
      #1; acc = s_aw_ready;
      check($onehot(acc), "one AW accepted");
      for (int i = 0; i < N; i++) if (acc[i]) begin
        order.push_back(i);
        if (i == N-1) check(m_aw.id == CtlId, "controller AW ID unchanged");
        else check(m_aw.id == {3'(i), 1'b0, 4'h3}, "core path AW ID tagged");
      end
      @(negedge clk);
      s_aw_valid &= ~acc;
    end
    check(s_aw_valid == '0, "all AWs accepted");
    s_w_valid = '1;
    for (int k = 0; k < N; k++) begin
      #1;
      check(m_w_valid && m_w.data == data_t'(order[k] + 100), $sformatf("W beat %0d in AW order", k));
      @(negedge clk);
      s_w_valid &= ~(N'(1) << order[k]);
    end
    #1 check(!m_w_valid, "no stray W");

    // responses
    for (int i = 0; i < N; i++) begin
      m_r = '0; m_r.id = (i == N-1) ? CtlId : {3'(i), 1'b0, 4'h3}; m_r.data = data_t'(i + 7); m_r.last = 1;
      m_b = '0; m_b.id = m_r.id;
      m_r_valid = 1; m_b_valid = 1;
      #1;
      check(s_r_valid == (N'(1) << i) && s_r[i].data == data_t'(i + 7), $sformatf("R returned to input %0d", i));
      check(s_b_valid == (N'(1) << i), $sformatf("B returned to input %0d", i));
      check(m_r_ready && m_b_ready, "responses accepted");
      @(negedge clk);
    end
    m_r_valid = 0; m_b_valid = 0;
    // back-pressure from the addressed input blocks the response
    m_r = '0; m_r.id = {3'd1, 1'b0, 4'h3}; m_r.last = 1; m_r_valid = 1; s_r_ready = 3'b101;
    #1 check(!m_r_ready, "R held while the target is not ready");
    @(negedge clk); m_r_valid = 0; s_r_ready = '1;
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
