// tb_ace_demux: checks the coherent / non-coherent split of ace_demux.
// Reads and writes with every relevant AxSNOOP/AxDOMAIN combination are sent
// and must appear on the expected port only; W beats must follow their AW;
// R bursts and B responses from both ports must reach the core, and an R
// burst must not be interleaved with one from the other port.
module tb_ace_demux;
  import culsans_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic s_ar_valid, s_ar_ready, s_aw_valid, s_aw_ready, s_w_valid, s_w_ready;
  logic s_r_valid, s_r_ready, s_b_valid, s_b_ready;
  ar_t s_ar; aw_t s_aw; w_t s_w; r_t s_r; b_t s_b;
  logic [1:0] m_ar_valid, m_ar_ready, m_aw_valid, m_aw_ready, m_w_valid, m_w_ready;
  logic [1:0] m_r_valid, m_r_ready, m_b_valid, m_b_ready;
  ar_t m_ar; aw_t m_aw; w_t m_w;
  r_t m_r [2];
  b_t m_b [2];

  ace_demux dut (
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

  // send one AR and check which port it reaches (expected: 0 coherent, 1 not)
  task automatic send_ar(logic [3:0] snoop, logic [1:0] domain, int exp_port);
    s_ar = '0; s_ar.snoop = snoop; s_ar.domain = domain; s_ar.addr = 64'h8000_0040; s_ar.id = 8'h3;
    s_ar_valid = 1;
    #1;
    check(m_ar_valid[exp_port] && !m_ar_valid[1-exp_port], $sformatf("AR snoop %b domain %b to port %0d", snoop, domain, exp_port));
    check(m_ar == s_ar, "AR payload passed unchanged");
    @(posedge clk); #1;
    s_ar_valid = 0;
  endtask

  task automatic send_write(logic [2:0] snoop, logic [1:0] domain, int exp_port, data_t d);
    s_aw = '0; s_aw.snoop = snoop; s_aw.domain = domain; s_aw.len = 8'd1;
    s_aw_valid = 1;
    #1;
    check(m_aw_valid[exp_port] && !m_aw_valid[1-exp_port], $sformatf("AW snoop %b domain %b to port %0d", snoop, domain, exp_port));
    @(posedge clk); #1;
    s_aw_valid = 0;
    for (int b = 0; b < 2; b++) begin
      s_w = '{data: d + data_t'(b), strb: '1, last: (b == 1)};
      s_w_valid = 1;
      #1;
      check(m_w_valid[exp_port] && !m_w_valid[1-exp_port] && m_w.data == d + data_t'(b), "W beat follows its AW");
      @(posedge clk); #1;
    end
    s_w_valid = 0;
  endtask

  initial begin
    s_ar_valid = 0; s_aw_valid = 0; s_w_valid = 0; s_r_ready = 1; s_b_ready = 1;
    m_ar_ready = '1; m_aw_ready = '1; m_w_ready = '1; m_r_valid = '0; m_b_valid = '0;
    m_r[0] = '0; m_r[1] = '0; m_b[0] = '0; m_b[1] = '0;
    s_ar = '0; s_aw = '0; s_w = '0;
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk); #1;

    send_ar(ArReadNoSnoop, DomNonShareable, 1);
    send_ar(ArReadNoSnoop, DomSystem, 1);
    send_ar(ArReadOnce, DomInnerShareable, 0);
    send_ar(ArReadOnce, DomOuterShareable, 0);
    send_ar(ArReadShared, DomInnerShareable, 0);
    send_ar(ArReadUnique, DomInnerShareable, 0);
    send_ar(ArCleanUnique, DomInnerShareable, 0);
    send_write(AwWriteNoSnoop, DomNonShareable, 1, 64'h100);
    send_write(AwWriteUnique, DomInnerShareable, 0, 64'h200);
    send_write(AwWriteBack, DomInnerShareable, 0, 64'h300);

    // two AWs in a row before any W: the W beats must follow AW order
    s_aw = '0; s_aw.snoop = AwWriteBack; s_aw.domain = DomInnerShareable; s_aw_valid = 1;
    @(posedge clk); #1;
    s_aw = '0; s_aw.domain = DomSystem;
    @(posedge clk); #1;
    s_aw_valid = 0;
    s_w = '{data: 64'hA, strb: '1, last: 1}; s_w_valid = 1; #1;
    check(m_w_valid == 2'b01, "first W goes to the coherent port");
    @(posedge clk); #1;
    s_w = '{data: 64'hB, strb: '1, last: 1}; #1;
    check(m_w_valid == 2'b10, "second W goes to the non-coherent port");
    @(posedge clk); #1;
    s_w_valid = 0;
    #1;
    check(m_w_valid == 2'b00, "no W routed without an AW");

    // R: a burst from port 1 in progress must not be interleaved by port 0
    m_r[1] = '{id: 8'h5, data: 64'h11, resp: '0, last: 0}; m_r_valid = 2'b10; #1;
    check(s_r_valid && s_r.data == 64'h11, "R beat from the non-coherent port");
    @(posedge clk); #1;
    m_r[0] = '{id: 8'h6, data: 64'h22, resp: '0, last: 1};
    m_r[1] = '{id: 8'h5, data: 64'h12, resp: '0, last: 1}; m_r_valid = 2'b11; #1;
    check(s_r.data == 64'h12 && m_r_ready == 2'b10, "R burst not interleaved");
    @(posedge clk); #1;
    m_r_valid = 2'b01; #1;
    check(s_r.data == 64'h22 && m_r_ready == 2'b01, "coherent R after the burst");
    @(posedge clk); #1;
    m_r_valid = 0;
    // B from either port
    m_b[1] = '{id: 8'h7, resp: 2'b00}; m_b_valid = 2'b10; #1;
    check(s_b_valid && s_b.id == 8'h7 && m_b_ready == 2'b10, "B from the non-coherent port");
    @(posedge clk); #1;
    m_b[0] = '{id: 8'h8, resp: 2'b00}; m_b_valid = 2'b01; #1;
    check(s_b_valid && s_b.id == 8'h8 && m_b_ready == 2'b01, "B from the coherent port");
    @(posedge clk); #1;
    m_b_valid = 0;

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
