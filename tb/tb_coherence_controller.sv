// tb_coherence_controller: the coherence controller of a two-core cluster
// with behavioural snoop responders standing in for the data caches and the
// behavioural memory behind its AXI port.
//
// Each responder keeps the MOESI flags and data of 16 lines and answers every
// snoop like the data cache does (data when it holds the line, PassDirty when
// it hands over ownership, invalidation for ReadUnique/CleanInvalid). It takes
// new snoops while earlier ones still wait for their response, and its
// response delay is random, or long when a test wants overlap.
//
// Directed cases, all checked on data, response bits, snoop traffic, the
// responders' new states and the memory contents:
//   ReadShared served by another cache's dirty copy (IsShared, owner -> O);
//   ReadUnique served with PassDirty (owner invalidated);
//   ReadShared with no cached copy (data from memory, IsShared clear);
//   ReadOnce served by a clean shared copy (state unchanged);
//   CleanUnique with a dirty copy elsewhere (write-back, single R beat);
//   WriteBack to memory (no snoop, B to the initiator);
//   two requests to one line (collision stall, both completed);
//   two requests to different lines (second snoop issued before the first
//   snoop response arrives).
module tb_coherence_controller;
  import culsans_pkg::*;
  localparam int N = 2;
  localparam addr_t Base = 64'h8000_0000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic s_ar_valid, s_ar_ready, s_aw_valid, s_aw_ready, s_w_valid, s_w_ready;
  logic s_r_valid, s_r_ready, s_b_valid, s_b_ready;
  ar_t s_ar; aw_t s_aw; w_t s_w; r_t s_r; b_t s_b;
  logic [N-1:0] ac_valid, ac_ready, cr_valid, cr_ready, cd_valid, cd_ready;
  ac_t ac; cr_t cr [N]; cd_t cd [N];
  logic m_ar_valid, m_ar_ready, m_aw_valid, m_aw_ready, m_w_valid, m_w_ready;
  logic m_r_valid, m_r_ready, m_b_valid, m_b_ready;
  ar_t m_ar; aw_t m_aw; w_t m_w; r_t m_r; b_t m_b;
  logic ev_stall, ev_hit, ev_wb;

  coherence_controller #(.NumCores(N)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .s_ar_valid_i(s_ar_valid), .s_ar_ready_o(s_ar_ready), .s_ar_i(s_ar),
    .s_aw_valid_i(s_aw_valid), .s_aw_ready_o(s_aw_ready), .s_aw_i(s_aw),
    .s_w_valid_i(s_w_valid),   .s_w_ready_o(s_w_ready),   .s_w_i(s_w),
    .s_r_valid_o(s_r_valid),   .s_r_ready_i(s_r_ready),   .s_r_o(s_r),
    .s_b_valid_o(s_b_valid),   .s_b_ready_i(s_b_ready),   .s_b_o(s_b),
    .ac_valid_o(ac_valid), .ac_ready_i(ac_ready), .ac_o(ac),
    .cr_valid_i(cr_valid), .cr_ready_o(cr_ready), .cr_i(cr),
    .cd_valid_i(cd_valid), .cd_ready_o(cd_ready), .cd_i(cd),
    .m_ar_valid_o(m_ar_valid), .m_ar_ready_i(m_ar_ready), .m_ar_o(m_ar),
    .m_aw_valid_o(m_aw_valid), .m_aw_ready_i(m_aw_ready), .m_aw_o(m_aw),
    .m_w_valid_o(m_w_valid),   .m_w_ready_i(m_w_ready),   .m_w_o(m_w),
    .m_r_valid_i(m_r_valid),   .m_r_ready_o(m_r_ready),   .m_r_i(m_r),
    .m_b_valid_i(m_b_valid),   .m_b_ready_o(m_b_ready),   .m_b_i(m_b),
    .collision_stall_o(ev_stall), .snoop_hit_o(ev_hit), .snoop_wb_o(ev_wb)
  );

  axi_mem_model i_mem (
    .clk_i(clk), .rst_ni(rst_n),
    .ar_valid_i(m_ar_valid), .ar_ready_o(m_ar_ready), .ar_i(m_ar),
    .aw_valid_i(m_aw_valid), .aw_ready_o(m_aw_ready), .aw_i(m_aw),
    .w_valid_i(m_w_valid),   .w_ready_o(m_w_ready),   .w_i(m_w),
    .r_valid_o(m_r_valid),   .r_ready_i(m_r_ready),   .r_o(m_r),
    .b_valid_o(m_b_valid),   .b_ready_i(m_b_ready),   .b_o(m_b)
  );

  task automatic check(logic cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  function automatic addr_t la(int i);
    return Base + addr_t'(i) * 16;
  endfunction
  function automatic line_t mem_line(addr_t a);
    return {i_mem.peek(a + 8), i_mem.peek(a)};
  endfunction
  function automatic line_t init_line(addr_t a);
    return {i_mem.init_word(a + 8), i_mem.init_word(a)};
  endfunction

  // ---------------- snoop responders ----------------
  flags_t st  [N][16];
  line_t  dat [N][16];
  int     cr_delay = 2;
  int     n_ac [N];
  int     outstanding [N];
  int     n_pipelined = 0, n_stall = 0;

  always @(posedge clk) begin
    if (ev_stall) n_stall++;
    for (int c = 0; c < N; c++) begin
      if (ac_valid[c] && ac_ready[c]) begin
        n_ac[c]++;
        if (outstanding[c] > 0) n_pipelined++;
        outstanding[c]++;
      end
      if (cr_valid[c] && cr_ready[c]) outstanding[c]--;
    end
  end

  for (genvar c = 0; c < N; c++) begin : g_resp
    ac_t q [$];
    initial begin
      ac_ready[c] = 0;
      forever begin
        @(negedge clk);
        ac_ready[c] = ($urandom % 2) == 0;
        @(posedge clk);
        if (ac_valid[c] && ac_ready[c]) q.push_back(ac);
      end
    end
    initial begin
      cr_valid[c] = 0; cd_valid[c] = 0; cr[c] = '0; cd[c] = '0;
      forever begin
        @(negedge clk);
        if (q.size() != 0) begin
          ac_t a;
          int  i;
          cr_t r;
          flags_t f;
          a = q.pop_front();
          i = int'(a.addr[7:4]);
          f = st[c][i];
          r = '0;
          r.was_unique = f.valid && !f.shared;
          case (a.snoop)
            AcReadOnce:   begin r.data_transfer = f.valid; r.is_shared = f.valid; end
            AcReadShared: begin r.data_transfer = f.valid; r.is_shared = f.valid;
                                if (f.valid) st[c][i].shared = 1'b1; end
            AcReadUnique: begin r.data_transfer = f.valid; r.pass_dirty = f.valid && f.dirty;
                                st[c][i] = '0; end
            default:      begin r.data_transfer = f.valid && f.dirty; r.pass_dirty = f.valid && f.dirty;
                                st[c][i] = '0; end
          endcase
          repeat (cr_delay) @(negedge clk);
          cr[c] = r; cr_valid[c] = 1;
          do @(posedge clk); while (!cr_ready[c]);
          @(negedge clk); cr_valid[c] = 0;
          if (r.data_transfer) begin
            for (int b = 0; b < 2; b++) begin
              cd[c].data = dat[c][i][b*64 +: 64]; cd[c].last = (b == 1); cd_valid[c] = 1;
              do @(posedge clk); while (!cd_ready[c]);
              @(negedge clk);
            end
            cd_valid[c] = 0;
          end
        end
      end
    end
  end

  // ---------------- initiator side ----------------
  r_t rq [$];
  b_t bq [$];
  always @(posedge clk) begin
    if (s_r_valid && s_r_ready) rq.push_back(s_r);
    if (s_b_valid && s_b_ready) bq.push_back(s_b);
  end

  task automatic send_ar(int core, logic [3:0] lid, logic [3:0] snoop, addr_t a);
    @(negedge clk);
    s_ar = '0; s_ar.id = {3'(core), 1'b1, lid}; s_ar.addr = a; s_ar.len = (snoop == ArCleanUnique) ? 8'd0 : 8'd1;
    s_ar.size = 3'd3; s_ar.snoop = snoop; s_ar.domain = DomInnerShareable;
    s_ar_valid = 1;
    do @(posedge clk); while (!s_ar_ready);
    @(negedge clk); s_ar_valid = 0;
  endtask

  // wait for the response burst of one ID: returns data and the first resp
  task automatic get_r(id_t id, int beats, output line_t d, output logic [3:0] resp);
    int got, t;
    got = 0; t = 0; d = '0; resp = '0;
    while (got < beats && t < 2000) begin
      @(negedge clk); t++;
      foreach (rq[k]) if (rq[k].id == id) begin
        if (got == 0) resp = rq[k].resp;
        d[got*64 +: 64] = rq[k].data;
        check(rq[k].last == (got == beats - 1), "R last flag");
        got++;
        rq.delete(k);
        break;
      end
    end
    check(got == beats, $sformatf("R burst for ID %h complete", id));
  endtask

  initial begin
    line_t d, x;
    logic [3:0] resp;
    int ac0, ac1;
    s_ar_valid = 0; s_aw_valid = 0; s_w_valid = 0; s_r_ready = 1; s_b_ready = 1;
    s_ar = '0; s_aw = '0; s_w = '0;
    for (int c = 0; c < N; c++) begin
      n_ac[c] = 0; outstanding[c] = 0;
      for (int i = 0; i < 16; i++) begin st[c][i] = '0; dat[c][i] = '0; end
    end
    repeat (3) @(negedge clk); rst_n = 1;
    repeat (2) @(negedge clk);

    // 1: ReadShared, dirty copy in core 1
    x = {$urandom, $urandom, $urandom, $urandom};
    st[1][1] = '{valid: 1, shared: 0, dirty: 1}; dat[1][1] = x;
    send_ar(0, 4'h1, ArReadShared, la(1));
    get_r({3'd0, 1'b1, 4'h1}, 2, d, resp);
    check(d == x, "ReadShared data from the dirty copy");
    check(resp[3] && !resp[2], "ReadShared: IsShared set, PassDirty clear");
    check(st[1][1] == '{valid: 1, shared: 1, dirty: 1}, "owner becomes O");
    check(n_ac[0] == 0 && n_ac[1] == 1, "snoop only to the other core");
    check(mem_line(la(1)) == init_line(la(1)), "memory untouched by ReadShared");

    // 2: ReadUnique, dirty copy in core 1
    x = {$urandom, $urandom, $urandom, $urandom};
    st[1][2] = '{valid: 1, shared: 0, dirty: 1}; dat[1][2] = x;
    send_ar(0, 4'h2, ArReadUnique, la(2));
    get_r({3'd0, 1'b1, 4'h2}, 2, d, resp);
    check(d == x, "ReadUnique data from the dirty copy");
    check(resp[2], "ReadUnique: PassDirty set");
    check(st[1][2] == '0, "ReadUnique invalidates the other copy");

    // 3: ReadShared, no copy anywhere
    send_ar(0, 4'h3, ArReadShared, la(3));
    get_r({3'd0, 1'b1, 4'h3}, 2, d, resp);
    check(d == init_line(la(3)), "ReadShared miss served from memory");
    check(!resp[3] && !resp[2], "ReadShared from memory: exclusive, clean");

    // 4: ReadOnce from core 1, clean shared copy in core 0
    x = {$urandom, $urandom, $urandom, $urandom};
    st[0][6] = '{valid: 1, shared: 1, dirty: 0}; dat[0][6] = x;
    send_ar(1, 4'h4, ArReadOnce, la(6));
    get_r({3'd1, 1'b1, 4'h4}, 2, d, resp);
    check(d == x, "ReadOnce data from the clean copy");
    check(st[0][6] == '{valid: 1, shared: 1, dirty: 0}, "ReadOnce keeps the copy");

    // 5: CleanUnique, dirty copy in core 1 is written back
    x = {$urandom, $urandom, $urandom, $urandom};
    st[1][4] = '{valid: 1, shared: 1, dirty: 1}; dat[1][4] = x;
    send_ar(0, 4'h5, ArCleanUnique, la(4));
    get_r({3'd0, 1'b1, 4'h5}, 1, d, resp);
    check(st[1][4] == '0, "CleanUnique invalidates the other copy");
    check(mem_line(la(4)) == x, "CleanUnique writes the dirty copy back to memory");

    // 6: WriteBack from core 1: no snoop, memory updated, B returned
    x = {$urandom, $urandom, $urandom, $urandom};
    ac0 = n_ac[0]; ac1 = n_ac[1];
    @(negedge clk);
    s_aw = '0; s_aw.id = {3'd1, 1'b1, 4'h6}; s_aw.addr = la(5); s_aw.len = 8'd1; s_aw.size = 3'd3;
    s_aw.snoop = AwWriteBack; s_aw.domain = DomInnerShareable; s_aw_valid = 1;
    do @(posedge clk); while (!s_aw_ready);
    @(negedge clk); s_aw_valid = 0;
    for (int b = 0; b < 2; b++) begin
      s_w = '{data: x[b*64 +: 64], strb: '1, last: (b == 1)}; s_w_valid = 1;
      do @(posedge clk); while (!s_w_ready);
      @(negedge clk);
    end
    s_w_valid = 0;
    begin
      int t; t = 0;
      while (bq.size() == 0 && t < 500) begin @(negedge clk); t++; end
      check(bq.size() == 1 && bq[0].id == {3'd1, 1'b1, 4'h6}, "WriteBack B to the initiator");
      bq.delete();
    end
    check(mem_line(la(5)) == x, "WriteBack data in memory");
    check(n_ac[0] == ac0 && n_ac[1] == ac1, "WriteBack is not snooped");

    // 7: two ReadShared to one line from both cores, slow snoop responses
    cr_delay = 12;
    fork
      send_ar(0, 4'h7, ArReadShared, la(7));
      begin @(negedge clk); @(negedge clk); send_ar(1, 4'h7, ArReadShared, la(7)); end
    join
    get_r({3'd0, 1'b1, 4'h7}, 2, d, resp);
    check(d == init_line(la(7)), "first of two same-line reads");
    get_r({3'd1, 1'b1, 4'h7}, 2, d, resp);
    check(d == init_line(la(7)), "second of two same-line reads");
    check(n_stall > 0, "same-line request stalled in the collision table");

    // 8: two reads to different lines: second snoop before the first response
    send_ar(0, 4'h8, ArReadShared, la(8));
    send_ar(0, 4'h9, ArReadShared, la(9));
    get_r({3'd0, 1'b1, 4'h8}, 2, d, resp);
    check(d == init_line(la(8)), "first of two pipelined reads");
    get_r({3'd0, 1'b1, 4'h9}, 2, d, resp);
    check(d == init_line(la(9)), "second of two pipelined reads");
    check(n_pipelined > 0, "snoop issued while an earlier snoop response was open");
    cr_delay = 2;

    repeat (5) @(negedge clk);
    check(rq.size() == 0 && bq.size() == 0, "no unexpected responses");
    $display("  snoops %0d/%0d, stalls %0d, pipelined snoops %0d", n_ac[0], n_ac[1], n_stall, n_pipelined);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
