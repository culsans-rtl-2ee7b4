// tb_culsans_cluster: end-to-end test of the coherent cluster at its default
// size (two cores, 16 KiB data caches).
//
// All eight core-side ports (four per core) issue random loads and stores in
// parallel to a small pool of words: a few cache lines that share cache
// indices (so lines are evicted), spread over both 8-byte words of each line
// (so the two cores falsely share lines), plus some non-cacheable words.
// No two accesses to the same word are in flight together, so a reference
// memory updated at issue time gives the exact value every load must return.
// Caches are flushed now and then; at the end both are flushed and the
// memory model must hold exactly the reference contents.
// Each mechanism of the design is counted and must have happened at least
// once: ReadShared/ReadUnique refills, CleanUnique upgrades, WriteBack
// evictions, reads served by a snooped cache, dirty lines written back on a
// snoop, collision stalls, non-coherent accesses, flushes, a second
// transaction queued behind an unanswered snoop, store retries after a
// concurrent snoop, atomic memory operations and AMOs restarted because a
// snoop reached their line between read and write.
// The accelerator and store ports also issue random AMOs (all nine
// operations, 32- and 64-bit). At the end, two cores' four ports add to one
// shared counter concurrently; every old value must come back exactly once.
module tb_culsans_cluster;
  import culsans_pkg::*;

  localparam int unsigned NumCores = 2;
  localparam int unsigned NumOps   = 3000;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  dc_req_t req [NumCores][4];
  dc_rsp_t rsp [NumCores][4];
  logic [NumCores-1:0] flush, flush_done, init_done;
  logic m_ar_valid, m_ar_ready, m_aw_valid, m_aw_ready, m_w_valid, m_w_ready;
  logic m_r_valid, m_r_ready, m_b_valid, m_b_ready;
  ar_t m_ar; aw_t m_aw; w_t m_w; r_t m_r; b_t m_b;
  logic ev_stall, ev_hit, ev_wb;

  culsans_cluster dut (
    .clk_i(clk), .rst_ni(rst_n),
    .req_i(req), .rsp_o(rsp), .flush_i(flush), .flush_done_o(flush_done), .init_done_o(init_done),
    .m_ar_valid_o(m_ar_valid), .m_ar_ready_i(m_ar_ready), .m_ar_o(m_ar),
    .m_aw_valid_o(m_aw_valid), .m_aw_ready_i(m_aw_ready), .m_aw_o(m_aw),
    .m_w_valid_o(m_w_valid),   .m_w_ready_i(m_w_ready),   .m_w_o(m_w),
    .m_r_valid_i(m_r_valid),   .m_r_ready_o(m_r_ready),   .m_r_i(m_r),
    .m_b_valid_i(m_b_valid),   .m_b_ready_o(m_b_ready),   .m_b_i(m_b),
    .ev_collision_stall_o(ev_stall), .ev_snoop_hit_o(ev_hit), .ev_snoop_wb_o(ev_wb)
  );

  axi_mem_model i_mem (
    .clk_i(clk), .rst_ni(rst_n),
    .ar_valid_i(m_ar_valid), .ar_ready_o(m_ar_ready), .ar_i(m_ar),
    .aw_valid_i(m_aw_valid), .aw_ready_o(m_aw_ready), .aw_i(m_aw),
    .w_valid_i(m_w_valid),   .w_ready_o(m_w_ready),   .w_i(m_w),
    .r_valid_o(m_r_valid),   .r_ready_i(m_r_ready),   .r_o(m_r),
    .b_valid_o(m_b_valid),   .b_ready_i(m_b_ready),   .b_o(m_b)
  );

  int unsigned checks = 0, failures = 0, cycles = 0;

  // ---------------- address pool ----------------
  localparam int unsigned PoolSize = 3 * 4 * 2 + 4;
  addr_t pool [PoolSize];
  initial begin
    int n = 0;
    for (int t = 0; t < 3; t++)
      for (int l = 0; l < 4; l++)
        for (int w = 0; w < 2; w++) begin
          pool[n] = 64'h8000_0000 + addr_t'(t * 16384 + l * 16 + w * 8);
          n++;
        end
    for (int k = 0; k < 4; k++) begin
      pool[n] = 64'h1000_0000 + addr_t'(k * 8);
      n++;
    end
  end

  data_t ref_mem [addr_t];
  // reference model of the atomic operations (written independently of the
  // cache's own implementation)
  function automatic data_t ref_amo(amo_op_e op, data_t old, data_t x, strb_t be);
    longint signed sa, sb;
    longint unsigned ua, ub, r;
    bit half, hi;
    half = (be == 8'h0F || be == 8'hF0);
    hi   = (be == 8'hF0);
    if (half) begin
      sa = hi ? longint'($signed(old[63:32])) : longint'($signed(old[31:0]));
      sb = hi ? longint'($signed(x[63:32]))   : longint'($signed(x[31:0]));
      ua = hi ? {32'd0, old[63:32]} : {32'd0, old[31:0]};
      ub = hi ? {32'd0, x[63:32]}   : {32'd0, x[31:0]};
    end else begin
      sa = old; sb = x; ua = old; ub = x;
    end
    case (op)
      AmoSwap: r = ub;
      AmoAdd:  r = ua + ub;
      AmoAnd:  r = ua & ub;
      AmoOr:   r = ua | ub;
      AmoXor:  r = ua ^ ub;
      AmoMax:  r = (sa > sb) ? ua : ub;
      AmoMin:  r = (sa < sb) ? ua : ub;
      AmoMaxu: r = (ua > ub) ? ua : ub;
      AmoMinu: r = (ua < ub) ? ua : ub;
      default: r = ua;
    endcase
    if (!half) return r;
    return hi ? {r[31:0], old[31:0]} : {old[63:32], r[31:0]};
  endfunction

  function automatic data_t ref_rd(addr_t a);
    return ref_mem.exists(a) ? ref_mem[a] : i_mem.init_word(a);
  endfunction

  // ---------------- per-port drivers ----------------
  logic  busy_word [PoolSize];
  logic  port_busy [NumCores][4];
  int    port_slot [NumCores][4];
  logic  port_we   [NumCores][4];
  data_t port_exp  [NumCores][4];
  int unsigned issued = 0, completed = 0;
  logic  running = 1'b0;

  // bookkeeping is blocking (several ports update it in one cycle); the
  // signals into the cluster are driven with non-blocking assignments
  always @(posedge clk) begin
    if (running) begin
      for (int c = 0; c < NumCores; c++)
        for (int p = 0; p < 4; p++) begin
          // completion
          if (port_busy[c][p] && rsp[c][p].rvalid) begin
            port_busy[c][p] = 1'b0;
            busy_word[port_slot[c][p]] = 1'b0;
            completed++;
            if (!port_we[c][p]) begin
              checks++;
              if (rsp[c][p].rdata !== port_exp[c][p]) begin
                failures++;
                $display("FAIL core %0d port %0d load %h: got %h expected %h", c, p,
                         pool[port_slot[c][p]], rsp[c][p].rdata, port_exp[c][p]);
              end
            end
          end
          // request handshake
          if (req[c][p].valid && rsp[c][p].ready) begin
            req[c][p].valid <= 1'b0;
            port_busy[c][p] = 1'b1;
          end
          // new request
          if (!req[c][p].valid && !port_busy[c][p] && issued < NumOps && ($urandom_range(3, 0) == 0)) begin
            int s;
            s = int'($urandom_range(PoolSize-1, 0));
            if (!busy_word[s]) begin
              logic    we;
              strb_t   be;
              data_t   wd, old;
              amo_op_e amo;
              we = (p == 3) ? ($urandom_range(3, 0) != 0) : (p == 2 && $urandom_range(1, 0) == 1);
              be = (we && $urandom_range(1, 0) == 1) ? strb_t'($urandom_range(255, 1)) : '1;
              wd = {$urandom, $urandom};
              amo = AmoNone;
              // atomics from the accelerator and store ports, cacheable words only
              if (p >= 2 && pool[s] >= 64'h8000_0000 && $urandom_range(5, 0) == 0) begin
                amo = amo_op_e'($urandom_range(9, 1));
                we  = 1'b0;
                case ($urandom_range(2, 0))
                  0: be = 8'h0F;
                  1: be = 8'hF0;
                  default: be = '1;
                endcase
                n_amo++;
              end
              busy_word[s]    = 1'b1;
              port_slot[c][p] = s;
              port_we[c][p]   = we;
              old = ref_rd(pool[s]);
              port_exp[c][p]  = old;
              if (amo != AmoNone) begin
                ref_mem[pool[s]] = ref_amo(amo, old, wd, be);
              end else if (we) begin
                for (int b = 0; b < StrbWidth; b++) if (be[b]) old[b*8+:8] = wd[b*8+:8];
                ref_mem[pool[s]] = old;
              end
              req[c][p] <= '{valid: 1'b1, we: we, addr: pool[s], wdata: wd, be: be, amo: amo};
              issued++;
            end
          end
        end
    end
  end

  // ---------------- mechanism counters ----------------
  int unsigned n_rd_shared, n_rd_unique, n_upgrade, n_wb_evict, n_nc, n_flush;
  int unsigned n_stall, n_hit, n_snoop_wb, n_queued, n_retry, n_amo, n_amo_retry;
  always_ff @(posedge clk) if (rst_n) begin
    cycles <= cycles + 1;
    for (int c = 0; c < NumCores; c++) begin
      if (dut.ar_valid[c] && dut.ar_ready[c]) begin
        if (!ar_is_coherent(dut.ar[c]))              n_nc++;
        else if (dut.ar[c].snoop == ArReadShared)    n_rd_shared++;
        else if (dut.ar[c].snoop == ArReadUnique)    n_rd_unique++;
        else if (dut.ar[c].snoop == ArCleanUnique)   n_upgrade++;
      end
      if (dut.aw_valid[c] && dut.aw_ready[c]) begin
        if (!aw_is_coherent(dut.aw[c]))              n_nc++;
        else if (dut.aw[c].snoop == AwWriteBack)     n_wb_evict++;
      end
    end
    if (ev_stall) n_stall++;
    if (ev_hit)   n_hit++;
    if (ev_wb)    n_snoop_wb++;
    if (dut.i_ccu.i_ctrl.i_su.i_order.cnt_q >= 2) n_queued++;
    if (dut.g_core[0].i_dcache.i_mh.state_q.name() == "AmWr" &&
        dut.g_core[0].i_dcache.i_mh.state_d.name() == "AmRd") n_amo_retry++;
    if (dut.g_core[1].i_dcache.i_mh.state_q.name() == "AmWr" &&
        dut.g_core[1].i_dcache.i_mh.state_d.name() == "AmRd") n_amo_retry++;
    if (dut.g_core[0].i_dcache.g_ctrl[3].i_ctrl.state_q == 3'd3 &&
        (dut.g_core[0].i_dcache.g_ctrl[3].i_ctrl.conflict_q ||
         dut.g_core[0].i_dcache.g_ctrl[3].i_ctrl.conflict_ext)) n_retry++;
    if (dut.g_core[1].i_dcache.g_ctrl[3].i_ctrl.state_q == 3'd3 &&
        (dut.g_core[1].i_dcache.g_ctrl[3].i_ctrl.conflict_q ||
         dut.g_core[1].i_dcache.g_ctrl[3].i_ctrl.conflict_ext)) n_retry++;
  end

  // ---------------- flushes ----------------
  task automatic do_flush(int c);
    @(posedge clk);
    flush[c] <= 1'b1;
    do @(posedge clk); while (!flush_done[c]);
    flush[c] <= 1'b0;
    n_flush++;
  endtask

  // one access on one port, outside the random traffic
  task automatic access(int c, int p, logic we, addr_t a, data_t wd);
    data_t exp;
    exp = ref_rd(a);
    @(posedge clk);
    req[c][p] <= '{valid: 1'b1, we: we, addr: a, wdata: wd, be: '1, amo: AmoNone};
    do @(posedge clk); while (!rsp[c][p].ready);
    req[c][p] <= '0;
    do @(posedge clk); while (!rsp[c][p].rvalid);
    if (we) ref_mem[a] = wd;
    else begin
      checks++;
      if (rsp[c][p].rdata !== exp) begin
        failures++;
        $display("FAIL directed load %h on core %0d: got %h expected %h", a, c, rsp[c][p].rdata, exp);
      end
    end
  endtask

  // one atomic add, returning the old value
  task automatic amo_add(int c, int p, addr_t a, data_t x, output data_t old);
    @(posedge clk);
    req[c][p] <= '{valid: 1'b1, we: 1'b0, addr: a, wdata: x, be: '1, amo: AmoAdd};
    do @(posedge clk); while (!rsp[c][p].ready);
    req[c][p] <= '0;
    do @(posedge clk); while (!rsp[c][p].rvalid);
    old = rsp[c][p].rdata;
  endtask

  task automatic expect_count(string name, int unsigned n);
    checks++;
    if (n == 0) begin
      failures++;
      $display("FAIL mechanism never exercised: %s", name);
    end else $display("  %-28s %0d", name, n);
  endtask

  initial begin
    flush = '0;
    for (int c = 0; c < NumCores; c++)
      for (int p = 0; p < 4; p++) begin
        req[c][p] = '0;
        port_busy[c][p] = 1'b0;
      end
    for (int s = 0; s < PoolSize; s++) busy_word[s] = 1'b0;
    repeat (5) @(posedge clk);
    rst_n <= 1'b1;
    wait (&init_done);
    // directed: M -> O by a snoop read, then a CleanUnique from the sharer
    // makes the owner write its dirty line back through the CCU
    access(0, 3, 1'b1, 64'h8000_0100, 64'h0123_4567_89ab_cdef);
    access(1, 1, 1'b0, 64'h8000_0100, '0);
    access(1, 3, 1'b1, 64'h8000_0108, 64'h1111_2222_3333_4444);
    checks++;
    if (i_mem.peek(64'h8000_0100) !== 64'h0123_4567_89ab_cdef) begin
      failures++;
      $display("FAIL dirty line of core 0 not written back on the CleanUnique snoop");
    end
    access(0, 1, 1'b0, 64'h8000_0108, '0);
    access(0, 1, 1'b0, 64'h8000_0100, '0);
    @(posedge clk);
    running <= 1'b1;
    // a flush in the middle of the traffic
    wait (issued >= NumOps / 2);
    do_flush(0);
    wait (issued >= NumOps && completed == issued);
    running <= 1'b0;
    repeat (5) @(posedge clk);
    // contended atomics: four ports of two cores each add 1 to one counter
    // 25 times; every old value must be seen exactly once and the sum exact
    begin
      localparam addr_t Counter = 64'h8000_0200;
      bit    seen [100];
      data_t olds [4][25];
      access(0, 3, 1'b1, Counter, '0);
      foreach (seen[i]) seen[i] = 1'b0;
      fork
        for (int k = 0; k < 25; k++) amo_add(0, 2, Counter, 64'd1, olds[0][k]);
        for (int k = 0; k < 25; k++) amo_add(0, 3, Counter, 64'd1, olds[1][k]);
        for (int k = 0; k < 25; k++) amo_add(1, 2, Counter, 64'd1, olds[2][k]);
        for (int k = 0; k < 25; k++) amo_add(1, 3, Counter, 64'd1, olds[3][k]);
      join
      n_amo += 100;
      for (int t = 0; t < 4; t++)
        for (int k = 0; k < 25; k++) begin
          checks++;
          if (olds[t][k] >= 100 || seen[olds[t][k]]) begin
            failures++;
            $display("FAIL contended AMO returned %0d twice or out of range", olds[t][k]);
          end else seen[olds[t][k]] = 1'b1;
        end
      ref_mem[Counter] = 64'd100;
      access(1, 1, 1'b0, Counter, '0);
      do_flush(0);
      do_flush(1);
      checks++;
      if (i_mem.peek(Counter) !== 64'd100) begin
        failures++;
        $display("FAIL counter after contended AMOs: %0d", i_mem.peek(Counter));
      end
    end
    // final flush of both caches, then memory must equal the reference
    do_flush(0);
    do_flush(1);
    repeat (5) @(posedge clk);
    for (int s = 0; s < PoolSize; s++) begin
      checks++;
      if (i_mem.peek(pool[s]) !== ref_rd(pool[s])) begin
        failures++;
        $display("FAIL memory %h = %h, expected %h", pool[s], i_mem.peek(pool[s]), ref_rd(pool[s]));
      end
    end
    $display("accesses %0d in %0d cycles; mechanisms:", completed, cycles);
    expect_count("ReadShared refill", n_rd_shared);
    expect_count("ReadUnique refill", n_rd_unique);
    expect_count("CleanUnique upgrade", n_upgrade);
    expect_count("WriteBack eviction", n_wb_evict);
    expect_count("non-coherent access", n_nc);
    expect_count("flush", n_flush);
    expect_count("collision stall cycles", n_stall);
    expect_count("read served by snoop", n_hit);
    expect_count("snooped dirty write-back", n_snoop_wb);
    expect_count("queued behind open snoop", n_queued);
    expect_count("store retry after snoop", n_retry);
    expect_count("atomic memory operation", n_amo);
    expect_count("AMO restarted after snoop", n_amo_retry);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog: issued %0d completed %0d", issued, completed);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
