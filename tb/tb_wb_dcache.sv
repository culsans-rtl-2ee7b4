// tb_wb_dcache: one write-back data cache (1 KiB, so that lines collide
// quickly) on the behavioural memory, with the testbench acting as the
// coherency unit's snoop side.
//
// The cache's ACE reads go straight to the memory; the testbench can set the
// IsShared bit of the read responses to make refills arrive shared. Snoops
// are driven by the testbench on AC and their CR/CD answers are checked.
// Requests and snoops are issued one at a time, driven on the falling clock
// edge.
//
// Part 1 (directed) walks one line through the MOESI states: load miss
// (ReadShared, E), store hit (silent, M), ReadShared snoop (data, O), store on
// a shared line (CleanUnique upgrade, M), ReadUnique snoop (PassDirty,
// invalid), reload from memory; then store miss (ReadUnique), eviction of a
// dirty line (WriteBack), non-cacheable store and load (WriteNoSnoop /
// ReadNoSnoop), shared refill followed by CleanInvalid, and a flush.
//
// Then atomic memory operations: on a missing line, on an M line, on a shared
// line (upgrade), 32- and 64-bit, signed and unsigned; results checked
// against the testbench's own model of the nine operations.
//
// Part 2 (random) mixes loads, stores, AMOs and all four snoop types on a
// small address pool. The cache is the only writer, so every load and every snoop
// data transfer must show the last value stored; dirty lines handed over by a
// snoop are written into the memory by the testbench, as the coherency unit
// would. A final flush must leave the memory equal to the reference.
module tb_wb_dcache;
  import culsans_pkg::*;
  localparam addr_t Base = 64'h8000_0000;
  localparam int    CacheBytes = 1024;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  dc_req_t req [4];
  dc_rsp_t rsp [4];
  logic flush, flush_done, init_done;
  logic ar_valid, ar_ready, aw_valid, aw_ready, w_valid, w_ready, r_valid, r_ready, b_valid, b_ready;
  ar_t ar; aw_t aw; w_t w; r_t r_mem, r_dc; b_t b;
  logic ac_valid, ac_ready, cr_valid, cr_ready, cd_valid, cd_ready;
  ac_t ac; cr_t cr; cd_t cd;
  logic force_shared;

  wb_dcache #(.CacheBytes(CacheBytes)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .req_i(req), .rsp_o(rsp), .flush_i(flush), .flush_done_o(flush_done), .init_done_o(init_done),
    .ar_valid_o(ar_valid), .ar_ready_i(ar_ready), .ar_o(ar),
    .aw_valid_o(aw_valid), .aw_ready_i(aw_ready), .aw_o(aw),
    .w_valid_o(w_valid),   .w_ready_i(w_ready),   .w_o(w),
    .r_valid_i(r_valid),   .r_ready_o(r_ready),   .r_i(r_dc),
    .b_valid_i(b_valid),   .b_ready_o(b_ready),   .b_i(b),
    .ac_valid_i(ac_valid), .ac_ready_o(ac_ready), .ac_i(ac),
    .cr_valid_o(cr_valid), .cr_ready_i(cr_ready), .cr_o(cr),
    .cd_valid_o(cd_valid), .cd_ready_i(cd_ready), .cd_o(cd)
  );

  axi_mem_model i_mem (
    .clk_i(clk), .rst_ni(rst_n),
    .ar_valid_i(ar_valid), .ar_ready_o(ar_ready), .ar_i(ar),
    .aw_valid_i(aw_valid), .aw_ready_o(aw_ready), .aw_i(aw),
    .w_valid_i(w_valid),   .w_ready_o(w_ready),   .w_i(w),
    .r_valid_o(r_valid),   .r_ready_i(r_ready),   .r_o(r_mem),
    .b_valid_o(b_valid),   .b_ready_i(b_ready),   .b_o(b)
  );

  always_comb begin
    r_dc = r_mem;
    r_dc.resp[3] = force_shared;
  end

  task automatic check(logic cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  // ---------------- bus monitor ----------------
  int n_rs, n_ru, n_cu, n_wb, n_ncr, n_ncw;
  always @(posedge clk) begin
    if (ar_valid && ar_ready) begin
      if (ar.snoop == ArReadShared) n_rs++;
      else if (ar.snoop == ArReadUnique) n_ru++;
      else if (ar.snoop == ArCleanUnique) n_cu++;
      else if (ar.domain == DomNonShareable || ar.domain == DomSystem) n_ncr++;
    end
    if (aw_valid && aw_ready) begin
      if (aw.snoop == AwWriteBack) n_wb++;
      else n_ncw++;
    end
  end

  // ---------------- reference ----------------
  data_t ref_mem [addr_t];
  function automatic data_t ref_rd(addr_t a);
    return ref_mem.exists(a) ? ref_mem[a] : i_mem.init_word(a);
  endfunction

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

  int n_amo = 0;
  task automatic amo(int p, amo_op_e op, addr_t a, data_t x, strb_t be, string what);
    data_t old, exp;
    exp = ref_rd(a);
    @(negedge clk);
    req[p] = '{valid: 1'b1, we: 1'b0, addr: a, wdata: x, be: be, amo: op};
    while (!rsp[p].ready) @(negedge clk);
    @(negedge clk);
    req[p] = '0;
    while (!rsp[p].rvalid) @(negedge clk);
    old = rsp[p].rdata;
    check(old == exp, $sformatf("%s: AMO %s at %h returned %h expected %h", what, op.name(), a, old, exp));
    ref_mem[a] = ref_amo(op, exp, x, be);
    n_amo++;
  endtask

  task automatic access(int p, logic we, addr_t a, data_t wd, output data_t rd);
    @(negedge clk);
    req[p] = '{valid: 1'b1, we: we, addr: a, wdata: wd, be: '1, amo: AmoNone};
    while (!rsp[p].ready) @(negedge clk);
    @(negedge clk);
    req[p] = '0;
    while (!rsp[p].rvalid) @(negedge clk);
    rd = rsp[p].rdata;
    if (we) ref_mem[a] = wd;
  endtask

  task automatic load(addr_t a, string what);
    data_t d;
    access(1, 1'b0, a, '0, d);
    check(d == ref_rd(a), $sformatf("%s: load %h got %h expected %h", what, a, d, ref_rd(a)));
  endtask

  task automatic store(addr_t a, data_t v);
    data_t d;
    access(3, 1'b1, a, v, d);
  endtask

  task automatic snoop(acsnoop_e sn, addr_t a, output cr_t resp, output line_t d);
    @(negedge clk);
    ac_valid = 1; ac = '{addr: a, snoop: sn};
    while (!ac_ready) @(negedge clk);
    @(negedge clk);
    ac_valid = 0; cr_ready = 1;
    while (!cr_valid) @(negedge clk);
    resp = cr;
    @(negedge clk);
    cr_ready = 0; d = '0;
    if (resp.data_transfer) begin
      cd_ready = 1;
      for (int k = 0; k < 2; k++) begin
        while (!cd_valid) @(negedge clk);
        d[k*64 +: 64] = cd.data;
        check(cd.last == (k == 1), "CD last flag");
        @(negedge clk);
      end
      cd_ready = 0;
    end
  endtask

  // memory write by "the other cache" taking over a dirty line
  task automatic mem_put(addr_t a, line_t d);
    i_mem.mem[a]     = d[63:0];
    i_mem.mem[a + 8] = d[127:64];
  endtask

  function automatic line_t ref_line(addr_t a);
    return {ref_rd(a + 8), ref_rd(a)};
  endfunction
  function automatic line_t mem_line(addr_t a);
    return {i_mem.peek(a + 8), i_mem.peek(a)};
  endfunction

  task automatic do_flush();
    @(negedge clk);
    flush = 1;
    while (!flush_done) @(negedge clk);
    @(negedge clk);
    flush = 0;
  endtask

  initial begin
    cr_t   c;
    line_t d;
    addr_t A, B, C, D, E, NC;
    int    rs0, cu0, wb0, n_snoop_data, n_passdirty;
    for (int p = 0; p < 4; p++) req[p] = '0;
    flush = 0; ac_valid = 0; ac = '0; cr_ready = 0; cd_ready = 0; force_shared = 0;
    n_rs = 0; n_ru = 0; n_cu = 0; n_wb = 0; n_ncr = 0; n_ncw = 0;
    n_snoop_data = 0; n_passdirty = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    while (!init_done) @(negedge clk);

    // ---- part 1: directed ----
    A = Base + 64'h40; B = Base + 64'h80; C = B + CacheBytes; D = Base + 64'h100;
    E = Base + 64'h140; NC = 64'h0000_1000;
    rs0 = n_rs;
    load(A, "load miss");
    check(n_rs == rs0 + 1, "load miss issues ReadShared");
    cu0 = n_cu; rs0 = n_rs;
    store(A, 64'h1111_2222_3333_4444);
    check(n_cu == cu0 && n_rs == rs0 && n_ru == 0, "store on an exclusive line is silent");
    snoop(AcReadShared, A, c, d);
    check(c.data_transfer && c.is_shared && !c.pass_dirty && c.was_unique, "ReadShared snoop on M: data, shared, keeps dirty");
    check(d == ref_line(A), "ReadShared snoop data");
    store(A + 8, 64'h5555_6666_7777_8888);
    check(n_cu == cu0 + 1, "store on a shared line issues CleanUnique");
    snoop(AcReadUnique, A, c, d);
    check(c.data_transfer && c.pass_dirty, "ReadUnique snoop on M: data and PassDirty");
    check(d == ref_line(A), "ReadUnique snoop data");
    mem_put(A, d);
    rs0 = n_rs;
    load(A + 8, "reload after invalidation");
    check(n_rs == rs0 + 1, "invalidated line is fetched again");

    store(B, 64'hBBBB_0000_BBBB_0001);
    check(n_ru == 1, "store miss issues ReadUnique");
    wb0 = n_wb;
    load(C, "conflicting load");
    check(n_wb == wb0 + 1, "dirty victim written back");
    check(mem_line(B) == ref_line(B), "victim data in memory");
    load(B, "victim reloaded");

    store(NC, 64'hC0FF_EE00_C0FF_EE01);
    check(n_ncw == 1 && i_mem.peek(NC) == 64'hC0FF_EE00_C0FF_EE01, "non-cacheable store reaches memory");
    load(NC, "non-cacheable load");
    check(n_ncr == 1, "non-cacheable load issues ReadNoSnoop");

    force_shared = 1;
    load(D, "shared refill");
    force_shared = 0;
    snoop(AcCleanInvalid, D, c, d);
    check(!c.data_transfer && !c.pass_dirty && !c.was_unique, "CleanInvalid on a clean shared line: no data");
    rs0 = n_rs;
    load(D, "reload after CleanInvalid");
    check(n_rs == rs0 + 1, "CleanInvalid invalidated the line");

    store(E, 64'hEEEE_EEEE_0000_0001);
    wb0 = n_wb;
    do_flush();
    check(n_wb > wb0 && mem_line(E) == ref_line(E), "flush writes dirty lines back");
    rs0 = n_rs;
    load(E, "load after flush");
    check(n_rs == rs0 + 1, "flush invalidates");

    // atomics: on a missing line (ReadUnique), on an M line (in place), on
    // a shared line (CleanUnique), 32-bit halves, signed and unsigned compares
    begin
      addr_t F;
      F = Base + 64'h180;
      rs0 = n_ru;
      amo(2, AmoAdd, F, 64'd5, '1, "AMO on a miss");
      check(n_ru == rs0 + 1, "AMO miss fetches with ReadUnique");
      amo(3, AmoAdd, F, 64'hFFFF_FFFF_FFFF_FFFF, '1, "AMO on an M line");
      amo(2, AmoMax, F + 8, 64'h8000_0000_0000_0000, '1, "signed max");
      amo(2, AmoMaxu, F + 8, 64'h8000_0000_0000_0000, '1, "unsigned max");
      amo(3, AmoMin, F, 64'h0000_0001_7FFF_FFFF, 8'h0F, "32-bit signed min, low half");
      amo(3, AmoXor, F, 64'h1234_5678_0000_0000, 8'hF0, "32-bit xor, high half");
      snoop(AcReadShared, F, c, d);
      check(c.data_transfer && d == ref_line(F), "snoop sees the AMO results");
      cu0 = n_cu;
      amo(2, AmoSwap, F, 64'hABCD, '1, "AMO on a shared line");
      check(n_cu == cu0 + 1, "AMO on a shared line upgrades with CleanUnique");
      load(F, "load after AMOs");
    end

    // ---- part 2: random ----
    for (int k = 0; k < 1500; k++) begin
      addr_t a;
      int    op;
      a = Base + addr_t'($urandom % 2) * 16 + addr_t'($urandom % 3) * CacheBytes + addr_t'($urandom % 2) * 8;
      op = $urandom % 8;
      force_shared = $urandom % 2;
      if (op < 3) load(a, "random");
      else if (op < 5) store(a, {$urandom, $urandom});
      else if (op < 6) begin
        strb_t be;
        case ($urandom % 3)
          0: be = 8'h0F;
          1: be = 8'hF0;
          default: be = '1;
        endcase
        amo(($urandom % 2) ? 2 : 3, amo_op_e'(1 + $urandom % 9), a, {$urandom, $urandom}, be, "random");
      end
      else begin
        acsnoop_e sn;
        addr_t la;
        la = {a[63:4], 4'h0};
        case ($urandom % 4)
          0: sn = AcReadOnce;
          1: sn = AcReadShared;
          2: sn = AcReadUnique;
          default: sn = AcCleanInvalid;
        endcase
        snoop(sn, la, c, d);
        if (c.data_transfer) begin
          n_snoop_data++;
          check(d == ref_line(la), $sformatf("snoop data for %h", la));
        end
        if (c.pass_dirty) begin
          n_passdirty++;
          mem_put(la, d);
        end
      end
    end
    force_shared = 0;
    do_flush();
    foreach (ref_mem[a]) check(i_mem.peek(a) == ref_mem[a], $sformatf("memory after final flush at %h", a));
    check(n_snoop_data > 0 && n_passdirty > 0, "random snoops transferred data and ownership");
    $display("  ReadShared %0d ReadUnique %0d CleanUnique %0d WriteBack %0d snoop data %0d pass dirty %0d AMOs %0d",
             n_rs, n_ru, n_cu, n_wb, n_snoop_data, n_passdirty, n_amo);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
