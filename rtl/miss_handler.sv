// miss_handler: the data cache's initiator on its ACE port.
//
// Serves, one at a time, the requests of the cache controllers (fixed
// priority, lowest index first) and whole-cache flushes:
//   Refill  - read the line stored at the index; if it is a different,
//             dirty line, write it back with a WriteBack burst (the victim
//             stays valid in the cache until it is overwritten, so snoops
//             can still be answered from it); then fetch the new line with
//             ReadShared (load miss) or ReadUnique (store miss) and install
//             it. The flags come from the R response: shared = IsShared,
//             dirty = PassDirty. If, while the line is being fetched, a snoop
//             read of it is signalled the line is installed shared; if a
//             snoop invalidation is signalled it is installed invalid.
//             A unique refill that finds the line already present in a
//             shared state turns into an upgrade, so a dirty (O) line is
//             never re-fetched as clean.
//   Upgrade - CleanUnique for a shared line the store unit wants to write;
//             afterwards the flags are set unique (dirty kept) unless the
//             line was snooped in the meantime, in which case the requester
//             simply looks the line up again.
//   NcRead / NcWrite - single-beat ReadNoSnoop / WriteNoSnoop for
//             non-cacheable addresses; the read data is returned.
//   Flush   - walk every index, write back dirty lines, invalidate all.
//   AMO     - read the line; if it is present and unique, write op(old,
//             operand) into it (state M) and return the old word. Otherwise
//             make it unique first, by the refill path with ReadUnique or by
//             an upgrade, and apply the operation in the very write that
//             installs the line or clears its shared flag (otherwise another
//             core's snoop could take the line in the gap, and two cores
//             could keep stealing it from each other). If a snoop touches the
//             line between read and write, the attempt is repeated, so the
//             read-modify-write is atomic with respect to the other cores.
// busy_o / busy_addr_o (busy_all_o during a flush) tell the controllers which
// index is being changed. The list of duties (refills, atomics, flushes,
// write-backs) and the snoop monitoring follow the cache description; how
// each is carried out, AMOs done in the cache on a unique line included, is
// this design's choice.
module miss_handler
  import culsans_pkg::*;
#(
  parameter int unsigned NumReq    = 4,
  parameter int unsigned IndexBits = 10
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  mh_req_t     req_i [NumReq],
  output logic [NumReq-1:0] done_o,
  output data_t       rdata_o,
  input  logic        flush_i,
  output logic        flush_done_o,
  output sram_req_t   sram_req_o,
  input  logic        sram_gnt_i,
  input  sram_rsp_t   sram_rsp_i,
  input  snoop_note_t snoop_i,
  output logic        busy_o,
  output logic        busy_all_o,
  output line_addr_t  busy_addr_o,
  // ACE master
  output logic ar_valid_o, input  logic ar_ready_i, output ar_t ar_o,
  output logic aw_valid_o, input  logic aw_ready_i, output aw_t aw_o,
  output logic w_valid_o,  input  logic w_ready_i,  output w_t  w_o,
  input  logic r_valid_i,  output logic r_ready_o,  input  r_t  r_i,
  input  logic b_valid_i,  output logic b_ready_o,  input  b_t  b_i
);
  localparam int unsigned RW = (NumReq > 1) ? $clog2(NumReq) : 1;
  localparam int unsigned BW = $clog2(BeatsPerLine);

  typedef enum logic [4:0] {
    Idle, VicRd, VicWait, WbAw, WbW, WbB, RfAr, RfR, RfWr,
    UpAr, UpR, UpRd, UpWait, UpWr, NcAr, NcR, NcAw, NcW, NcB,
    FlRd, FlWait, FlInv, FlNext, AmRd, AmWait, AmWr, Done
  } state_e;
  state_e state_q, state_d;

  logic [RW-1:0]  who_q;
  mh_req_t        rq_q;
  line_addr_t     wb_addr_q;
  line_t          line_q;
  logic [BW-1:0]  beat_q;
  flags_t         fill_q;
  logic           seen_read_q, seen_inval_q;
  logic [IndexBits-1:0] fl_idx_q;
  logic           flushing_q;
  data_t          rdata_q;
  logic           amo_done_q;

  // AMO operand word within the line
  localparam int unsigned WordSel = $clog2(BeatsPerLine);
  logic [WordSel-1:0] amo_word;
  data_t              amo_old, amo_new;
  assign amo_word = rq_q.addr[LineOffset-1 -: WordSel];
  assign amo_old  = line_q[amo_word*DataWidth+:DataWidth];
  assign amo_new  = amo_result(rq_q.amo, amo_old, rq_q.wdata, rq_q.be);
  line_t amo_line;
  always_comb begin
    amo_line = line_q;
    amo_line[amo_word*DataWidth+:DataWidth] = amo_new;
  end
  logic amo_wr;       // the SRAM request of this cycle carries the AMO's write
  logic amo_commit;   // ... and it is granted
  assign amo_commit = amo_wr && sram_gnt_i;

  line_addr_t tgt;
  assign tgt = line_of(rq_q.addr);

  // pick the highest-priority waiting requester
  logic          any_req;
  logic [RW-1:0] pick;
  always_comb begin
    any_req = 1'b0;
    pick    = '0;
    for (int i = NumReq-1; i >= 0; i--)
      if (req_i[i].valid) begin
        any_req = 1'b1;
        pick    = RW'(i);
      end
  end

  logic note_hit;
  assign note_hit = snoop_i.addr == tgt;

  always_comb begin
    state_d      = state_q;
    done_o       = '0;
    flush_done_o = 1'b0;
    sram_req_o   = '0;
    sram_req_o.addr = tgt;
    ar_valid_o = 1'b0; ar_o = '0;
    aw_valid_o = 1'b0; aw_o = '0;
    w_valid_o  = 1'b0; w_o  = '0;
    r_ready_o  = 1'b0;
    b_ready_o  = 1'b0;
    amo_wr     = 1'b0;

    unique case (state_q)
      Idle: begin
        if (flush_i) state_d = FlRd;
        else if (any_req) begin
          unique case (req_i[pick].op)
            MhUpgrade: state_d = UpAr;
            MhNcRead:  state_d = NcAr;
            MhNcWrite: state_d = NcAw;
            MhAmo:     state_d = AmRd;
            default:   state_d = VicRd;
          endcase
        end
      end
      // ---------------- refill ----------------
      VicRd: begin
        sram_req_o.valid = 1'b1;
        if (sram_gnt_i) state_d = VicWait;
      end
      VicWait: begin
        if (sram_rsp_i.hit && (rq_q.op == MhRefillShared || !sram_rsp_i.flags.shared))
          state_d = Done;                      // someone else brought it in already
        else if (sram_rsp_i.hit)
          state_d = UpAr;                      // present but shared: upgrade, keep dirty
        else if (sram_rsp_i.flags.valid && sram_rsp_i.flags.dirty && !sram_rsp_i.hit)
          state_d = WbAw;
        else
          state_d = RfAr;
      end
      WbAw: begin
        aw_valid_o  = 1'b1;
        aw_o.addr   = {wb_addr_q, {LineOffset{1'b0}}};
        aw_o.len    = 8'(BeatsPerLine-1);
        aw_o.size   = 3'($clog2(StrbWidth));
        aw_o.snoop  = AwWriteBack;
        aw_o.domain = DomInnerShareable;
        if (aw_ready_i) state_d = WbW;
      end
      WbW: begin
        w_valid_o = 1'b1;
        w_o.data  = line_q[beat_q*DataWidth+:DataWidth];
        w_o.strb  = '1;
        w_o.last  = (beat_q == BW'(BeatsPerLine-1));
        if (w_ready_i && w_o.last) state_d = WbB;
      end
      WbB: begin
        b_ready_o = 1'b1;
        if (b_valid_i) state_d = flushing_q ? FlInv : RfAr;
      end
      RfAr: begin
        ar_valid_o  = 1'b1;
        ar_o.addr   = {tgt, {LineOffset{1'b0}}};
        ar_o.len    = 8'(BeatsPerLine-1);
        ar_o.size   = 3'($clog2(StrbWidth));
        ar_o.snoop  = (rq_q.op == MhRefillShared) ? ArReadShared : ArReadUnique;
        ar_o.domain = DomInnerShareable;
        if (ar_ready_i) state_d = RfR;
      end
      RfR: begin
        r_ready_o = 1'b1;
        if (r_valid_i && r_i.last) state_d = RfWr;
      end
      RfWr: begin
        sram_req_o.valid   = 1'b1;
        sram_req_o.we_meta = 1'b1;
        sram_req_o.flags   = fill_q;
        if (seen_inval_q || (note_hit && snoop_i.inval)) sram_req_o.flags = '0;
        else if (seen_read_q || (note_hit && snoop_i.read)) sram_req_o.flags.shared = 1'b1;
        sram_req_o.data_be = '1;
        sram_req_o.data    = line_q;
        // an AMO is applied in the same write that installs the line, so no
        // snoop can take the line away in between
        if (rq_q.op == MhAmo && sram_req_o.flags.valid && !sram_req_o.flags.shared) begin
          sram_req_o.flags.dirty = 1'b1;
          sram_req_o.data        = amo_line;
          amo_wr                 = 1'b1;
        end
        if (sram_gnt_i) state_d = Done;
      end
      // ---------------- upgrade ----------------
      UpAr: begin
        ar_valid_o  = 1'b1;
        ar_o.addr   = {tgt, {LineOffset{1'b0}}};
        ar_o.len    = 8'd0;
        ar_o.size   = 3'($clog2(StrbWidth));
        ar_o.snoop  = ArCleanUnique;
        ar_o.domain = DomInnerShareable;
        if (ar_ready_i) state_d = UpR;
      end
      UpR: begin
        r_ready_o = 1'b1;
        if (r_valid_i && r_i.last) state_d = UpRd;
      end
      UpRd: begin
        sram_req_o.valid = 1'b1;
        if (sram_gnt_i) state_d = UpWait;
      end
      UpWait: state_d = (sram_rsp_i.hit && !seen_read_q && !seen_inval_q) ? UpWr : Done;
      UpWr: begin
        if (note_hit && (snoop_i.read || snoop_i.inval)) state_d = Done;
        else begin
          sram_req_o.valid   = 1'b1;
          sram_req_o.we_meta = 1'b1;
          sram_req_o.flags   = '{valid: 1'b1, shared: 1'b0, dirty: fill_q.dirty};
          if (rq_q.op == MhAmo) begin            // AMO in the upgrading write
            sram_req_o.flags.dirty = 1'b1;
            sram_req_o.data_be     = '1;
            sram_req_o.data        = amo_line;
            amo_wr                 = 1'b1;
          end
          if (sram_gnt_i) state_d = Done;
        end
      end
      // ---------------- non-cacheable ----------------
      NcAr: begin
        ar_valid_o = 1'b1;
        ar_o.addr  = rq_q.addr;
        ar_o.size  = 3'($clog2(StrbWidth));
        if (ar_ready_i) state_d = NcR;
      end
      NcR: begin
        r_ready_o = 1'b1;
        if (r_valid_i && r_i.last) state_d = Done;
      end
      NcAw: begin
        aw_valid_o = 1'b1;
        aw_o.addr  = rq_q.addr;
        aw_o.size  = 3'($clog2(StrbWidth));
        if (aw_ready_i) state_d = NcW;
      end
      NcW: begin
        w_valid_o = 1'b1;
        w_o.data  = rq_q.wdata;
        w_o.strb  = rq_q.be;
        w_o.last  = 1'b1;
        if (w_ready_i) state_d = NcB;
      end
      NcB: begin
        b_ready_o = 1'b1;
        if (b_valid_i) state_d = Done;
      end
      // ---------------- flush ----------------
      FlRd: begin
        sram_req_o.valid = 1'b1;
        sram_req_o.addr  = line_addr_t'(fl_idx_q);
        if (sram_gnt_i) state_d = FlWait;
      end
      FlWait: begin
        if (sram_rsp_i.flags.valid && sram_rsp_i.flags.dirty) state_d = WbAw;
        else if (sram_rsp_i.flags.valid)                      state_d = FlInv;
        else                                                   state_d = FlNext;
      end
      FlInv: begin
        sram_req_o.valid   = 1'b1;
        sram_req_o.we_meta = 1'b1;
        sram_req_o.addr    = wb_addr_q;
        sram_req_o.flags   = '0;
        if (sram_gnt_i) state_d = FlNext;
      end
      FlNext: begin
        if (fl_idx_q == '1) begin
          flush_done_o = 1'b1;
          state_d      = Idle;
        end else state_d = FlRd;
      end
      // ---------------- atomic memory operation ----------------
      AmRd: begin
        sram_req_o.valid = 1'b1;
        if (sram_gnt_i) state_d = AmWait;
      end
      AmWait: begin
        if (sram_rsp_i.hit && !sram_rsp_i.flags.shared)
          state_d = AmWr;                      // unique (E or M): modify in place
        else if (sram_rsp_i.hit)
          state_d = UpAr;                      // shared: CleanUnique first
        else if (sram_rsp_i.flags.valid && sram_rsp_i.flags.dirty)
          state_d = WbAw;                      // miss: write back the victim,
        else
          state_d = RfAr;                      // then ReadUnique
      end
      AmWr: begin
        if (seen_read_q || seen_inval_q || (note_hit && (snoop_i.read || snoop_i.inval))) begin
          state_d = AmRd;                      // snooped since the read: start over
        end else begin
          sram_req_o.valid   = 1'b1;
          sram_req_o.we_meta = 1'b1;
          sram_req_o.flags   = '{valid: 1'b1, shared: 1'b0, dirty: 1'b1};
          for (int unsigned b = 0; b < StrbWidth; b++)
            sram_req_o.data_be[32'(amo_word)*StrbWidth + b] = 1'b1;
          sram_req_o.data    = {BeatsPerLine{amo_new}};
          amo_wr             = 1'b1;
          if (sram_gnt_i) state_d = Done;
        end
      end
      Done: begin
        if (rq_q.op == MhAmo && !amo_done_q) begin
          state_d = AmRd;                      // line obtained: now do the AMO
        end else begin
          done_o[who_q] = 1'b1;
          state_d       = Idle;
        end
      end
      default: state_d = Idle;
    endcase
  end

  assign rdata_o     = rdata_q;
  assign busy_o      = (state_q != Idle) && !(state_q inside {NcAr, NcR, NcAw, NcW, NcB});
  assign busy_all_o  = flushing_q;
  assign busy_addr_o = tgt;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q      <= Idle;
      who_q        <= '0;
      rq_q         <= '0;
      wb_addr_q    <= '0;
      line_q       <= '0;
      beat_q       <= '0;
      fill_q       <= '0;
      seen_read_q  <= 1'b0;
      seen_inval_q <= 1'b0;
      fl_idx_q     <= '0;
      flushing_q   <= 1'b0;
      rdata_q      <= '0;
      amo_done_q   <= 1'b0;
    end else begin
      state_q <= state_d;
      if (state_q == Idle) begin
        beat_q       <= '0;
        seen_read_q  <= 1'b0;
        seen_inval_q <= 1'b0;
        amo_done_q   <= 1'b0;
        if (flush_i) begin
          flushing_q <= 1'b1;
          fl_idx_q   <= '0;
        end else if (any_req) begin
          who_q <= pick;
          rq_q  <= req_i[pick];
        end
      end
      if (state_q == FlNext) begin
        fl_idx_q <= fl_idx_q + 1'b1;
        if (fl_idx_q == '1) flushing_q <= 1'b0;
      end
      // victim / flushed line
      if (state_q inside {VicWait, FlWait, AmWait}) begin
        wb_addr_q <= sram_rsp_i.victim;
        line_q    <= sram_rsp_i.data;
        beat_q    <= '0;
      end
      if (state_q == WbW && w_ready_i) beat_q <= beat_q + 1'b1;
      if (state_q == WbB) beat_q <= '0;
      // refill data and response flags
      if (state_q == RfR && r_valid_i) begin
        line_q[beat_q*DataWidth+:DataWidth] <= r_i.data;
        beat_q <= beat_q + 1'b1;
        fill_q <= '{valid: 1'b1, shared: r_i.resp[3], dirty: r_i.resp[2]};
      end
      if (state_q == UpWait) begin
        fill_q <= sram_rsp_i.flags;
        line_q <= sram_rsp_i.data;
      end
      if (state_q == NcR && r_valid_i) rdata_q <= r_i.data;
      if (amo_commit) begin
        rdata_q    <= amo_old;
        amo_done_q <= 1'b1;
      end
      // snoop monitoring while the line is fetched or upgraded
      if (state_q inside {RfAr, RfR, RfWr, UpAr, UpR, UpRd, UpWait, UpWr, AmRd, AmWait, AmWr} && note_hit) begin
        if (snoop_i.read)  seen_read_q  <= 1'b1;
        if (snoop_i.inval) seen_inval_q <= 1'b1;
      end
      // the AMO's own read starts a fresh observation window
      if (state_d == AmRd && state_q != AmRd) begin
        seen_read_q  <= 1'b0;
        seen_inval_q <= 1'b0;
      end
    end
  end
endmodule
