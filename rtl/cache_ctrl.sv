// cache_ctrl: one core-side cache controller of the write-back data cache.
//
// The cache has one of these per requester (PTW, load unit, accelerator,
// store unit); they differ only in their SRAM priority. A request is accepted
// when the controller is idle (rsp_o.ready) and finishes with a one-cycle
// rsp_o.rvalid, carrying the 64-bit word for a load.
//   1. Lookup: read flags, tag and line through the arbiter.
//   2. Load hit: return the word. Store hit on a unique line (E or M): write
//      the bytes and set the flags to M (valid, not shared, dirty).
//   3. Miss: ask the miss handler for a ReadShared (load) or ReadUnique
//      (store) refill; store hit on a shared line (S or O): ask for a
//      CleanUnique upgrade. When the miss handler is done, look up again.
//   4. Addresses below CachedBase bypass the cache: the miss handler issues a
//      single-beat ReadNoSnoop / WriteNoSnoop.
//   5. Atomic memory operations (req_i.amo) are handed to the miss handler
//      as a whole; the old word it returns is the response data.
// Between the lookup and the store's write, other agents may change the line.
// The controller therefore drops the write and looks up again if, in that
// window, the snoop controller reports a snoop read or invalidation of the
// line (snoop_i), another port rewrites the line's tag and flags (seen on the
// arbiter's output bus_i), or the miss handler is working on the same index.
// The snoop-signal rule is the one the cache description gives; the bus and
// miss-handler checks are this design's completion of it.
module cache_ctrl
  import culsans_pkg::*;
#(
  parameter int unsigned IndexBits  = 10,
  parameter addr_t       CachedBase = 64'h8000_0000
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  dc_req_t     req_i,
  output dc_rsp_t     rsp_o,
  // SRAM port through the arbiter
  output sram_req_t   sram_req_o,
  input  logic        sram_gnt_i,
  input  sram_rsp_t   sram_rsp_i,
  input  sram_req_t   bus_i,
  // snoop control signals and miss-handler status
  input  snoop_note_t snoop_i,
  input  logic        mh_busy_i,
  input  logic        mh_busy_all_i,
  input  line_addr_t  mh_busy_addr_i,
  // miss handler request
  output mh_req_t     mh_req_o,
  input  logic        mh_done_i,
  input  data_t       mh_rdata_i
);
  typedef enum logic [2:0] { Idle, Lookup, LookupWait, Write, Miss, Done } state_e;
  state_e  state_q, state_d;
  dc_req_t r_q;
  mh_op_e  mh_op_q, mh_op_d;
  data_t   rdata_q, rdata_d;
  logic    conflict_q, conflict_d;

  localparam int unsigned WordSel = $clog2(BeatsPerLine);
  line_addr_t line;
  logic [WordSel-1:0] word;
  assign line = line_of(r_q.addr);
  assign word = r_q.addr[LineOffset-1 -: WordSel];

  function automatic logic same_index(line_addr_t a, line_addr_t b);
    return a[IndexBits-1:0] == b[IndexBits-1:0];
  endfunction

  // anything that may have changed our line since the lookup
  // (a rewrite seen on the bus only takes effect from the next cycle: a
  // port that rewrites the line in this cycle has the grant, so ours waits)
  logic conflict_ext, conflict_now;
  assign conflict_ext =
      ((snoop_i.read || snoop_i.inval) && snoop_i.addr == line) ||
      (mh_busy_i && (mh_busy_all_i || same_index(mh_busy_addr_i, line)));
  assign conflict_now = conflict_ext ||
      (bus_i.valid && bus_i.we_meta && !sram_gnt_i && same_index(bus_i.addr, line));

  always_comb begin
    state_d    = state_q;
    mh_op_d    = mh_op_q;
    rdata_d    = rdata_q;
    conflict_d = conflict_q || conflict_now;
    sram_req_o = '0;
    sram_req_o.addr = line;
    mh_req_o   = '0;
    mh_req_o.op    = mh_op_q;
    mh_req_o.addr  = r_q.addr;
    mh_req_o.wdata = r_q.wdata;
    mh_req_o.be    = r_q.be;
    mh_req_o.amo   = r_q.amo;
    rsp_o      = '0;
    rsp_o.rdata = rdata_q;

    unique case (state_q)
      Idle: begin
        rsp_o.ready = 1'b1;
        if (req_i.valid) begin
          if (req_i.amo != AmoNone) begin
            mh_op_d = MhAmo;
            state_d = Miss;
          end else if (req_i.addr < CachedBase) begin
            mh_op_d = req_i.we ? MhNcWrite : MhNcRead;
            state_d = Miss;
          end else begin
            state_d = Lookup;
          end
        end
      end
      Lookup: begin
        sram_req_o.valid = 1'b1;
        if (sram_gnt_i) begin
          state_d    = LookupWait;
          conflict_d = conflict_now;
        end
      end
      LookupWait: begin
        rdata_d = sram_rsp_i.data[word*DataWidth+:DataWidth];
        if (!sram_rsp_i.hit) begin
          mh_op_d = r_q.we ? MhRefillUnique : MhRefillShared;
          state_d = Miss;
        end else if (!r_q.we) begin
          state_d = Done;
        end else if (sram_rsp_i.flags.shared) begin
          mh_op_d = MhUpgrade;
          state_d = Miss;
        end else begin
          state_d = Write;
        end
      end
      Write: begin
        if (conflict_q || conflict_ext) begin
          state_d = Lookup;          // line may have changed: look up again
        end else begin
          sram_req_o.valid   = 1'b1;
          sram_req_o.we_meta = 1'b1;
          sram_req_o.flags   = '{valid: 1'b1, shared: 1'b0, dirty: 1'b1};
          for (int unsigned b = 0; b < StrbWidth; b++)
            sram_req_o.data_be[32'(word)*StrbWidth + b] = r_q.be[b];
          sram_req_o.data = {BeatsPerLine{r_q.wdata}};
          if (sram_gnt_i) state_d = Done;
        end
      end
      Miss: begin
        mh_req_o.valid = 1'b1;
        if (mh_done_i) begin
          if (mh_op_q inside {MhNcRead, MhNcWrite, MhAmo}) begin
            rdata_d = mh_rdata_i;
            state_d = Done;
          end else begin
            state_d = Lookup;
          end
        end
      end
      Done: begin
        rsp_o.rvalid = 1'b1;
        state_d      = Idle;
      end
      default: state_d = Idle;
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q    <= Idle;
      r_q        <= '0;
      mh_op_q    <= MhRefillShared;
      rdata_q    <= '0;
      conflict_q <= 1'b0;
    end else begin
      state_q    <= state_d;
      mh_op_q    <= mh_op_d;
      rdata_q    <= rdata_d;
      conflict_q <= conflict_d;
      if (state_q == Idle && req_i.valid) r_q <= req_i;
    end
  end
endmodule
