// snoop_ctrl: snoop controller of the write-back data cache.
//
// Serves the snoop requests the coherency unit sends on AC, one at a time:
//   1. accept AC, read the line's flags, tag and data (SRAM priority 1, just
//      below the miss handler);
//   2. compute the response and the new line state, write the new flags if
//      they change;
//   3. answer on CR and, when DataTransfer is set, send the line on CD as a
//      two-beat burst.
// State changes (MOESI, flags valid/shared/dirty):
//   ReadOnce     - data if valid, state unchanged;
//   ReadShared   - data if valid, IsShared; M->O, E->S, O and S unchanged;
//   ReadUnique   - data if valid, PassDirty if dirty; line invalidated;
//   CleanInvalid - data and PassDirty only if dirty; line invalidated.
// If another agent rewrites the line's slot (a refill by the miss handler)
// between the read and the flags write, the snoop is looked up again.
// WasUnique reports a valid line that was not shared. From the cycle AC is
// taken until the flags are written, snoop_o tells the other controllers and
// the miss handler that a snoop read (ReadOnce/ReadShared) or invalidation
// (ReadUnique/CleanInvalid) of that line is under way, so that none of them
// completes a unique access on stale state. The channels and the snoop
// signals follow the cache description; the exact responses are this
// design's reading of the ACE rules.
module snoop_ctrl
  import culsans_pkg::*;
#(
  parameter int unsigned IndexBits = 10
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        ac_valid_i, output logic ac_ready_o, input  ac_t ac_i,
  output logic        cr_valid_o, input  logic cr_ready_i, output cr_t cr_o,
  output logic        cd_valid_o, input  logic cd_ready_i, output cd_t cd_o,
  output sram_req_t   sram_req_o,
  input  logic        sram_gnt_i,
  input  sram_rsp_t   sram_rsp_i,
  input  sram_req_t   bus_i,
  output snoop_note_t snoop_o
);
  typedef enum logic [2:0] { Idle, Rd, RdWait, Wr, Cr, Cd } state_e;
  state_e   state_q, state_d;
  ac_t      ac_q;
  cr_t      cr_q, cr_d;
  flags_t   nflags_q, nflags_d;
  line_t    line_q;
  logic     beat_q;
  logic     moved_q;   // the line's slot was rewritten after our read

  logic moved_now;
  assign moved_now = bus_i.valid && bus_i.we_meta && !sram_gnt_i &&
                     (bus_i.addr[IndexBits-1:0] == ac_q.addr[LineOffset+:IndexBits]);

  logic   hit;
  flags_t f;
  assign hit = sram_rsp_i.hit;
  assign f   = sram_rsp_i.flags;

  always_comb begin
    state_d    = state_q;
    cr_d       = cr_q;
    nflags_d   = nflags_q;
    ac_ready_o = (state_q == Idle);
    sram_req_o = '0;
    sram_req_o.addr = line_of(ac_q.addr);
    cr_valid_o = 1'b0;
    cd_valid_o = 1'b0;
    unique case (state_q)
      Idle: if (ac_valid_i) state_d = Rd;
      Rd: begin
        sram_req_o.valid = 1'b1;
        if (sram_gnt_i) state_d = RdWait;
      end
      RdWait: begin
        cr_d = '0;
        cr_d.was_unique = hit && !f.shared;
        nflags_d = f;
        unique case (ac_q.snoop)
          AcReadOnce: begin
            cr_d.data_transfer = hit;
            cr_d.is_shared     = hit;
          end
          AcReadShared: begin
            cr_d.data_transfer = hit;
            cr_d.is_shared     = hit;
            nflags_d.shared    = 1'b1;
          end
          AcReadUnique: begin
            cr_d.data_transfer = hit;
            cr_d.pass_dirty    = hit && f.dirty;
            nflags_d           = '0;
          end
          default: begin  // CleanInvalid
            cr_d.data_transfer = hit && f.dirty;
            cr_d.pass_dirty    = hit && f.dirty;
            nflags_d           = '0;
          end
        endcase
        state_d = (hit && nflags_d != f) ? Wr : Cr;
      end
      Wr: if (moved_q) begin
        state_d = Rd;                    // read the slot again, recompute
      end else begin
        sram_req_o.valid   = 1'b1;
        sram_req_o.we_meta = 1'b1;
        sram_req_o.flags   = nflags_q;
        if (sram_gnt_i) state_d = Cr;
      end
      Cr: begin
        cr_valid_o = 1'b1;
        if (cr_ready_i) state_d = cr_q.data_transfer ? Cd : Idle;
      end
      Cd: begin
        cd_valid_o = 1'b1;
        if (cd_ready_i && cd_o.last) state_d = Idle;
      end
      default: state_d = Idle;
    endcase
  end

  assign cr_o      = cr_q;
  assign cd_o.data = line_q[32'(beat_q)*DataWidth+:DataWidth];
  assign cd_o.last = (beat_q == 1'(BeatsPerLine-1));

  always_comb begin
    snoop_o       = '0;
    snoop_o.addr  = line_of(ac_q.addr);
    if (state_q inside {Rd, RdWait, Wr}) begin
      snoop_o.read  = ac_q.snoop inside {AcReadOnce, AcReadShared};
      snoop_o.inval = ac_q.snoop inside {AcReadUnique, AcCleanInvalid};
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q  <= Idle;
      ac_q     <= '{addr: '0, snoop: AcReadOnce};
      cr_q     <= '0;
      nflags_q <= '0;
      line_q   <= '0;
      beat_q   <= 1'b0;
      moved_q  <= 1'b0;
    end else begin
      state_q  <= state_d;
      cr_q     <= cr_d;
      nflags_q <= nflags_d;
      if (state_q == Idle && ac_valid_i) ac_q <= ac_i;
      if (state_q == Rd) moved_q <= 1'b0;
      else if (state_q inside {RdWait, Wr} && moved_now) moved_q <= 1'b1;
      if (state_q == RdWait) line_q <= sram_rsp_i.data;
      if (state_q == Cr) beat_q <= 1'b0;
      else if (cd_valid_o && cd_ready_i) beat_q <= !beat_q;
    end
  end
endmodule
