// snoop_unit: collects the snoop responses of a coherent transaction and
// decides where its data comes from.
//
// Transactions arrive in AC order from the decoder through a FIFO (the snoop
// channels carry no ID, so the order identifies the responses). For the
// transaction at the head the unit accepts one CR from every snooped core, in
// any order, then one CD burst from every core that answered DataTransfer.
// The line of the first responder (lowest core index among those sending
// data) is kept in a line buffer; the bursts of the others are drained.
//   - A read whose line was supplied by a cache is answered from the buffer
//     with an R burst to the initiator (IsShared / PassDirty taken from the
//     CRs), and its collision-table entry is released on RLAST.
//   - A CleanUnique / WriteUnique that found a dirty copy (PassDirty) pushes
//     the buffered line into the memory unit's write-back FIFO.
//   - Everything else becomes a command for the memory unit: a memory read,
//     the initiator's write, or a data-less completion.
// The ordering FIFO, the line buffer and the two destinations of the CD data
// follow the controller's block diagram; "first responder = lowest index",
// the FIFO depth and the response flags are this design's choices.
module snoop_unit
  import culsans_pkg::*;
#(
  parameter int unsigned NumCores  = 2,
  parameter int unsigned FifoDepth = 4
) (
  input  logic clk_i,
  input  logic rst_ni,
  // from the decoder
  input  logic     txn_valid_i,
  output logic     txn_ready_o,
  input  ccu_txn_t txn_i,
  // snoop response and data channels
  input  logic [NumCores-1:0] cr_valid_i, output logic [NumCores-1:0] cr_ready_o, input cr_t cr_i [NumCores],
  input  logic [NumCores-1:0] cd_valid_i, output logic [NumCores-1:0] cd_ready_o, input cd_t cd_i [NumCores],
  // R burst to the initiator
  output logic r_valid_o, input logic r_ready_i, output r_t r_o,
  // memory unit command and write-back data
  output logic     cmd_valid_o, input logic cmd_ready_i, output mem_cmd_t cmd_o,
  output logic     wb_valid_o,  input logic wb_ready_i,  output line_t    wb_o,
  // collision-table release
  output logic     release_o,
  output ccu_tag_t release_tag_o,
  // statistics
  output logic     snoop_hit_o,     // a read served from another cache
  output logic     snoop_wb_o       // a dirty line sent to memory
);
  localparam int unsigned BW = $clog2(BeatsPerLine);

  logic     q_valid, q_pop;
  ccu_txn_t q_txn;
  fifo_v #(.T(ccu_txn_t), .Depth(FifoDepth)) i_order (
    .clk_i, .rst_ni,
    .push_valid_i(txn_valid_i), .push_ready_o(txn_ready_o), .push_data_i(txn_i),
    .pop_valid_o(q_valid), .pop_ready_i(q_pop), .pop_data_o(q_txn)
  );

  typedef enum logic [2:0] { Idle, CollectCr, CollectCd, SendR, Dispatch } state_e;
  state_e state_q, state_d;

  logic [NumCores-1:0] cr_pend_q, cr_pend_d, cd_pend_q, cd_pend_d;
  logic                shared_q, shared_d, dirty_q, dirty_d;
  logic [NumCores-1:0] first_q, first_d;   // one-hot first responder
  data_t               buf_q [BeatsPerLine];
  logic [BW-1:0]       cd_beat_q, r_beat_q;
  logic                buf_we;

  function automatic logic is_read(ccu_op_e op);
    return op inside {OpReadOnce, OpReadShared, OpReadUnique};
  endfunction

  always_comb begin
    state_d   = state_q;
    cr_pend_d = cr_pend_q;
    cd_pend_d = cd_pend_q;
    shared_d  = shared_q;
    dirty_d   = dirty_q;
    first_d   = first_q;
    q_pop     = 1'b0;
    cr_ready_o = '0;
    cd_ready_o = '0;
    buf_we     = 1'b0;
    r_valid_o  = 1'b0;
    cmd_valid_o = 1'b0;
    wb_valid_o  = 1'b0;
    release_o   = 1'b0;
    snoop_hit_o = 1'b0;
    snoop_wb_o  = 1'b0;
    unique case (state_q)
      Idle: if (q_valid) begin
        cr_pend_d = q_txn.snooped[NumCores-1:0];
        cd_pend_d = '0;
        shared_d  = 1'b0;
        dirty_d   = 1'b0;
        first_d   = '0;
        state_d   = (q_txn.snooped[NumCores-1:0] != '0) ? CollectCr : Dispatch;
      end
      CollectCr: begin
        cr_ready_o = cr_pend_q;
        for (int unsigned c = 0; c < NumCores; c++) begin
          if (cr_pend_q[c] && cr_valid_i[c]) begin
            cr_pend_d[c] = 1'b0;
            if (cr_i[c].data_transfer) begin
              cd_pend_d[c] = 1'b1;
            end
            if (cr_i[c].is_shared || cr_i[c].data_transfer) shared_d = 1'b1;
            if (cr_i[c].pass_dirty) dirty_d = 1'b1;
          end
        end
        if (cr_pend_d == '0) begin
          // first responder: lowest index that transfers data
          first_d = '0;
          for (int c = NumCores-1; c >= 0; c--)
            if (cd_pend_d[c]) first_d = NumCores'(1) << c;
          state_d = (cd_pend_d != '0) ? CollectCd : Dispatch;
        end
      end
      CollectCd: begin
        // the first responder fills the buffer, the others are drained
        for (int unsigned c = 0; c < NumCores; c++) begin
          cd_ready_o[c] = cd_pend_q[c];
          if (cd_ready_o[c] && cd_valid_i[c]) begin
            if (first_q[c]) buf_we = 1'b1;
            if (cd_i[c].last) cd_pend_d[c] = 1'b0;
          end
        end
        if (cd_pend_d == '0) state_d = (is_read(q_txn.op)) ? SendR : Dispatch;
      end
      SendR: begin
        r_valid_o = 1'b1;
        if (r_ready_i && r_o.last) begin
          release_o   = 1'b1;
          snoop_hit_o = 1'b1;
          q_pop       = 1'b1;
          state_d     = Idle;
        end
      end
      Dispatch: begin
        cmd_valid_o = !(cmd_o.wb && !wb_ready_i);
        wb_valid_o  = cmd_o.wb && cmd_ready_i;
        if (cmd_ready_i && (!cmd_o.wb || wb_ready_i)) begin
          snoop_wb_o = cmd_o.wb;
          q_pop      = 1'b1;
          state_d    = Idle;
        end
      end
      default: state_d = Idle;
    endcase
  end

  // R burst from the line buffer
  always_comb begin
    r_o      = '0;
    r_o.id   = q_txn.id;
    r_o.data = buf_q[r_beat_q];
    r_o.last = (r_beat_q == BW'(BeatsPerLine-1));
    r_o.resp[3] = (q_txn.op == OpReadUnique) ? 1'b0 : shared_q;
    r_o.resp[2] = (q_txn.op == OpReadUnique) ? dirty_q : 1'b0;
  end

  // memory unit command
  always_comb begin
    cmd_o        = '0;
    cmd_o.tag    = q_txn.tag;
    cmd_o.id     = q_txn.id;
    cmd_o.addr   = q_txn.addr;
    cmd_o.len    = q_txn.len;
    cmd_o.size   = q_txn.size;
    cmd_o.shared = shared_q;
    cmd_o.wb     = (cd_pend_q == '0) && (first_q != '0) && dirty_q && !is_read(q_txn.op);
    unique case (q_txn.op)
      OpCleanUnique:              cmd_o.op = MemResp;
      OpWriteUnique, OpWriteBack: cmd_o.op = MemWrite;
      default:                    cmd_o.op = MemRead;
    endcase
  end
  assign release_tag_o = q_txn.tag;
  always_comb
    for (int unsigned b = 0; b < BeatsPerLine; b++) wb_o[b*DataWidth+:DataWidth] = buf_q[b];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q   <= Idle;
      cr_pend_q <= '0;
      cd_pend_q <= '0;
      shared_q  <= 1'b0;
      dirty_q   <= 1'b0;
      first_q   <= '0;
      cd_beat_q <= '0;
      r_beat_q  <= '0;
    end else begin
      state_q   <= state_d;
      cr_pend_q <= cr_pend_d;
      cd_pend_q <= cd_pend_d;
      shared_q  <= shared_d;
      dirty_q   <= dirty_d;
      first_q   <= first_d;
      if (state_q == Idle) begin
        cd_beat_q <= '0;
        r_beat_q  <= '0;
      end
      if (buf_we) cd_beat_q <= cd_beat_q + 1'b1;
      if (r_valid_o && r_ready_i) r_beat_q <= r_beat_q + 1'b1;
    end
  end

  always_ff @(posedge clk_i) begin
    if (buf_we) begin
      for (int unsigned c = 0; c < NumCores; c++)
        if (first_q[c]) buf_q[cd_beat_q] <= cd_i[c].data;
    end
  end
endmodule
