// ccu_decoder: front end of the coherence controller.
//
// Takes the coherent AR and AW requests coming out of the ACE MUX (taking the
// two channels in turn when both wait), decodes the ACE transaction and, when
// the collision checker reports that no other transaction is working on the
// same cache line, accepts it, enters the line into the collision table and
// sends the matching snoop on AC to every core except the initiator:
//   ReadOnce -> ReadOnce,  ReadShared -> ReadShared,  ReadUnique -> ReadUnique,
//   CleanUnique -> CleanInvalid,  WriteUnique -> CleanInvalid,
//   WriteBack -> no snoop.
// The AC payload is broadcast and each core's AC handshake completes on its
// own; once every snooped core has taken it, the transaction is pushed into
// the response-order FIFO towards the snoop unit and the decoder is free for
// the next request, without waiting for the CR responses (snoop channels carry
// no ID, so the FIFO order is what pairs CRs with transactions). A request
// whose line collides waits on AR/AW ready. The snoop mapping follows the ACE
// specification; the arbitration between AR and AW is this design's choice.
// Timing: an accepted request needs one cycle to reach AC and one more cycle
// after the last AC handshake to enter the FIFO.
module ccu_decoder
  import culsans_pkg::*;
#(
  parameter int unsigned NumCores = 2
) (
  input  logic clk_i,
  input  logic rst_ni,
  input  logic ar_valid_i, output logic ar_ready_o, input ar_t ar_i,
  input  logic aw_valid_i, output logic aw_ready_o, input aw_t aw_i,
  // collision checker
  output line_addr_t lookup_addr_o,
  input  logic       stall_i,
  output logic       insert_o,
  input  ccu_tag_t   free_tag_i,
  // snoop request channel AC
  output logic [NumCores-1:0] ac_valid_o,
  input  logic [NumCores-1:0] ac_ready_i,
  output ac_t                 ac_o,
  // response-order FIFO towards the snoop unit
  output logic     txn_valid_o,
  input  logic     txn_ready_i,
  output ccu_txn_t txn_o,
  // statistics
  output logic     collision_stall_o
);
  typedef enum logic [1:0] { Idle, SendAc, Push } state_e;
  state_e state_q, state_d;
  ccu_txn_t txn_q, txn_d;
  acsnoop_e ac_snoop_q, ac_snoop_d;
  logic [NumCores-1:0] ac_pend_q, ac_pend_d;
  logic last_was_aw_q;

  // decode of the two candidate requests
  function automatic ccu_op_e ar_op(ar_t ar);
    unique case (ar.snoop)
      ArReadShared:  return OpReadShared;
      ArReadUnique:  return OpReadUnique;
      ArCleanUnique: return OpCleanUnique;
      default:       return OpReadOnce;
    endcase
  endfunction
  function automatic ccu_op_e aw_op(aw_t aw);
    return (aw.snoop == AwWriteBack) ? OpWriteBack : OpWriteUnique;
  endfunction
  function automatic acsnoop_e snoop_of(ccu_op_e op);
    unique case (op)
      OpReadShared: return AcReadShared;
      OpReadUnique: return AcReadUnique;
      OpReadOnce:   return AcReadOnce;
      default:      return AcCleanInvalid;
    endcase
  endfunction

  logic    pick_aw;
  ccu_txn_t cand;
  always_comb begin
    pick_aw = aw_valid_i && (!ar_valid_i || !last_was_aw_q);
    cand = '0;
    if (pick_aw) begin
      cand.op   = aw_op(aw_i);
      cand.id   = aw_i.id;
      cand.addr = aw_i.addr;
      cand.len  = aw_i.len;
      cand.size = aw_i.size;
    end else begin
      cand.op   = ar_op(ar_i);
      cand.id   = ar_i.id;
      cand.addr = ar_i.addr;
      cand.len  = ar_i.len;
      cand.size = ar_i.size;
    end
    cand.tag = free_tag_i;
    for (int unsigned c = 0; c < MaxCores; c++)
      cand.snooped[c] = (c < NumCores) && (c != 32'(cand.id[IdCoreLsb+:IdCoreBits]))
                        && (cand.op != OpWriteBack);
  end

  assign lookup_addr_o     = line_of(cand.addr);
  assign collision_stall_o = (state_q == Idle) && (ar_valid_i || aw_valid_i) && stall_i;

  always_comb begin
    state_d    = state_q;
    txn_d      = txn_q;
    ac_snoop_d = ac_snoop_q;
    ac_pend_d  = ac_pend_q;
    ar_ready_o = 1'b0;
    aw_ready_o = 1'b0;
    insert_o   = 1'b0;
    unique case (state_q)
      Idle: begin
        if ((ar_valid_i || aw_valid_i) && !stall_i) begin
          insert_o   = 1'b1;
          ar_ready_o = !pick_aw;
          aw_ready_o = pick_aw;
          txn_d      = cand;
          ac_snoop_d = snoop_of(cand.op);
          ac_pend_d  = cand.snooped[NumCores-1:0];
          state_d    = (cand.snooped[NumCores-1:0] != '0) ? SendAc : Push;
        end
      end
      SendAc: begin
        ac_pend_d = ac_pend_q & ~ac_ready_i;
        if (ac_pend_d == '0) state_d = Push;
      end
      Push: if (txn_ready_i) state_d = Idle;
      default: state_d = Idle;
    endcase
  end

  assign ac_valid_o  = (state_q == SendAc) ? ac_pend_q : '0;
  assign ac_o.addr   = {line_of(txn_q.addr), {LineOffset{1'b0}}};
  assign ac_o.snoop  = ac_snoop_q;
  assign txn_valid_o = (state_q == Push);
  assign txn_o       = txn_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q       <= Idle;
      txn_q         <= '0;
      ac_snoop_q    <= AcReadOnce;
      ac_pend_q     <= '0;
      last_was_aw_q <= 1'b0;
    end else begin
      state_q    <= state_d;
      txn_q      <= txn_d;
      ac_snoop_q <= ac_snoop_d;
      ac_pend_q  <= ac_pend_d;
      if (ar_ready_o || aw_ready_o) last_was_aw_q <= aw_ready_o;
    end
  end
endmodule
