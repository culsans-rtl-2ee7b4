// ace_mux: merges the coherent requests of all cores into the single
// request stream of the coherence controller (the "ACE MUX" of the cluster).
//
// AR and AW each have a round-robin arbiter, so requests of different cores
// are taken in turn as they arrive. The winner's ID is tagged with the core
// index (id[7:5]) and the coherent-path flag (id[4]); R and B responses are
// sent back to the core named by those bits. W beats follow the AW grant
// order: a FIFO of granted core indices selects which core's W channel is
// connected to the controller until WLAST. The round-robin policy is the one
// the cluster description names; the separate AR/AW arbiters and the ID
// tagging are this design's choices. Requests pass combinationally; a grant
// is held until its handshake completes.
module ace_mux
  import culsans_pkg::*;
#(
  parameter int unsigned NumCores   = 2,
  parameter int unsigned WFifoDepth = 4
) (
  input  logic clk_i,
  input  logic rst_ni,
  input  logic [NumCores-1:0] s_ar_valid_i, output logic [NumCores-1:0] s_ar_ready_o, input ar_t s_ar_i [NumCores],
  input  logic [NumCores-1:0] s_aw_valid_i, output logic [NumCores-1:0] s_aw_ready_o, input aw_t s_aw_i [NumCores],
  input  logic [NumCores-1:0] s_w_valid_i,  output logic [NumCores-1:0] s_w_ready_o,  input w_t  s_w_i  [NumCores],
  output logic [NumCores-1:0] s_r_valid_o,  input  logic [NumCores-1:0] s_r_ready_i, output r_t  s_r_o [NumCores],
  output logic [NumCores-1:0] s_b_valid_o,  input  logic [NumCores-1:0] s_b_ready_i, output b_t  s_b_o [NumCores],
  output logic m_ar_valid_o, input  logic m_ar_ready_i, output ar_t m_ar_o,
  output logic m_aw_valid_o, input  logic m_aw_ready_i, output aw_t m_aw_o,
  output logic m_w_valid_o,  input  logic m_w_ready_i,  output w_t  m_w_o,
  input  logic m_r_valid_i,  output logic m_r_ready_o,  input  r_t  m_r_i,
  input  logic m_b_valid_i,  output logic m_b_ready_o,  input  b_t  m_b_i
);
  localparam int unsigned IW = (NumCores > 1) ? $clog2(NumCores) : 1;

  // ---------------- AR ----------------
  logic          ar_gv;
  logic [IW-1:0] ar_gi;
  rr_arb #(.N(NumCores)) i_ar_arb (
    .clk_i, .rst_ni, .req_i(s_ar_valid_i), .advance_i(m_ar_valid_o && m_ar_ready_i),
    .gnt_valid_o(ar_gv), .gnt_idx_o(ar_gi)
  );
  always_comb begin
    m_ar_valid_o = ar_gv;
    m_ar_o       = s_ar_i[ar_gi];
    m_ar_o.id[IdCoreLsb+:IdCoreBits] = IdCoreBits'(ar_gi);
    m_ar_o.id[IdCohBit] = 1'b1;
  end
  always_comb begin
    s_ar_ready_o = '0;
    s_ar_ready_o[ar_gi] = ar_gv && m_ar_ready_i;
  end

  // ---------------- AW / W ----------------
  logic          aw_gv, wq_ready, wq_valid;
  logic [IW-1:0] aw_gi, w_src;
  rr_arb #(.N(NumCores)) i_aw_arb (
    .clk_i, .rst_ni, .req_i(s_aw_valid_i), .advance_i(m_aw_valid_o && m_aw_ready_i),
    .gnt_valid_o(aw_gv), .gnt_idx_o(aw_gi)
  );
  always_comb begin
    m_aw_valid_o = aw_gv && wq_ready;
    m_aw_o       = s_aw_i[aw_gi];
    m_aw_o.id[IdCoreLsb+:IdCoreBits] = IdCoreBits'(aw_gi);
    m_aw_o.id[IdCohBit] = 1'b1;
  end
  always_comb begin
    s_aw_ready_o = '0;
    s_aw_ready_o[aw_gi] = m_aw_valid_o && m_aw_ready_i;
  end

  fifo_v #(.T(logic [IW-1:0]), .Depth(WFifoDepth)) i_wq (
    .clk_i, .rst_ni,
    .push_valid_i(m_aw_valid_o && m_aw_ready_i), .push_ready_o(wq_ready), .push_data_i(aw_gi),
    .pop_valid_o(wq_valid), .pop_ready_i(m_w_valid_o && m_w_ready_i && m_w_o.last), .pop_data_o(w_src)
  );
  always_comb begin
    m_w_valid_o = wq_valid && s_w_valid_i[w_src];
    m_w_o       = s_w_i[w_src];
  end
  always_comb begin
    s_w_ready_o = '0;
    s_w_ready_o[w_src] = wq_valid && m_w_ready_i;
  end

  // ---------------- R / B ----------------
  logic [IdCoreBits-1:0] r_dst, b_dst;
  assign r_dst = m_r_i.id[IdCoreLsb+:IdCoreBits];
  assign b_dst = m_b_i.id[IdCoreLsb+:IdCoreBits];
  always_comb begin
    for (int unsigned c = 0; c < NumCores; c++) begin
      s_r_o[c] = m_r_i;
      s_b_o[c] = m_b_i;
      s_r_valid_o[c] = m_r_valid_i && (32'(r_dst) == c);
      s_b_valid_o[c] = m_b_valid_i && (32'(b_dst) == c);
    end
  end
  always_comb begin
    m_r_ready_o = 1'b0;
    m_b_ready_o = 1'b0;
    for (int unsigned c = 0; c < NumCores; c++) begin
      if (32'(r_dst) == c) m_r_ready_o = s_r_ready_i[c];
      if (32'(b_dst) == c) m_b_ready_o = s_b_ready_i[c];
    end
  end
endmodule
