// axi_mux: serialises all traffic of the coherency unit onto its single AXI
// memory port (the "AXI MUX" of the cluster, towards the system crossbar).
//
// Inputs 0 .. NumIn-2 are the non-coherent paths of the cores, input NumIn-1
// is the memory port of the coherence controller. AR and AW are chosen by
// round-robin arbiters. A request from core path i leaves with id[7:5] = i and
// id[4] = 0; the controller's requests already carry id[4] = 1 and keep their
// ID. Responses are returned by the same bits: id[4] = 1 goes to the
// controller, otherwise to core path id[7:5]. W beats follow the AW grant order
// through a FIFO of granted inputs. Requests and responses pass
// combinationally; the round-robin policy and the ID scheme are this design's
// choices (the cluster description only says that both paths are serialised
// here).
module axi_mux
  import culsans_pkg::*;
#(
  parameter int unsigned NumIn      = 3,
  parameter int unsigned WFifoDepth = 4
) (
  input  logic clk_i,
  input  logic rst_ni,
  input  logic [NumIn-1:0] s_ar_valid_i, output logic [NumIn-1:0] s_ar_ready_o, input ar_t s_ar_i [NumIn],
  input  logic [NumIn-1:0] s_aw_valid_i, output logic [NumIn-1:0] s_aw_ready_o, input aw_t s_aw_i [NumIn],
  input  logic [NumIn-1:0] s_w_valid_i,  output logic [NumIn-1:0] s_w_ready_o,  input w_t  s_w_i  [NumIn],
  output logic [NumIn-1:0] s_r_valid_o,  input  logic [NumIn-1:0] s_r_ready_i, output r_t  s_r_o [NumIn],
  output logic [NumIn-1:0] s_b_valid_o,  input  logic [NumIn-1:0] s_b_ready_i, output b_t  s_b_o [NumIn],
  output logic m_ar_valid_o, input  logic m_ar_ready_i, output ar_t m_ar_o,
  output logic m_aw_valid_o, input  logic m_aw_ready_i, output aw_t m_aw_o,
  output logic m_w_valid_o,  input  logic m_w_ready_i,  output w_t  m_w_o,
  input  logic m_r_valid_i,  output logic m_r_ready_o,  input  r_t  m_r_i,
  input  logic m_b_valid_i,  output logic m_b_ready_o,  input  b_t  m_b_i
);
  localparam int unsigned IW  = (NumIn > 1) ? $clog2(NumIn) : 1;
  localparam int unsigned Ctl = NumIn - 1;

  function automatic id_t tag_id(id_t id, int unsigned src);
    id_t t;
    t = id;
    if (src != Ctl) begin
      t[IdCoreLsb+:IdCoreBits] = IdCoreBits'(src);
      t[IdCohBit] = 1'b0;
    end
    return t;
  endfunction

  function automatic int unsigned dest_of(id_t id);
    if (id[IdCohBit]) return Ctl;
    return 32'(id[IdCoreLsb+:IdCoreBits]);
  endfunction

  // ---------------- AR ----------------
  logic          ar_gv;
  logic [IW-1:0] ar_gi;
  rr_arb #(.N(NumIn)) i_ar_arb (
    .clk_i, .rst_ni, .req_i(s_ar_valid_i), .advance_i(m_ar_valid_o && m_ar_ready_i),
    .gnt_valid_o(ar_gv), .gnt_idx_o(ar_gi)
  );
  always_comb begin
    m_ar_valid_o = ar_gv;
    m_ar_o       = s_ar_i[ar_gi];
    m_ar_o.id    = tag_id(s_ar_i[ar_gi].id, 32'(ar_gi));
  end
  always_comb begin
    s_ar_ready_o = '0;
    s_ar_ready_o[ar_gi] = ar_gv && m_ar_ready_i;
  end

  // ---------------- AW / W ----------------
  logic          aw_gv, wq_ready, wq_valid;
  logic [IW-1:0] aw_gi, w_src;
  rr_arb #(.N(NumIn)) i_aw_arb (
    .clk_i, .rst_ni, .req_i(s_aw_valid_i), .advance_i(m_aw_valid_o && m_aw_ready_i),
    .gnt_valid_o(aw_gv), .gnt_idx_o(aw_gi)
  );
  always_comb begin
    m_aw_valid_o = aw_gv && wq_ready;
    m_aw_o       = s_aw_i[aw_gi];
    m_aw_o.id    = tag_id(s_aw_i[aw_gi].id, 32'(aw_gi));
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
  always_comb begin
    for (int unsigned i = 0; i < NumIn; i++) begin
      s_r_o[i] = m_r_i;
      s_b_o[i] = m_b_i;
      s_r_valid_o[i] = m_r_valid_i && (dest_of(m_r_i.id) == i);
      s_b_valid_o[i] = m_b_valid_i && (dest_of(m_b_i.id) == i);
    end
  end
  always_comb begin
    m_r_ready_o = 1'b0;
    m_b_ready_o = 1'b0;
    for (int unsigned i = 0; i < NumIn; i++) begin
      if (dest_of(m_r_i.id) == i) m_r_ready_o = s_r_ready_i[i];
      if (dest_of(m_b_i.id) == i) m_b_ready_o = s_b_ready_i[i];
    end
  end
endmodule
