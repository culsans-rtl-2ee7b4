// ace_demux: per-core splitter between the coherent and the non-coherent path
// of the coherency unit (the "ACE DEMUX" of the cluster).
//
// A read whose ARSNOOP/ARDOMAIN encode ReadNoSnoop, or a write encoding
// WriteNoSnoop, goes straight to the non-coherent port (towards the AXI MUX);
// every other request goes to the coherent port (towards the ACE MUX and the
// coherence controller). The W beats of a write follow the routing of its AW:
// a small FIFO remembers, in AW order, which port each write went to. On the
// way back the R bursts and B responses of both ports are merged; an R burst is
// never interleaved with one from the other port (the source is locked until
// RLAST). The split rule follows the ACE encodings; the FIFO depth and the
// fixed "coherent first" preference on responses are this design's choices.
// All paths are combinational except the W-routing FIFO.
module ace_demux
  import culsans_pkg::*;
#(
  parameter int unsigned WFifoDepth = 4
) (
  input  logic clk_i,
  input  logic rst_ni,
  // from the core
  input  logic s_ar_valid_i, output logic s_ar_ready_o, input  ar_t s_ar_i,
  input  logic s_aw_valid_i, output logic s_aw_ready_o, input  aw_t s_aw_i,
  input  logic s_w_valid_i,  output logic s_w_ready_o,  input  w_t  s_w_i,
  output logic s_r_valid_o,  input  logic s_r_ready_i,  output r_t  s_r_o,
  output logic s_b_valid_o,  input  logic s_b_ready_i,  output b_t  s_b_o,
  // port 0: coherent, port 1: non-coherent
  output logic [1:0] m_ar_valid_o, input logic [1:0] m_ar_ready_i, output ar_t m_ar_o,
  output logic [1:0] m_aw_valid_o, input logic [1:0] m_aw_ready_i, output aw_t m_aw_o,
  output logic [1:0] m_w_valid_o,  input logic [1:0] m_w_ready_i,  output w_t  m_w_o,
  input  logic [1:0] m_r_valid_i,  output logic [1:0] m_r_ready_o, input r_t m_r_i [2],
  input  logic [1:0] m_b_valid_i,  output logic [1:0] m_b_ready_o, input b_t m_b_i [2]
);
  // ---------------- requests ----------------
  logic ar_sel, aw_sel;  // 0 coherent, 1 non-coherent
  assign ar_sel = !ar_is_coherent(s_ar_i);
  assign aw_sel = !aw_is_coherent(s_aw_i);

  assign m_ar_o = s_ar_i;
  assign m_aw_o = s_aw_i;
  assign m_w_o  = s_w_i;

  always_comb begin
    m_ar_valid_o = '0;
    m_ar_valid_o[ar_sel] = s_ar_valid_i;
  end
  assign s_ar_ready_o = m_ar_ready_i[ar_sel];

  logic wsel_push_ready, wsel_valid, wsel_head;
  always_comb begin
    m_aw_valid_o = '0;
    m_aw_valid_o[aw_sel] = s_aw_valid_i && wsel_push_ready;
  end
  assign s_aw_ready_o = m_aw_ready_i[aw_sel] && wsel_push_ready;

  fifo_v #(.T(logic), .Depth(WFifoDepth)) i_wsel (
    .clk_i, .rst_ni,
    .push_valid_i(s_aw_valid_i && s_aw_ready_o), .push_ready_o(wsel_push_ready), .push_data_i(aw_sel),
    .pop_valid_o(wsel_valid), .pop_ready_i(s_w_valid_i && s_w_ready_o && s_w_i.last), .pop_data_o(wsel_head)
  );

  always_comb begin
    m_w_valid_o = '0;
    m_w_valid_o[wsel_head] = s_w_valid_i && wsel_valid;
  end
  assign s_w_ready_o = wsel_valid && m_w_ready_i[wsel_head];

  // ---------------- responses ----------------
  logic r_lock_q, r_lock_src_q, r_src;
  always_comb begin
    if (r_lock_q)            r_src = r_lock_src_q;
    else if (m_r_valid_i[0]) r_src = 1'b0;
    else                     r_src = 1'b1;
  end
  assign s_r_valid_o = m_r_valid_i[r_src];
  assign s_r_o       = m_r_i[r_src];
  always_comb begin
    m_r_ready_o = '0;
    m_r_ready_o[r_src] = s_r_ready_i;
  end
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      r_lock_q <= 1'b0; r_lock_src_q <= 1'b0;
    end else if (s_r_valid_o && s_r_ready_i) begin
      r_lock_q     <= !s_r_o.last;
      r_lock_src_q <= r_src;
    end
  end

  logic b_src;
  assign b_src       = !m_b_valid_i[0];
  assign s_b_valid_o = m_b_valid_i[b_src];
  assign s_b_o       = m_b_i[b_src];
  always_comb begin
    m_b_ready_o = '0;
    m_b_ready_o[b_src] = s_b_ready_i;
  end


  a_ar_stable: assert property (@(posedge clk_i) disable iff (!rst_ni)
    s_ar_valid_i && !s_ar_ready_o |=> s_ar_valid_i && $stable(s_ar_i))
    else $error("AR payload changed while waiting for ready");

endmodule
