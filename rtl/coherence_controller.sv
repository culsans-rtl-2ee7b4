// coherence_controller: the serialising core of the cache coherency unit.
//
// Receives the coherent requests of all cores (already merged by the ACE MUX
// and tagged with the core index) and is the only initiator of the snoop bus.
// Inside, following the controller's block diagram:
//   decoder           - takes AR/AW, checks the collision table, issues AC;
//   collision_checker - table of the lines in flight, stalls the decoder on a
//                       second request to the same line;
//   snoop_unit        - collects CR/CD in AC order, answers reads from the
//                       line a cache supplied, steers dirty lines to memory;
//   memory_unit       - memory reads/writes for the initiator and write-backs
//                       of snooped dirty lines, on the controller's AXI port.
// An R multiplexer joins the R bursts of the snoop unit and the memory unit
// towards the initiator without interleaving bursts. Requests move between
// the units through valid/ready handshakes, so several transactions on
// different lines can be in different units at the same time.
module coherence_controller
  import culsans_pkg::*;
#(
  parameter int unsigned NumCores   = 2,
  parameter int unsigned Entries    = 4,
  parameter int unsigned SnoopDepth = 4
) (
  input  logic clk_i,
  input  logic rst_ni,
  // coherent requests (from the ACE MUX)
  input  logic s_ar_valid_i, output logic s_ar_ready_o, input  ar_t s_ar_i,
  input  logic s_aw_valid_i, output logic s_aw_ready_o, input  aw_t s_aw_i,
  input  logic s_w_valid_i,  output logic s_w_ready_o,  input  w_t  s_w_i,
  output logic s_r_valid_o,  input  logic s_r_ready_i,  output r_t  s_r_o,
  output logic s_b_valid_o,  input  logic s_b_ready_i,  output b_t  s_b_o,
  // snoop bus
  output logic [NumCores-1:0] ac_valid_o, input  logic [NumCores-1:0] ac_ready_i, output ac_t ac_o,
  input  logic [NumCores-1:0] cr_valid_i, output logic [NumCores-1:0] cr_ready_o, input  cr_t cr_i [NumCores],
  input  logic [NumCores-1:0] cd_valid_i, output logic [NumCores-1:0] cd_ready_o, input  cd_t cd_i [NumCores],
  // memory port (towards the AXI MUX)
  output logic m_ar_valid_o, input  logic m_ar_ready_i, output ar_t m_ar_o,
  output logic m_aw_valid_o, input  logic m_aw_ready_i, output aw_t m_aw_o,
  output logic m_w_valid_o,  input  logic m_w_ready_i,  output w_t  m_w_o,
  input  logic m_r_valid_i,  output logic m_r_ready_o,  input  r_t  m_r_i,
  input  logic m_b_valid_i,  output logic m_b_ready_o,  input  b_t  m_b_i,
  // event strobes for statistics
  output logic collision_stall_o,
  output logic snoop_hit_o,
  output logic snoop_wb_o
);
  localparam int unsigned TW = (Entries > 1) ? $clog2(Entries) : 1;

  line_addr_t lookup_addr;
  logic       stall, insert;
  logic [TW-1:0] free_tag;
  logic [1:0]    rel;
  logic [TW-1:0] rel_tag [2];
  ccu_tag_t      su_rel_tag, mu_rel_tag;

  collision_checker #(.Entries(Entries), .NumRel(2)) i_cc (
    .clk_i, .rst_ni,
    .lookup_addr_i(lookup_addr), .stall_o(stall), .insert_i(insert), .free_tag_o(free_tag),
    .release_i(rel), .release_tag_i(rel_tag), .busy_o()
  );
  assign rel_tag[0] = TW'(su_rel_tag);
  assign rel_tag[1] = TW'(mu_rel_tag);

  logic     txn_valid, txn_ready;
  ccu_txn_t txn;
  ccu_decoder #(.NumCores(NumCores)) i_dec (
    .clk_i, .rst_ni,
    .ar_valid_i(s_ar_valid_i), .ar_ready_o(s_ar_ready_o), .ar_i(s_ar_i),
    .aw_valid_i(s_aw_valid_i), .aw_ready_o(s_aw_ready_o), .aw_i(s_aw_i),
    .lookup_addr_o(lookup_addr), .stall_i(stall), .insert_o(insert),
    .free_tag_i(ccu_tag_t'(free_tag)),
    .ac_valid_o, .ac_ready_i, .ac_o,
    .txn_valid_o(txn_valid), .txn_ready_i(txn_ready), .txn_o(txn),
    .collision_stall_o
  );

  logic     su_r_valid, su_r_ready, mu_r_valid, mu_r_ready;
  r_t       su_r, mu_r;
  logic     cmd_valid, cmd_ready, wb_valid, wb_ready;
  mem_cmd_t cmd;
  line_t    wb_line;
  snoop_unit #(.NumCores(NumCores), .FifoDepth(SnoopDepth)) i_su (
    .clk_i, .rst_ni,
    .txn_valid_i(txn_valid), .txn_ready_o(txn_ready), .txn_i(txn),
    .cr_valid_i, .cr_ready_o, .cr_i,
    .cd_valid_i, .cd_ready_o, .cd_i,
    .r_valid_o(su_r_valid), .r_ready_i(su_r_ready), .r_o(su_r),
    .cmd_valid_o(cmd_valid), .cmd_ready_i(cmd_ready), .cmd_o(cmd),
    .wb_valid_o(wb_valid), .wb_ready_i(wb_ready), .wb_o(wb_line),
    .release_o(rel[0]), .release_tag_o(su_rel_tag),
    .snoop_hit_o, .snoop_wb_o
  );

  memory_unit i_mu (
    .clk_i, .rst_ni,
    .cmd_valid_i(cmd_valid), .cmd_ready_o(cmd_ready), .cmd_i(cmd),
    .wb_valid_i(wb_valid), .wb_ready_o(wb_ready), .wb_i(wb_line),
    .s_w_valid_i, .s_w_ready_o, .s_w_i,
    .s_r_valid_o(mu_r_valid), .s_r_ready_i(mu_r_ready), .s_r_o(mu_r),
    .s_b_valid_o, .s_b_ready_i, .s_b_o,
    .m_ar_valid_o, .m_ar_ready_i, .m_ar_o,
    .m_aw_valid_o, .m_aw_ready_i, .m_aw_o,
    .m_w_valid_o, .m_w_ready_i, .m_w_o,
    .m_r_valid_i, .m_r_ready_o, .m_r_i,
    .m_b_valid_i, .m_b_ready_o, .m_b_i,
    .release_o(rel[1]), .release_tag_o(mu_rel_tag)
  );

  // R multiplexer: snoop unit or memory unit, bursts never interleaved
  logic r_lock_q, r_src_q, r_src;
  always_comb begin
    if (r_lock_q)        r_src = r_src_q;
    else if (su_r_valid) r_src = 1'b0;
    else                 r_src = 1'b1;
  end
  assign s_r_valid_o = r_src ? mu_r_valid : su_r_valid;
  assign s_r_o       = r_src ? mu_r : su_r;
  assign su_r_ready  = !r_src && s_r_ready_i;
  assign mu_r_ready  =  r_src && s_r_ready_i;
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      r_lock_q <= 1'b0; r_src_q <= 1'b0;
    end else if (s_r_valid_o && s_r_ready_i) begin
      r_lock_q <= !s_r_o.last;
      r_src_q  <= r_src;
    end
  end
endmodule
