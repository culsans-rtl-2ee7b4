// culsans_cluster: tightly coupled, snoop-based cache-coherent cluster.
//
// NumCores write-back L1 data caches (wb_dcache), each with an ACE port and a
// snoop port, joined by the cache coherency unit (ccu). Each cache keeps its
// lines in MOESI states; coherent misses and upgrades go through the CCU,
// which serialises them per cache line, snoops the other caches and takes
// data from a cache when one holds the line, from memory otherwise.
// Non-coherent accesses bypass the coherence controller. The CCU's single
// AXI port (m_*) leads to the system crossbar, last-level cache and main
// memory, which are outside this module.
// The cores themselves are outside too: each core's four data-cache request
// ports (PTW, load unit, accelerator, store unit) are ports of this module,
// req_i[core][port] / rsp_o[core][port]. The instruction caches are not
// included. The event strobes count collision stalls, reads served by a
// snooped cache and dirty lines written back on a snoop.
module culsans_cluster
  import culsans_pkg::*;
#(
  parameter int unsigned NumCores   = 2,
  parameter int unsigned DcacheBytes = 16384,
  parameter int unsigned CcuEntries = 4,
  parameter addr_t       CachedBase = 64'h8000_0000
) (
  input  logic    clk_i,
  input  logic    rst_ni,
  input  dc_req_t req_i  [NumCores][4],
  output dc_rsp_t rsp_o  [NumCores][4],
  input  logic [NumCores-1:0] flush_i,
  output logic [NumCores-1:0] flush_done_o,
  output logic [NumCores-1:0] init_done_o,
  // AXI port towards crossbar / LLC / memory
  output logic m_ar_valid_o, input  logic m_ar_ready_i, output ar_t m_ar_o,
  output logic m_aw_valid_o, input  logic m_aw_ready_i, output aw_t m_aw_o,
  output logic m_w_valid_o,  input  logic m_w_ready_i,  output w_t  m_w_o,
  input  logic m_r_valid_i,  output logic m_r_ready_o,  input  r_t  m_r_i,
  input  logic m_b_valid_i,  output logic m_b_ready_o,  input  b_t  m_b_i,
  // event strobes
  output logic ev_collision_stall_o,
  output logic ev_snoop_hit_o,
  output logic ev_snoop_wb_o
);
  logic [NumCores-1:0] ar_valid, ar_ready, aw_valid, aw_ready, w_valid, w_ready;
  logic [NumCores-1:0] r_valid, r_ready, b_valid, b_ready;
  logic [NumCores-1:0] ac_valid, ac_ready, cr_valid, cr_ready, cd_valid, cd_ready;
  ar_t ar [NumCores];
  aw_t aw [NumCores];
  w_t  w  [NumCores];
  r_t  r  [NumCores];
  b_t  b  [NumCores];
  ac_t ac;
  cr_t cr [NumCores];
  cd_t cd [NumCores];

  for (genvar c = 0; c < NumCores; c++) begin : g_core
    wb_dcache #(.CacheBytes(DcacheBytes), .CachedBase(CachedBase)) i_dcache (
      .clk_i, .rst_ni,
      .req_i(req_i[c]), .rsp_o(rsp_o[c]),
      .flush_i(flush_i[c]), .flush_done_o(flush_done_o[c]), .init_done_o(init_done_o[c]),
      .ar_valid_o(ar_valid[c]), .ar_ready_i(ar_ready[c]), .ar_o(ar[c]),
      .aw_valid_o(aw_valid[c]), .aw_ready_i(aw_ready[c]), .aw_o(aw[c]),
      .w_valid_o(w_valid[c]),   .w_ready_i(w_ready[c]),   .w_o(w[c]),
      .r_valid_i(r_valid[c]),   .r_ready_o(r_ready[c]),   .r_i(r[c]),
      .b_valid_i(b_valid[c]),   .b_ready_o(b_ready[c]),   .b_i(b[c]),
      .ac_valid_i(ac_valid[c]), .ac_ready_o(ac_ready[c]), .ac_i(ac),
      .cr_valid_o(cr_valid[c]), .cr_ready_i(cr_ready[c]), .cr_o(cr[c]),
      .cd_valid_o(cd_valid[c]), .cd_ready_i(cd_ready[c]), .cd_o(cd[c])
    );
  end

  ccu #(.NumCores(NumCores), .Entries(CcuEntries)) i_ccu (
    .clk_i, .rst_ni,
    .s_ar_valid_i(ar_valid), .s_ar_ready_o(ar_ready), .s_ar_i(ar),
    .s_aw_valid_i(aw_valid), .s_aw_ready_o(aw_ready), .s_aw_i(aw),
    .s_w_valid_i(w_valid),   .s_w_ready_o(w_ready),   .s_w_i(w),
    .s_r_valid_o(r_valid),   .s_r_ready_i(r_ready),   .s_r_o(r),
    .s_b_valid_o(b_valid),   .s_b_ready_i(b_ready),   .s_b_o(b),
    .ac_valid_o(ac_valid), .ac_ready_i(ac_ready), .ac_o(ac),
    .cr_valid_i(cr_valid), .cr_ready_o(cr_ready), .cr_i(cr),
    .cd_valid_i(cd_valid), .cd_ready_o(cd_ready), .cd_i(cd),
    .m_ar_valid_o, .m_ar_ready_i, .m_ar_o,
    .m_aw_valid_o, .m_aw_ready_i, .m_aw_o,
    .m_w_valid_o, .m_w_ready_i, .m_w_o,
    .m_r_valid_i, .m_r_ready_o, .m_r_i,
    .m_b_valid_i, .m_b_ready_o, .m_b_i,
    .collision_stall_o(ev_collision_stall_o), .snoop_hit_o(ev_snoop_hit_o), .snoop_wb_o(ev_snoop_wb_o)
  );
endmodule
