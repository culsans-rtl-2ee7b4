// ccu: cache coherency unit of the cluster.
//
// One ACE port plus one snoop port (AC/CR/CD) per core on one side, a single
// AXI port towards the system crossbar on the other. Each core's requests
// first pass an ace_demux: non-coherent ones (ReadNoSnoop / WriteNoSnoop) go
// straight to the axi_mux, coherent ones go to the ace_mux, which takes the
// cores in round-robin order and hands the requests to the coherence
// controller. The controller snoops the other cores and reaches memory
// through the axi_mux as its last input, so coherent and non-coherent traffic
// are serialised on the one memory port. The structure is the one of the
// cluster's block diagram; the wiring of the response paths is this design's.
module ccu
  import culsans_pkg::*;
#(
  parameter int unsigned NumCores = 2,
  parameter int unsigned Entries  = 4
) (
  input  logic clk_i,
  input  logic rst_ni,
  // ACE ports of the cores
  input  logic [NumCores-1:0] s_ar_valid_i, output logic [NumCores-1:0] s_ar_ready_o, input ar_t s_ar_i [NumCores],
  input  logic [NumCores-1:0] s_aw_valid_i, output logic [NumCores-1:0] s_aw_ready_o, input aw_t s_aw_i [NumCores],
  input  logic [NumCores-1:0] s_w_valid_i,  output logic [NumCores-1:0] s_w_ready_o,  input w_t  s_w_i  [NumCores],
  output logic [NumCores-1:0] s_r_valid_o,  input  logic [NumCores-1:0] s_r_ready_i, output r_t  s_r_o [NumCores],
  output logic [NumCores-1:0] s_b_valid_o,  input  logic [NumCores-1:0] s_b_ready_i, output b_t  s_b_o [NumCores],
  // snoop ports of the cores
  output logic [NumCores-1:0] ac_valid_o, input  logic [NumCores-1:0] ac_ready_i, output ac_t ac_o,
  input  logic [NumCores-1:0] cr_valid_i, output logic [NumCores-1:0] cr_ready_o, input  cr_t cr_i [NumCores],
  input  logic [NumCores-1:0] cd_valid_i, output logic [NumCores-1:0] cd_ready_o, input  cd_t cd_i [NumCores],
  // AXI memory port
  output logic m_ar_valid_o, input  logic m_ar_ready_i, output ar_t m_ar_o,
  output logic m_aw_valid_o, input  logic m_aw_ready_i, output aw_t m_aw_o,
  output logic m_w_valid_o,  input  logic m_w_ready_i,  output w_t  m_w_o,
  input  logic m_r_valid_i,  output logic m_r_ready_o,  input  r_t  m_r_i,
  input  logic m_b_valid_i,  output logic m_b_ready_o,  input  b_t  m_b_i,
  // event strobes
  output logic collision_stall_o,
  output logic snoop_hit_o,
  output logic snoop_wb_o
);
  localparam int unsigned NumIn = NumCores + 1;

  // coherent side (ace_mux inputs) and non-coherent side (axi_mux inputs)
  logic [NumCores-1:0] c_ar_valid, c_ar_ready, c_aw_valid, c_aw_ready, c_w_valid, c_w_ready;
  logic [NumCores-1:0] c_r_valid, c_r_ready, c_b_valid, c_b_ready;
  ar_t c_ar [NumCores];
  aw_t c_aw [NumCores];
  w_t  c_w  [NumCores];
  r_t  c_r  [NumCores];
  b_t  c_b  [NumCores];

  logic [NumIn-1:0] x_ar_valid, x_ar_ready, x_aw_valid, x_aw_ready, x_w_valid, x_w_ready;
  logic [NumIn-1:0] x_r_valid, x_r_ready, x_b_valid, x_b_ready;
  ar_t x_ar [NumIn];
  aw_t x_aw [NumIn];
  w_t  x_w  [NumIn];
  r_t  x_r  [NumIn];
  b_t  x_b  [NumIn];

  for (genvar c = 0; c < NumCores; c++) begin : g_demux
    logic [1:0] ar_v, ar_r, aw_v, aw_r, w_v, w_r, r_v, r_r, b_v, b_r;
    ar_t ar; aw_t aw; w_t w;
    r_t  r [2];
    b_t  b [2];
    ace_demux i_demux (
      .clk_i, .rst_ni,
      .s_ar_valid_i(s_ar_valid_i[c]), .s_ar_ready_o(s_ar_ready_o[c]), .s_ar_i(s_ar_i[c]),
      .s_aw_valid_i(s_aw_valid_i[c]), .s_aw_ready_o(s_aw_ready_o[c]), .s_aw_i(s_aw_i[c]),
      .s_w_valid_i(s_w_valid_i[c]),   .s_w_ready_o(s_w_ready_o[c]),   .s_w_i(s_w_i[c]),
      .s_r_valid_o(s_r_valid_o[c]),   .s_r_ready_i(s_r_ready_i[c]),   .s_r_o(s_r_o[c]),
      .s_b_valid_o(s_b_valid_o[c]),   .s_b_ready_i(s_b_ready_i[c]),   .s_b_o(s_b_o[c]),
      .m_ar_valid_o(ar_v), .m_ar_ready_i(ar_r), .m_ar_o(ar),
      .m_aw_valid_o(aw_v), .m_aw_ready_i(aw_r), .m_aw_o(aw),
      .m_w_valid_o(w_v),   .m_w_ready_i(w_r),   .m_w_o(w),
      .m_r_valid_i(r_v),   .m_r_ready_o(r_r),   .m_r_i(r),
      .m_b_valid_i(b_v),   .m_b_ready_o(b_r),   .m_b_i(b)
    );
    // port 0: coherent
    assign c_ar_valid[c] = ar_v[0]; assign c_ar[c] = ar; assign ar_r[0] = c_ar_ready[c];
    assign c_aw_valid[c] = aw_v[0]; assign c_aw[c] = aw; assign aw_r[0] = c_aw_ready[c];
    assign c_w_valid[c]  = w_v[0];  assign c_w[c]  = w;  assign w_r[0]  = c_w_ready[c];
    assign r_v[0] = c_r_valid[c]; assign r[0] = c_r[c]; assign c_r_ready[c] = r_r[0];
    assign b_v[0] = c_b_valid[c]; assign b[0] = c_b[c]; assign c_b_ready[c] = b_r[0];
    // port 1: non-coherent
    assign x_ar_valid[c] = ar_v[1]; assign x_ar[c] = ar; assign ar_r[1] = x_ar_ready[c];
    assign x_aw_valid[c] = aw_v[1]; assign x_aw[c] = aw; assign aw_r[1] = x_aw_ready[c];
    assign x_w_valid[c]  = w_v[1];  assign x_w[c]  = w;  assign w_r[1]  = x_w_ready[c];
    assign r_v[1] = x_r_valid[c]; assign r[1] = x_r[c]; assign x_r_ready[c] = r_r[1];
    assign b_v[1] = x_b_valid[c]; assign b[1] = x_b[c]; assign x_b_ready[c] = b_r[1];
  end

  // ACE MUX -> coherence controller
  logic k_ar_valid, k_ar_ready, k_aw_valid, k_aw_ready, k_w_valid, k_w_ready;
  logic k_r_valid, k_r_ready, k_b_valid, k_b_ready;
  ar_t k_ar; aw_t k_aw; w_t k_w; r_t k_r; b_t k_b;

  ace_mux #(.NumCores(NumCores)) i_ace_mux (
    .clk_i, .rst_ni,
    .s_ar_valid_i(c_ar_valid), .s_ar_ready_o(c_ar_ready), .s_ar_i(c_ar),
    .s_aw_valid_i(c_aw_valid), .s_aw_ready_o(c_aw_ready), .s_aw_i(c_aw),
    .s_w_valid_i(c_w_valid),   .s_w_ready_o(c_w_ready),   .s_w_i(c_w),
    .s_r_valid_o(c_r_valid),   .s_r_ready_i(c_r_ready),   .s_r_o(c_r),
    .s_b_valid_o(c_b_valid),   .s_b_ready_i(c_b_ready),   .s_b_o(c_b),
    .m_ar_valid_o(k_ar_valid), .m_ar_ready_i(k_ar_ready), .m_ar_o(k_ar),
    .m_aw_valid_o(k_aw_valid), .m_aw_ready_i(k_aw_ready), .m_aw_o(k_aw),
    .m_w_valid_o(k_w_valid),   .m_w_ready_i(k_w_ready),   .m_w_o(k_w),
    .m_r_valid_i(k_r_valid),   .m_r_ready_o(k_r_ready),   .m_r_i(k_r),
    .m_b_valid_i(k_b_valid),   .m_b_ready_o(k_b_ready),   .m_b_i(k_b)
  );

  coherence_controller #(.NumCores(NumCores), .Entries(Entries)) i_ctrl (
    .clk_i, .rst_ni,
    .s_ar_valid_i(k_ar_valid), .s_ar_ready_o(k_ar_ready), .s_ar_i(k_ar),
    .s_aw_valid_i(k_aw_valid), .s_aw_ready_o(k_aw_ready), .s_aw_i(k_aw),
    .s_w_valid_i(k_w_valid),   .s_w_ready_o(k_w_ready),   .s_w_i(k_w),
    .s_r_valid_o(k_r_valid),   .s_r_ready_i(k_r_ready),   .s_r_o(k_r),
    .s_b_valid_o(k_b_valid),   .s_b_ready_i(k_b_ready),   .s_b_o(k_b),
    .ac_valid_o, .ac_ready_i, .ac_o,
    .cr_valid_i, .cr_ready_o, .cr_i,
    .cd_valid_i, .cd_ready_o, .cd_i,
    .m_ar_valid_o(x_ar_valid[NumCores]), .m_ar_ready_i(x_ar_ready[NumCores]), .m_ar_o(x_ar[NumCores]),
    .m_aw_valid_o(x_aw_valid[NumCores]), .m_aw_ready_i(x_aw_ready[NumCores]), .m_aw_o(x_aw[NumCores]),
    .m_w_valid_o(x_w_valid[NumCores]),   .m_w_ready_i(x_w_ready[NumCores]),   .m_w_o(x_w[NumCores]),
    .m_r_valid_i(x_r_valid[NumCores]),   .m_r_ready_o(x_r_ready[NumCores]),   .m_r_i(x_r[NumCores]),
    .m_b_valid_i(x_b_valid[NumCores]),   .m_b_ready_o(x_b_ready[NumCores]),   .m_b_i(x_b[NumCores]),
    .collision_stall_o, .snoop_hit_o, .snoop_wb_o
  );

  axi_mux #(.NumIn(NumIn)) i_axi_mux (
    .clk_i, .rst_ni,
    .s_ar_valid_i(x_ar_valid), .s_ar_ready_o(x_ar_ready), .s_ar_i(x_ar),
    .s_aw_valid_i(x_aw_valid), .s_aw_ready_o(x_aw_ready), .s_aw_i(x_aw),
    .s_w_valid_i(x_w_valid),   .s_w_ready_o(x_w_ready),   .s_w_i(x_w),
    .s_r_valid_o(x_r_valid),   .s_r_ready_i(x_r_ready),   .s_r_o(x_r),
    .s_b_valid_o(x_b_valid),   .s_b_ready_i(x_b_ready),   .s_b_o(x_b),
    .m_ar_valid_o, .m_ar_ready_i, .m_ar_o,
    .m_aw_valid_o, .m_aw_ready_i, .m_aw_o,
    .m_w_valid_o, .m_w_ready_i, .m_w_o,
    .m_r_valid_i, .m_r_ready_o, .m_r_i,
    .m_b_valid_i, .m_b_ready_o, .m_b_i
  );
endmodule
