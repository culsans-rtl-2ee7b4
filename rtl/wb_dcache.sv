// wb_dcache: write-back L1 data cache with an ACE port and a snoop port.
//
// Direct mapped, CacheBytes of 16-byte lines. Every line has a tag, a line of
// data and three state flags (valid, shared, dirty) that encode its MOESI
// state; the three arrays sit behind one single-ported SRAM interface shared
// by six agents through a static-priority arbiter:
//   0 miss handler, 1 snoop controller, 2 PTW, 3 load unit,
//   4 accelerator, 5 store unit.
// The four core-side ports (req_i[0..3] in that order: PTW, load,
// accelerator, store) each have a cache_ctrl; misses, upgrades, non-cacheable
// accesses and flushes go through the miss_handler, which owns the AR/AW/W/R/B
// channels; snoops arrive on AC and are served by the snoop_ctrl on CR/CD.
// The snoop controller's snoop-read / snoop-invalidation signals go to every
// controller and to the miss handler.
// After reset the cache spends 2^IndexBits cycles clearing the flags array
// (every line invalid) before any agent is granted the SRAM port.
// Structure, priorities and flags follow the cache's block diagram; direct
// mapping, the line size and the reset clearing are this design's choices.
module wb_dcache
  import culsans_pkg::*;
#(
  parameter int unsigned CacheBytes = 16384,
  parameter addr_t       CachedBase = 64'h8000_0000
) (
  input  logic    clk_i,
  input  logic    rst_ni,
  // core request interface: 0 PTW, 1 load unit, 2 accelerator, 3 store unit
  input  dc_req_t req_i [4],
  output dc_rsp_t rsp_o [4],
  input  logic    flush_i,
  output logic    flush_done_o,
  output logic    init_done_o,
  // ACE bus
  output logic ar_valid_o, input  logic ar_ready_i, output ar_t ar_o,
  output logic aw_valid_o, input  logic aw_ready_i, output aw_t aw_o,
  output logic w_valid_o,  input  logic w_ready_i,  output w_t  w_o,
  input  logic r_valid_i,  output logic r_ready_o,  input  r_t  r_i,
  input  logic b_valid_i,  output logic b_ready_o,  input  b_t  b_i,
  // snoop bus
  input  logic ac_valid_i, output logic ac_ready_o, input  ac_t ac_i,
  output logic cr_valid_o, input  logic cr_ready_i, output cr_t cr_o,
  output logic cd_valid_o, input  logic cd_ready_i, output cd_t cd_o
);
  localparam int unsigned Lines     = CacheBytes / LineBytes;
  localparam int unsigned IndexBits = $clog2(Lines);
  localparam int unsigned TagBits   = $bits(line_addr_t) - IndexBits;
  localparam int unsigned NumPorts  = 6;

  sram_req_t           req [NumPorts];
  logic [NumPorts-1:0] gnt, arb_gnt;
  sram_req_t           arb_req, bus;
  sram_rsp_t           rsp;

  // ---------------- reset-time clearing of the flags ----------------
  logic                 init_q;
  logic [IndexBits-1:0] init_idx_q;
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      init_q     <= 1'b1;
      init_idx_q <= '0;
    end else if (init_q) begin
      init_idx_q <= init_idx_q + 1'b1;
      if (init_idx_q == '1) init_q <= 1'b0;
    end
  end
  assign init_done_o = !init_q;

  dcache_arbiter #(.NumPorts(NumPorts)) i_arb (.req_i(req), .gnt_o(arb_gnt), .req_o(arb_req));
  assign gnt = init_q ? '0 : arb_gnt;
  always_comb begin
    bus = arb_req;
    if (init_q) begin
      bus         = '0;
      bus.valid   = 1'b1;
      bus.we_meta = 1'b1;
      bus.addr    = line_addr_t'(init_idx_q);
    end
  end

  // ---------------- SRAMs ----------------
  logic [IndexBits-1:0] idx;
  logic [TagBits-1:0]   tag_rd;
  logic [2:0]           flags_rd;
  line_t                data_rd, data_mask;
  assign idx = bus.addr[IndexBits-1:0];
  always_comb
    for (int unsigned b = 0; b < LineBytes; b++) data_mask[b*8+:8] = {8{bus.data_be[b]}};

  sram_sp #(.Words(Lines), .Width(3)) i_flags (
    .clk_i, .req_i(bus.valid), .we_i(bus.we_meta), .addr_i(idx),
    .wdata_i(bus.flags), .wmask_i('1), .rdata_o(flags_rd)
  );
  sram_sp #(.Words(Lines), .Width(TagBits)) i_tags (
    .clk_i, .req_i(bus.valid), .we_i(bus.we_meta), .addr_i(idx),
    .wdata_i(bus.addr[$bits(line_addr_t)-1:IndexBits]), .wmask_i('1), .rdata_o(tag_rd)
  );
  sram_sp #(.Words(Lines), .Width(LineWidth)) i_data (
    .clk_i, .req_i(bus.valid), .we_i(|bus.data_be), .addr_i(idx),
    .wdata_i(bus.data), .wmask_i(data_mask), .rdata_o(data_rd)
  );

  line_addr_t rd_addr_q;
  always_ff @(posedge clk_i) if (bus.valid) rd_addr_q <= bus.addr;
  always_comb begin
    rsp.flags  = flags_t'(flags_rd);
    rsp.victim = {tag_rd, rd_addr_q[IndexBits-1:0]};
    rsp.hit    = rsp.flags.valid && (tag_rd == rd_addr_q[$bits(line_addr_t)-1:IndexBits]);
    rsp.data   = data_rd;
  end

  // ---------------- agents ----------------
  snoop_note_t note;
  logic        mh_busy, mh_busy_all;
  line_addr_t  mh_busy_addr;
  mh_req_t     mh_req [4];
  logic [3:0]  mh_done;
  data_t       mh_rdata;

  miss_handler #(.NumReq(4), .IndexBits(IndexBits)) i_mh (
    .clk_i, .rst_ni,
    .req_i(mh_req), .done_o(mh_done), .rdata_o(mh_rdata),
    .flush_i, .flush_done_o,
    .sram_req_o(req[0]), .sram_gnt_i(gnt[0]), .sram_rsp_i(rsp),
    .snoop_i(note), .busy_o(mh_busy), .busy_all_o(mh_busy_all), .busy_addr_o(mh_busy_addr),
    .ar_valid_o, .ar_ready_i, .ar_o,
    .aw_valid_o, .aw_ready_i, .aw_o,
    .w_valid_o, .w_ready_i, .w_o,
    .r_valid_i, .r_ready_o, .r_i,
    .b_valid_i, .b_ready_o, .b_i
  );

  snoop_ctrl #(.IndexBits(IndexBits)) i_snoop (
    .clk_i, .rst_ni,
    .ac_valid_i, .ac_ready_o, .ac_i,
    .cr_valid_o, .cr_ready_i, .cr_o,
    .cd_valid_o, .cd_ready_i, .cd_o,
    .sram_req_o(req[1]), .sram_gnt_i(gnt[1]), .sram_rsp_i(rsp), .bus_i(bus),
    .snoop_o(note)
  );

  for (genvar p = 0; p < 4; p++) begin : g_ctrl
    cache_ctrl #(.IndexBits(IndexBits), .CachedBase(CachedBase)) i_ctrl (
      .clk_i, .rst_ni,
      .req_i(req_i[p]), .rsp_o(rsp_o[p]),
      .sram_req_o(req[p+2]), .sram_gnt_i(gnt[p+2]), .sram_rsp_i(rsp), .bus_i(bus),
      .snoop_i(note), .mh_busy_i(mh_busy), .mh_busy_all_i(mh_busy_all), .mh_busy_addr_i(mh_busy_addr),
      .mh_req_o(mh_req[p]), .mh_done_i(mh_done[p]), .mh_rdata_i(mh_rdata)
    );
  end
endmodule
