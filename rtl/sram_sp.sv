// sram_sp: single-port synchronous RAM with a bit write mask.
//
// One access per cycle: when req_i is high the word at addr_i is read (rdata_o
// shows it on the next cycle) and, with we_i, the bits selected by wmask_i are
// written with wdata_i. A read in the same cycle as a write returns the old
// contents. The data cache uses three of these, for the flags, the tags and
// the cache-line data; in a chip they would be replaced by the technology's
// SRAM macros with the same port list. Written as a plain array.
module sram_sp #(
  parameter int unsigned Words = 1024,
  parameter int unsigned Width = 128,
  localparam int unsigned AW   = (Words > 1) ? $clog2(Words) : 1
) (
  input  logic             clk_i,
  input  logic             req_i,
  input  logic             we_i,
  input  logic [AW-1:0]    addr_i,
  input  logic [Width-1:0] wdata_i,
  input  logic [Width-1:0] wmask_i,
  output logic [Width-1:0] rdata_o
);
  logic [Width-1:0] mem_q [Words];

  always_ff @(posedge clk_i) begin
    if (req_i) begin
      rdata_o <= mem_q[addr_i];
      if (we_i) mem_q[addr_i] <= (mem_q[addr_i] & ~wmask_i) | (wdata_i & wmask_i);
    end
  end
endmodule
