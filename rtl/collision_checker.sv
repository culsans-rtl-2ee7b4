// collision_checker: associative table of the cache lines that the coherence
// controller is currently working on.
//
// The decoder looks a line address up (lookup_addr_i); stall_o is raised when
// the line is already in the table, or when the table is full, so that two
// transactions on one line are never in flight together while transactions on
// different lines proceed in parallel. When the decoder accepts a request it
// asserts insert_i and the line is written into the free entry shown on
// free_tag_o; that tag travels with the transaction. The units that finish a
// transaction return its tag on one of the NumRel release ports, which frees
// the entry at the next clock edge. Lookup is combinational (a compare against
// every entry); the table size is this design's choice.
module collision_checker
  import culsans_pkg::*;
#(
  parameter int unsigned Entries = 4,
  parameter int unsigned NumRel  = 2,
  localparam int unsigned TW     = (Entries > 1) ? $clog2(Entries) : 1
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  input  line_addr_t        lookup_addr_i,
  output logic              stall_o,
  input  logic              insert_i,
  output logic [TW-1:0]     free_tag_o,
  input  logic [NumRel-1:0] release_i,
  input  logic [TW-1:0]     release_tag_i [NumRel],
  output logic [Entries-1:0] busy_o
);
  logic [Entries-1:0] valid_q;
  line_addr_t         addr_q [Entries];
  logic               hit, full;

  always_comb begin
    hit        = 1'b0;
    full       = 1'b1;
    free_tag_o = '0;
    for (int i = Entries-1; i >= 0; i--) begin
      if (valid_q[i] && addr_q[i] == lookup_addr_i) hit = 1'b1;
      if (!valid_q[i]) begin
        full       = 1'b0;
        free_tag_o = TW'(i);
      end
    end
  end
  assign stall_o = hit || full;
  assign busy_o  = valid_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      valid_q <= '0;
    end else begin
      for (int unsigned r = 0; r < NumRel; r++)
        if (release_i[r]) valid_q[release_tag_i[r]] <= 1'b0;
      if (insert_i && !stall_o) valid_q[free_tag_o] <= 1'b1;
    end
  end

  always_ff @(posedge clk_i) begin
    if (insert_i && !stall_o) addr_q[free_tag_o] <= lookup_addr_i;
  end

  a_insert_ok: assert property (@(posedge clk_i) disable iff (!rst_ni) insert_i |-> !stall_o)
    else $error("insert into the collision table while it stalls");
endmodule
