// fifo_v: small synchronous FIFO with valid/ready handshakes on both sides.
//
// Depth entries of an arbitrary type T, held in a register array with read and
// write pointers. A push is accepted while the FIFO is not full, the head is
// visible on pop_data_o whenever pop_valid_o is high (first-word fall-through,
// no extra cycle of latency after a push). Used wherever the coherency unit
// and the caches need to keep an ordering: W routing, snoop response order,
// write-back data.
module fifo_v #(
  parameter type         T     = logic [7:0],
  parameter int unsigned Depth = 4
) (
  input  logic clk_i,
  input  logic rst_ni,
  input  logic push_valid_i,
  output logic push_ready_o,
  input  T     push_data_i,
  output logic pop_valid_o,
  input  logic pop_ready_i,
  output T     pop_data_o
);
  localparam int unsigned PtrW = (Depth > 1) ? $clog2(Depth) : 1;

  T                mem_q [Depth];
  logic [PtrW-1:0] wptr_q, rptr_q;
  logic [PtrW:0]   cnt_q;

  wire push = push_valid_i && push_ready_o;
  wire pop  = pop_valid_o && pop_ready_i;

  assign push_ready_o = (cnt_q != Depth[PtrW:0]);
  assign pop_valid_o  = (cnt_q != '0);
  assign pop_data_o   = mem_q[rptr_q];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      wptr_q <= '0;
      rptr_q <= '0;
      cnt_q  <= '0;
    end else begin
      if (push) wptr_q <= (wptr_q == PtrW'(Depth-1)) ? '0 : wptr_q + 1'b1;
      if (pop)  rptr_q <= (rptr_q == PtrW'(Depth-1)) ? '0 : rptr_q + 1'b1;
      cnt_q <= cnt_q + (PtrW+1)'(push) - (PtrW+1)'(pop);
    end
  end

  always_ff @(posedge clk_i) begin
    if (push) mem_q[wptr_q] <= push_data_i;
  end

endmodule
