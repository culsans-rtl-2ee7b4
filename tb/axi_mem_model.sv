// axi_mem_model: behavioural AXI memory for the testbenches (not for synthesis).
//
// Stands in for the crossbar, last-level cache and main memory behind the
// coherency unit. Sparse 64-bit word storage; a word never written reads as
// init_word(addr). Reads and writes are served independently, one burst at a
// time each, with a random 0..MaxDelay cycle wait before a request is taken.
// INCR bursts of 8-byte beats; write strobes are honoured.
module axi_mem_model
  import culsans_pkg::*;
#(
  parameter int unsigned MaxDelay = 3
) (
  input  logic clk_i,
  input  logic rst_ni,
  input  logic ar_valid_i, output logic ar_ready_o, input  ar_t ar_i,
  input  logic aw_valid_i, output logic aw_ready_o, input  aw_t aw_i,
  input  logic w_valid_i,  output logic w_ready_o,  input  w_t  w_i,
  output logic r_valid_o,  input  logic r_ready_i,  output r_t  r_o,
  output logic b_valid_o,  input  logic b_ready_i,  output b_t  b_o
);
  data_t mem [addr_t];
  int unsigned reads, writes;

  function automatic data_t init_word(addr_t a);
    return {a[31:0] ^ 32'hDEAD_BEEF, a[31:0]};
  endfunction
  function automatic data_t peek(addr_t a);
    addr_t w;
    w = {a[AddrWidth-1:3], 3'b000};
    return mem.exists(w) ? mem[w] : init_word(w);
  endfunction

  // read side
  logic  rd_busy;
  ar_t   rd_q;
  int    rd_beat, rd_wait;
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rd_busy <= 1'b0; rd_beat <= 0; rd_wait <= 0; reads <= 0;
    end else if (!rd_busy) begin
      if (ar_valid_i && ar_ready_o) begin
        rd_busy <= 1'b1; rd_q <= ar_i; rd_beat <= 0; reads <= reads + 1;
        rd_wait <= int'($urandom_range(MaxDelay, 0));
      end
    end else if (rd_wait > 0) begin
      rd_wait <= rd_wait - 1;
    end else if (r_valid_o && r_ready_i) begin
      rd_beat <= rd_beat + 1;
      if (r_o.last) rd_busy <= 1'b0;
    end
  end
  assign ar_ready_o = !rd_busy;
  always_comb begin
    addr_t a;
    a = {rd_q.addr[AddrWidth-1:3], 3'b000} + addr_t'(rd_beat * 8);
    r_valid_o = rd_busy && rd_wait == 0;
    r_o       = '0;
    r_o.id    = rd_q.id;
    r_o.data  = peek(a);
    r_o.last  = (rd_beat == int'(rd_q.len));
  end

  // write side
  logic  wr_busy, wr_bresp;
  aw_t   wr_q;
  int    wr_beat;
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      wr_busy <= 1'b0; wr_bresp <= 1'b0; wr_beat <= 0; writes <= 0;
    end else if (!wr_busy) begin
      if (aw_valid_i && aw_ready_o) begin
        wr_busy <= 1'b1; wr_q <= aw_i; wr_beat <= 0; writes <= writes + 1;
      end
    end else if (!wr_bresp) begin
      if (w_valid_i && w_ready_o) begin
        addr_t a;
        data_t d;
        a = {wr_q.addr[AddrWidth-1:3], 3'b000} + addr_t'(wr_beat * 8);
        d = peek(a);
        for (int b = 0; b < StrbWidth; b++) if (w_i.strb[b]) d[b*8+:8] = w_i.data[b*8+:8];
        mem[a] = d;
        wr_beat <= wr_beat + 1;
        if (w_i.last) wr_bresp <= 1'b1;
      end
    end else if (b_ready_i) begin
      wr_busy <= 1'b0; wr_bresp <= 1'b0;
    end
  end
  logic aw_gate_q;
  always_ff @(posedge clk_i) aw_gate_q <= ($urandom_range(MaxDelay, 0) == 0);
  assign aw_ready_o = !wr_busy && aw_gate_q;
  assign w_ready_o  = wr_busy && !wr_bresp;
  assign b_valid_o  = wr_busy && wr_bresp;
  assign b_o        = '{id: wr_q.id, resp: 2'b00};
endmodule
