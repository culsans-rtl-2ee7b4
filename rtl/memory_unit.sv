// memory_unit: memory side of the coherence controller.
//
// Executes, one at a time and in the order they were issued, the commands of
// the snoop unit. A command may first ask for a write-back: the dirty line a
// snooped cache sent on CD waits in the write-back FIFO and is written to
// memory as a two-beat WriteNoSnoop burst (ID = initiator core, coherent flag,
// local ID 4'hF), the unit waiting for its B. Then the command's own operation:
//   MemRead  - AR to memory with the initiator's ID; the R beats are passed to
//              the initiator with IsShared set as the snoop responses said.
//   MemWrite - AW to memory; the initiator's W beats (which arrive from the
//              ACE MUX in AW order) are passed through; the memory's B is
//              returned to the initiator.
//   MemResp  - a single data-less R beat (completion of a CleanUnique).
//   MemNone  - nothing further.
// When the initiator has its last R beat or its B, the command's collision
// table entry is released. Serial execution inside the unit is this design's
// simplification; the unit, its write-back FIFO and its two roles (serving
// the initiator and writing back snooped dirty lines) follow the block
// diagram of the controller.
module memory_unit
  import culsans_pkg::*;
#(
  parameter int unsigned CmdDepth = 2,
  parameter int unsigned WbDepth  = 2
) (
  input  logic clk_i,
  input  logic rst_ni,
  input  logic cmd_valid_i, output logic cmd_ready_o, input mem_cmd_t cmd_i,
  input  logic wb_valid_i,  output logic wb_ready_o,  input line_t    wb_i,
  // initiator side
  input  logic s_w_valid_i, output logic s_w_ready_o, input  w_t s_w_i,
  output logic s_r_valid_o, input  logic s_r_ready_i, output r_t s_r_o,
  output logic s_b_valid_o, input  logic s_b_ready_i, output b_t s_b_o,
  // memory side
  output logic m_ar_valid_o, input  logic m_ar_ready_i, output ar_t m_ar_o,
  output logic m_aw_valid_o, input  logic m_aw_ready_i, output aw_t m_aw_o,
  output logic m_w_valid_o,  input  logic m_w_ready_i,  output w_t  m_w_o,
  input  logic m_r_valid_i,  output logic m_r_ready_o,  input  r_t  m_r_i,
  input  logic m_b_valid_i,  output logic m_b_ready_o,  input  b_t  m_b_i,
  // collision-table release
  output logic     release_o,
  output ccu_tag_t release_tag_o
);
  localparam int unsigned BW = $clog2(BeatsPerLine);

  logic     cq_valid, cq_pop;
  mem_cmd_t cmd;
  fifo_v #(.T(mem_cmd_t), .Depth(CmdDepth)) i_cmdq (
    .clk_i, .rst_ni,
    .push_valid_i(cmd_valid_i), .push_ready_o(cmd_ready_o), .push_data_i(cmd_i),
    .pop_valid_o(cq_valid), .pop_ready_i(cq_pop), .pop_data_o(cmd)
  );
  logic  wq_valid, wq_pop;
  line_t wb_line;
  fifo_v #(.T(line_t), .Depth(WbDepth)) i_wbq (
    .clk_i, .rst_ni,
    .push_valid_i(wb_valid_i), .push_ready_o(wb_ready_o), .push_data_i(wb_i),
    .pop_valid_o(wq_valid), .pop_ready_i(wq_pop), .pop_data_o(wb_line)
  );

  typedef enum logic [3:0] {
    Idle, WbAw, WbW, WbB, Op, RdR, WrW, WrB, WrBOut, Resp
  } state_e;
  state_e state_q, state_d;
  logic [BW-1:0] beat_q;
  b_t            b_q;

  always_comb begin
    state_d      = state_q;
    cq_pop       = 1'b0;
    wq_pop       = 1'b0;
    m_ar_valid_o = 1'b0;
    m_aw_valid_o = 1'b0;
    m_w_valid_o  = 1'b0;
    m_r_ready_o  = 1'b0;
    m_b_ready_o  = 1'b0;
    s_w_ready_o  = 1'b0;
    s_r_valid_o  = 1'b0;
    s_b_valid_o  = 1'b0;
    release_o    = 1'b0;
    m_ar_o = '0;
    m_aw_o = '0;
    m_w_o  = '0;
    s_r_o  = '0;
    s_b_o  = b_q;

    unique case (state_q)
      Idle: if (cq_valid) state_d = cmd.wb ? WbAw : Op;
      // ---- write-back of a snooped dirty line ----
      WbAw: begin
        m_aw_valid_o = wq_valid;
        m_aw_o.id    = cmd.id;
        m_aw_o.id[3:0] = 4'hF;
        m_aw_o.addr  = {line_of(cmd.addr), {LineOffset{1'b0}}};
        m_aw_o.len   = 8'(BeatsPerLine - 1);
        m_aw_o.size  = 3'($clog2(StrbWidth));
        if (m_aw_ready_i && wq_valid) state_d = WbW;
      end
      WbW: begin
        m_w_valid_o = 1'b1;
        m_w_o.data  = wb_line[beat_q*DataWidth+:DataWidth];
        m_w_o.strb  = '1;
        m_w_o.last  = (beat_q == BW'(BeatsPerLine-1));
        if (m_w_ready_i && m_w_o.last) begin
          wq_pop  = 1'b1;
          state_d = WbB;
        end
      end
      WbB: begin
        m_b_ready_o = 1'b1;
        if (m_b_valid_i) state_d = Op;
      end
      // ---- the command's own operation ----
      Op: begin
        unique case (cmd.op)
          MemRead: begin
            m_ar_valid_o = 1'b1;
            m_ar_o.id    = cmd.id;
            m_ar_o.addr  = cmd.addr;
            m_ar_o.len   = cmd.len;
            m_ar_o.size  = cmd.size;
            if (m_ar_ready_i) state_d = RdR;
          end
          MemWrite: begin
            m_aw_valid_o = 1'b1;
            m_aw_o.id    = cmd.id;
            m_aw_o.addr  = cmd.addr;
            m_aw_o.len   = cmd.len;
            m_aw_o.size  = cmd.size;
            if (m_aw_ready_i) state_d = WrW;
          end
          MemResp: state_d = Resp;
          default: begin
            cq_pop  = 1'b1;
            state_d = Idle;
          end
        endcase
      end
      RdR: begin
        s_r_valid_o = m_r_valid_i;
        m_r_ready_o = s_r_ready_i;
        s_r_o       = m_r_i;
        s_r_o.id    = cmd.id;
        s_r_o.resp[3] = cmd.shared;
        s_r_o.resp[2] = 1'b0;
        if (m_r_valid_i && s_r_ready_i && m_r_i.last) begin
          release_o = 1'b1;
          cq_pop    = 1'b1;
          state_d   = Idle;
        end
      end
      WrW: begin
        m_w_valid_o = s_w_valid_i;
        s_w_ready_o = m_w_ready_i;
        m_w_o       = s_w_i;
        if (s_w_valid_i && m_w_ready_i && s_w_i.last) state_d = WrB;
      end
      WrB: begin
        m_b_ready_o = 1'b1;
        if (m_b_valid_i) state_d = WrBOut;
      end
      WrBOut: begin
        s_b_valid_o = 1'b1;
        if (s_b_ready_i) begin
          release_o = 1'b1;
          cq_pop    = 1'b1;
          state_d   = Idle;
        end
      end
      Resp: begin
        s_r_valid_o = 1'b1;
        s_r_o.id    = cmd.id;
        s_r_o.last  = 1'b1;
        if (s_r_ready_i) begin
          release_o = 1'b1;
          cq_pop    = 1'b1;
          state_d   = Idle;
        end
      end
      default: state_d = Idle;
    endcase
  end
  assign release_tag_o = cmd.tag;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= Idle;
      beat_q  <= '0;
      b_q     <= '0;
    end else begin
      state_q <= state_d;
      if (state_q == Idle) beat_q <= '0;
      else if (m_w_valid_o && m_w_ready_i && state_q == WbW) beat_q <= beat_q + 1'b1;
      if (state_q == WrB && m_b_valid_i) begin
        b_q    <= m_b_i;
        b_q.id <= cmd.id;
      end
    end
  end
endmodule
