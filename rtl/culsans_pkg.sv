// culsans_pkg: types and constants shared by the coherency unit and the
// write-back data caches of the cluster.
//
// The bus is AXI4 extended with the ACE coherency fields (AxSNOOP, AxDOMAIN,
// the extra RRESP bits) and the three snoop channels AC (request), CR
// (response) and CD (data). Each channel is a packed struct carried together
// with a separate valid/ready pair. Only the fields this design uses are kept
// (no AxBURST, AxCACHE, AxPROT, AxQOS, ...): bursts are always INCR.
//
// Widths are this design's choice: 64-bit addresses and data, 128-bit cache
// lines (two data beats per line) and 8-bit IDs laid out as
//   id[3:0] core-local ID, id[4] coherent-path flag, id[7:5] core index.
// The MOESI state of a line is kept as three flags (valid, shared, dirty);
// their mapping onto MOESI/ACE states follows the usual ACE naming:
//   M = UniqueDirty  (1,0,1)   O = SharedDirty (1,1,1)
//   E = UniqueClean  (1,0,0)   S = SharedClean (1,1,0)   I = Invalid (0,-,-)
// Snoop and transaction encodings are those of the AMBA ACE specification.
package culsans_pkg;

  localparam int unsigned AddrWidth   = 64;
  localparam int unsigned DataWidth   = 64;
  localparam int unsigned StrbWidth   = DataWidth / 8;
  localparam int unsigned LineWidth   = 128;
  localparam int unsigned LineBytes   = LineWidth / 8;
  localparam int unsigned LineOffset  = $clog2(LineBytes);
  localparam int unsigned BeatsPerLine = LineWidth / DataWidth;
  localparam int unsigned IdWidth     = 8;
  localparam int unsigned MaxCores    = 8;

  typedef logic [AddrWidth-1:0] addr_t;
  typedef logic [DataWidth-1:0] data_t;
  typedef logic [StrbWidth-1:0] strb_t;
  typedef logic [LineWidth-1:0] line_t;
  typedef logic [IdWidth-1:0]   id_t;
  typedef logic [AddrWidth-LineOffset-1:0] line_addr_t;

  // ID field positions
  localparam int unsigned IdCohBit   = 4;
  localparam int unsigned IdCoreLsb  = 5;
  localparam int unsigned IdCoreBits = 3;

  // ---------------- ACE encodings ----------------
  // AxDOMAIN
  typedef enum logic [1:0] {
    DomNonShareable   = 2'b00,
    DomInnerShareable = 2'b01,
    DomOuterShareable = 2'b10,
    DomSystem         = 2'b11
  } domain_e;

  // ARSNOOP (ReadNoSnoop and ReadOnce share 4'b0000, told apart by the domain)
  localparam logic [3:0] ArReadNoSnoop = 4'b0000;
  localparam logic [3:0] ArReadOnce    = 4'b0000;
  localparam logic [3:0] ArReadShared  = 4'b0001;
  localparam logic [3:0] ArReadUnique  = 4'b0111;
  localparam logic [3:0] ArCleanUnique = 4'b1011;
  // AWSNOOP (WriteNoSnoop and WriteUnique share 3'b000)
  localparam logic [2:0] AwWriteNoSnoop = 3'b000;
  localparam logic [2:0] AwWriteUnique  = 3'b000;
  localparam logic [2:0] AwWriteBack    = 3'b011;
  // ACSNOOP
  typedef enum logic [3:0] {
    AcReadOnce     = 4'b0000,
    AcReadShared   = 4'b0001,
    AcReadUnique   = 4'b0111,
    AcCleanInvalid = 4'b1001
  } acsnoop_e;

  // ---------------- channel payloads ----------------
  typedef struct packed {
    id_t         id;
    addr_t       addr;
    logic [7:0]  len;
    logic [2:0]  size;
    logic [3:0]  snoop;
    logic [1:0]  domain;
  } ar_t;

  typedef struct packed {
    id_t         id;
    addr_t       addr;
    logic [7:0]  len;
    logic [2:0]  size;
    logic [2:0]  snoop;
    logic [1:0]  domain;
  } aw_t;

  typedef struct packed {
    data_t data;
    strb_t strb;
    logic  last;
  } w_t;

  // resp[3] = IsShared, resp[2] = PassDirty, resp[1:0] = AXI response
  typedef struct packed {
    id_t        id;
    data_t      data;
    logic [3:0] resp;
    logic       last;
  } r_t;

  typedef struct packed {
    id_t        id;
    logic [1:0] resp;
  } b_t;

  typedef struct packed {
    addr_t    addr;
    acsnoop_e snoop;
  } ac_t;

  // CRRESP: {WasUnique, IsShared, PassDirty, Error, DataTransfer}
  typedef struct packed {
    logic was_unique;
    logic is_shared;
    logic pass_dirty;
    logic error;
    logic data_transfer;
  } cr_t;

  typedef struct packed {
    data_t data;
    logic  last;
  } cd_t;

  // ---------------- cache line state (three flags) ----------------
  typedef struct packed {
    logic valid;
    logic shared;
    logic dirty;
  } flags_t;

  typedef enum logic [2:0] {
    MoesiI, MoesiS, MoesiE, MoesiO, MoesiM
  } moesi_e;

  function automatic moesi_e flags2moesi(flags_t f);
    if (!f.valid)                 return MoesiI;
    else if (!f.shared && f.dirty) return MoesiM;
    else if ( f.shared && f.dirty) return MoesiO;
    else if (!f.shared)           return MoesiE;
    else                          return MoesiS;
  endfunction

  // ---------------- core-side request ports of the data cache ----------------
  // Atomic memory operations (the RISC-V AMO set): the word at addr is
  // replaced by op(old, wdata) and the old word is returned. be = 8'h0F or
  // 8'hF0 selects a 32-bit operation on that half of the word, anything else
  // a 64-bit one. AMOs are performed in the cache and must target cacheable
  // addresses.
  typedef enum logic [3:0] {
    AmoNone, AmoSwap, AmoAdd, AmoAnd, AmoOr, AmoXor,
    AmoMax, AmoMaxu, AmoMin, AmoMinu
  } amo_op_e;

  typedef struct packed {
    logic    valid;
    logic    we;     // store (ignored for an AMO)
    addr_t   addr;
    data_t   wdata;  // store data or AMO operand
    strb_t   be;
    amo_op_e amo;    // AmoNone for plain loads and stores
  } dc_req_t;

  // result of an AMO on one 64-bit word, see amo_op_e
  function automatic data_t amo_result(amo_op_e op, data_t old, data_t opnd, strb_t be);
    logic        w32, hi;
    logic [63:0] a, b, r;
    logic        lt_s, lt_u;
    w32 = (be == 8'h0F) || (be == 8'hF0);
    hi  = (be == 8'hF0);
    if (w32) begin
      a = hi ? {{32{old[63]}}, old[63:32]}   : {{32{old[31]}}, old[31:0]};
      b = hi ? {{32{opnd[63]}}, opnd[63:32]} : {{32{opnd[31]}}, opnd[31:0]};
    end else begin
      a = old;
      b = opnd;
    end
    lt_s = $signed(a) < $signed(b);
    lt_u = w32 ? (a[31:0] < b[31:0]) : (a < b);
    unique case (op)
      AmoSwap: r = b;
      AmoAdd:  r = a + b;
      AmoAnd:  r = a & b;
      AmoOr:   r = a | b;
      AmoXor:  r = a ^ b;
      AmoMax:  r = lt_s ? b : a;
      AmoMaxu: r = lt_u ? b : a;
      AmoMin:  r = lt_s ? a : b;
      AmoMinu: r = lt_u ? a : b;
      default: r = a;
    endcase
    if (!w32)   return r;
    else if (hi) return {r[31:0], old[31:0]};
    else         return {old[63:32], r[31:0]};
  endfunction

  typedef struct packed {
    logic  ready;   // request accepted this cycle
    logic  rvalid;  // access completed this cycle (load data valid)
    data_t rdata;
  } dc_rsp_t;

  // Miss handler requests from the cache controllers
  typedef enum logic [2:0] {
    MhRefillShared,  // ReadShared line fill (load miss)
    MhRefillUnique,  // ReadUnique line fill (store miss)
    MhUpgrade,       // CleanUnique: make a shared line unique
    MhNcRead,        // ReadNoSnoop single beat (non-cacheable load)
    MhNcWrite,       // WriteNoSnoop single beat (non-cacheable store)
    MhAmo            // atomic memory operation, performed on a unique line
  } mh_op_e;

  typedef struct packed {
    logic   valid;
    mh_op_e op;
    addr_t   addr;
    data_t   wdata;
    strb_t   be;
    amo_op_e amo;
  } mh_req_t;

  // Request to the single port of the flags/tag/data SRAMs (through the arbiter)
  typedef struct packed {
    logic                 valid;
    logic                 we_meta;   // write tag and flags
    flags_t               flags;
    logic [LineBytes-1:0] data_be;   // byte enables of a data write
    line_addr_t           addr;      // line address (index and tag)
    line_t                data;
  } sram_req_t;

  // Read result, one cycle after the grant
  typedef struct packed {
    logic       hit;     // valid and tag equal to the requested line
    flags_t     flags;   // flags stored at the index
    line_addr_t victim;  // line address stored at the index
    line_t      data;
  } sram_rsp_t;

  // Snoop notifications broadcast by the snoop controller
  typedef struct packed {
    logic       read;   // a snoop read of line `addr` is taking place
    logic       inval;  // line `addr` is being invalidated
    line_addr_t addr;
  } snoop_note_t;

  function automatic line_addr_t line_of(addr_t a);
    return a[AddrWidth-1:LineOffset];
  endfunction

  // A coherent read: not a ReadNoSnoop (snoop 0 with non-/system domain)
  function automatic logic ar_is_coherent(ar_t ar);
    return (ar.snoop != 4'b0000) ||
           (ar.domain == DomInnerShareable) || (ar.domain == DomOuterShareable);
  endfunction
  function automatic logic aw_is_coherent(aw_t aw);
    return (aw.snoop != 3'b000) ||
           (aw.domain == DomInnerShareable) || (aw.domain == DomOuterShareable);
  endfunction

  // ---------------- coherence controller internals ----------------
  localparam int unsigned CcuTagWidth = 4;   // up to 16 collision-table entries
  typedef logic [CcuTagWidth-1:0] ccu_tag_t;
  typedef logic [MaxCores-1:0]    core_mask_t;

  // Coherent transactions understood by the decoder
  typedef enum logic [2:0] {
    OpReadOnce, OpReadShared, OpReadUnique, OpCleanUnique, OpWriteUnique, OpWriteBack
  } ccu_op_e;

  // Decoder -> snoop unit (response-order FIFO entry)
  typedef struct packed {
    ccu_tag_t   tag;
    ccu_op_e    op;
    id_t        id;
    addr_t      addr;
    logic [7:0] len;
    logic [2:0] size;
    core_mask_t snooped;   // cores that received the AC snoop
  } ccu_txn_t;

  // Snoop unit -> memory unit
  typedef enum logic [1:0] {
    MemRead,   // read memory, return R burst to the initiator
    MemWrite,  // write the initiator's W data, return B
    MemResp,   // data-less R completion (CleanUnique)
    MemNone    // write-back only
  } mem_op_e;

  typedef struct packed {
    ccu_tag_t   tag;
    mem_op_e    op;
    logic       wb;        // first write back the dirty line waiting in the CD FIFO
    logic       shared;    // IsShared to report with a memory read
    id_t        id;
    addr_t      addr;
    logic [7:0] len;
    logic [2:0] size;
  } mem_cmd_t;

endpackage
