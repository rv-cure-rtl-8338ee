// rvcure_pkg: types and constants shared by the RV-CURE capability extensions.
//
// A tagged pointer carries a 16-bit tag (a CRC-16 of the address) in its
// upper bits; the tag selects a row of the capability metadata table (CMT)
// in memory, and each row holds numWaysCMT ways of 8-byte metadata.
// Widths that follow the paper: 16-bit tag, 8-byte metadata, tag[7:0] as the
// C-cache and head-buffer index, 24 SLQ/SSQ entries, 96 ROB entries.
// Choices of this design: the tag sits in pointer bits [63:48]; the address
// part of a pointer is bits [47:0]; the metadata holds a 32-bit base and a
// 32-bit size in plain form; the CRC is CRC-16/CCITT (polynomial 0x1021,
// initial value 0xFFFF) over the 48 address bits, most significant bit first.
package rvcure_pkg;

  localparam int unsigned XLEN       = 64;
  localparam int unsigned TAG_W      = 16;
  localparam int unsigned TAG_LSB    = 48;          // tag occupies [63:48]
  localparam int unsigned ADDR_BITS  = 48;          // untagged address bits
  localparam int unsigned WAY_W      = 10;          // SHB/CHB entry width
  localparam int unsigned NWAYS_W    = WAY_W + 1;   // numWaysCMT up to 1024
  localparam int unsigned LOG2N_W    = 4;
  localparam int unsigned ROB_ENTRIES = 96;
  localparam int unsigned ROB_IDX_W  = 7;
  localparam int unsigned QUEUE_ENTRIES = 24;       // SLQ and SSQ each
  localparam int unsigned Q_IDX_W    = 5;
  localparam int unsigned CC_SETS    = 256;         // indexed by tag[7:0]

  localparam logic [15:0] CRC16_POLY = 16'h1021;
  localparam logic [15:0] CRC16_INIT = 16'hFFFF;

  // Custom CSR numbers (user read/write custom space)
  localparam logic [11:0] CSR_ENABLE_DPT = 12'h8C0;
  localparam logic [11:0] CSR_BASE_CMT   = 12'h8C1;
  localparam logic [11:0] CSR_NWAYS_CMT  = 12'h8C2;

  // Instruction encodings: RISC-V custom-0 opcode, funct3 selects the op
  localparam logic [6:0] OPC_LOAD    = 7'b0000011;
  localparam logic [6:0] OPC_LOAD_FP = 7'b0000111;
  localparam logic [6:0] OPC_STORE   = 7'b0100011;
  localparam logic [6:0] OPC_STORE_FP= 7'b0100111;
  localparam logic [6:0] OPC_CUSTOM0 = 7'b0001011;
  localparam logic [2:0] F3_TAGD = 3'd0;
  localparam logic [2:0] F3_XTAG = 3'd1;
  localparam logic [2:0] F3_CSTR = 3'd2;
  localparam logic [2:0] F3_CCLR = 3'd3;

  typedef enum logic [2:0] {
    OP_OTHER = 3'd0,
    OP_LOAD  = 3'd1,
    OP_STORE = 3'd2,
    OP_TAGD  = 3'd3,
    OP_XTAG  = 3'd4,
    OP_CSTR  = 3'd5,
    OP_CCLR  = 3'd6
  } op_e;

  // Per-entry state of the shadow queues (Sec. "Capability Execution Pipeline")
  typedef enum logic [1:0] {
    S_INIT  = 2'd0,
    S_READY = 2'd1,
    S_WAIT  = 2'd2,
    S_DONE  = 2'd3
  } cap_state_e;

  typedef enum logic [1:0] {
    FAULT_LOAD  = 2'd0,
    FAULT_STORE = 2'd1,
    FAULT_CSTR  = 2'd2,
    FAULT_CCLR  = 2'd3
  } fault_cause_e;

  // Iteration modes of the store/clear head buffers
  typedef enum logic [1:0] {
    HB_BASE     = 2'd0,
    HB_LAFD     = 2'd1,
    HB_FAFD     = 2'd2,
    HB_ADAPTIVE = 2'd3
  } hb_mode_e;

  // 8-byte capability metadata; all zero means an empty CMT way
  typedef struct packed {
    logic [31:0] size;
    logic [31:0] base;
  } cap_meta_t;

  // Capability request from a shadow queue towards the LSU scheduler
  typedef struct packed {
    logic               is_store;
    logic [XLEN-1:0]    addr;
    logic [XLEN-1:0]    data;
    logic               src_ssq;
    logic [Q_IDX_W-1:0] idx;
  } cap_req_t;

  // Memory request on the shared D-cache port
  typedef struct packed {
    logic               is_cap;
    logic               is_store;
    logic [XLEN-1:0]    addr;
    logic [XLEN-1:0]    data;
    logic               src_ssq;
    logic [Q_IDX_W-1:0] idx;
  } mem_req_t;

  // Load response from the D-cache
  typedef struct packed {
    logic               is_cap;
    logic               src_ssq;
    logic [Q_IDX_W-1:0] idx;
    logic [XLEN-1:0]    data;
  } mem_resp_t;

  function automatic logic [TAG_W-1:0] ptr_tag(input logic [XLEN-1:0] p);
    return p[XLEN-1:TAG_LSB];
  endfunction

  function automatic logic [XLEN-1:0] strip_tag(input logic [XLEN-1:0] p);
    return {{(XLEN-ADDR_BITS){1'b0}}, p[ADDR_BITS-1:0]};
  endfunction

  // Bit-serial CRC-16/CCITT over the 48 address bits, MSB first
  function automatic logic [15:0] crc16_addr(input logic [ADDR_BITS-1:0] a);
    logic [15:0] c;
    c = CRC16_INIT;
    for (int i = ADDR_BITS - 1; i >= 0; i--) begin
      if (c[15] ^ a[i]) c = {c[14:0], 1'b0} ^ CRC16_POLY;
      else              c = {c[14:0], 1'b0};
    end
    return c;
  endfunction

endpackage
