// opp_pkg: types and constants shared by the Open Packet Processor (OPP) blocks.
//
// An OPP stage looks up a per-flow context (state label + registers), evaluates
// programmable conditions on it, uses a TCAM to pick an XFSM transition and runs
// the transition's ALU instructions to write the context back. The sizes below are
// those of the FPGA prototype the design follows: 4 ports, 320-bit header bus,
// 128-bit flow keys, 16-bit state labels, four 32-bit flow registers, four global
// registers, eight header fields, eight conditions, five 32-bit ALU instructions,
// 16-bit actions, a 4K-entry 4-way d-left flow table with a 32x128 TCAM and a
// 128x160 XFSM TCAM.
//
// Choices of this design (not fixed by the architecture): the packet descriptor
// layout, the configuration address map, the instruction and action encodings,
// the operand codes (0-3 R, 4-7 G, 8-15 H) and the XFSM match-key layout.
package opp_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned NPORTS     = 4;
  localparam int unsigned BEAT_W     = 64;
  localparam int unsigned HDR_W      = 320;   // first 40 bytes of the packet
  localparam int unsigned TS_W       = 32;
  localparam int unsigned LEN_W      = 16;
  localparam int unsigned PORT_W     = 2;
  localparam int unsigned FK_W       = 128;
  localparam int unsigned STATE_W    = 16;
  localparam int unsigned REG_W      = 32;
  localparam int unsigned NREGS      = 4;     // per-flow registers R0..R3
  localparam int unsigned NGLOBAL    = 4;     // global registers G0..G3
  localparam int unsigned NFIELDS    = 8;     // header fields H0..H7
  localparam int unsigned NCOND      = 8;
  localparam int unsigned NALU       = 5;
  localparam int unsigned INSTR_W    = 32;
  localparam int unsigned ACTION_W   = 16;
  localparam int unsigned XKEY_W     = 160;   // XFSM TCAM key
  localparam int unsigned XVAL_W     = STATE_W + ACTION_W + NALU*INSTR_W; // 192
  localparam int unsigned CTX_W      = STATE_W + NREGS*REG_W + 2;          // 146
  localparam int unsigned OPND_W     = 4;     // operand code width

  // Extraction vector: metadata above the header so that SaM units can pick it.
  // bits [319:0] header, [351:320] timestamp, [367:352] length, [375:368] in_port
  localparam int unsigned XV_W       = HDR_W + TS_W + LEN_W + 8;           // 376
  localparam int unsigned XV_OFF_W   = 9;

  // ---------------------------------------------------------------- packet descriptor
  typedef struct packed {
    logic [PORT_W-1:0] in_port;
    logic [LEN_W-1:0]  len;       // packet length in bytes
    logic [TS_W-1:0]   ts;        // arrival timestamp (filled by opp_metadata)
    logic [HDR_W-1:0]  hdr;       // first 320 bits, byte 0 in bits [7:0]
  } pkt_desc_t;

  // ---------------------------------------------------------------- flow context
  typedef logic [REG_W-1:0] reg_t;
  typedef reg_t [NREGS-1:0]   regs_t;
  typedef reg_t [NGLOBAL-1:0] gregs_t;
  typedef reg_t [NFIELDS-1:0] fields_t;

  // activity flags kept with every flow-table entry
  typedef enum logic [1:0] {
    FLAG_DELETED  = 2'b00,
    FLAG_INACTIVE = 2'b01,
    FLAG_ACTIVE   = 2'b10
  } flag_e;

  typedef struct packed {
    flag_e              flags;
    regs_t              r;
    logic [STATE_W-1:0] state;
  } ctx_t;                          // 146 bits

  // ---------------------------------------------------------------- conditions
  typedef enum logic [2:0] {
    CMP_OFF = 3'd0, CMP_GT = 3'd1, CMP_GE = 3'd2, CMP_EQ = 3'd3,
    CMP_LE = 3'd4, CMP_LT = 3'd5
  } cmp_e;

  typedef struct packed {
    cmp_e              op;
    logic [OPND_W-1:0] sel_b;
    logic [OPND_W-1:0] sel_a;
  } cond_cfg_t;                     // configuration word bits [10:0]

  // ---------------------------------------------------------------- ALU instructions
  // [31:24] opcode, [23:20] A, [19:16] B, [15:12] C, [11:8] D, [15:0] immediate
  typedef enum logic [7:0] {
    OP_NOP  = 8'h00, OP_NOT  = 8'h01, OP_XOR  = 8'h02, OP_AND  = 8'h03,
    OP_OR   = 8'h04, OP_ADD  = 8'h10, OP_SUB  = 8'h11, OP_MUL  = 8'h12,
    OP_DIV  = 8'h13, OP_ADDI = 8'h18, OP_SUBI = 8'h19, OP_MULI = 8'h1A,
    OP_DIVI = 8'h1B, OP_LSL  = 8'h20, OP_LSR  = 8'h21, OP_ROR  = 8'h22,
    OP_AVG  = 8'h30, OP_VAR  = 8'h31, OP_EWMA = 8'h32
  } opcode_e;

  // operand codes: 0..3 R0..R3, 4..7 G0..G3, 8..15 H0..H7
  function automatic reg_t opnd(input logic [OPND_W-1:0] sel, input regs_t r,
                                input gregs_t g, input fields_t h);
    if (sel[3])      return h[sel[2:0]];
    else if (sel[2]) return g[sel[1:0]];
    else             return r[sel[1:0]];
  endfunction

  // ---------------------------------------------------------------- actions
  // [15:12] type, [3:0] output port
  localparam logic [3:0] ACT_DROP  = 4'd0;
  localparam logic [3:0] ACT_FWD   = 4'd1;
  localparam logic [3:0] ACT_FLOOD = 4'd2;

  // ---------------------------------------------------------------- configuration bus
  // word address: [23:20] block, [19:5] entry, [4:0] word within entry
  typedef struct packed {
    logic        we;
    logic [23:0] addr;
    logic [31:0] wdata;
  } cfg_req_t;

  localparam logic [3:0] CFG_EXTRACT = 4'd0;
  localparam logic [3:0] CFG_COND    = 4'd1;
  localparam logic [3:0] CFG_GLOBAL  = 4'd2;
  localparam logic [3:0] CFG_FLOWTC  = 4'd3;
  localparam logic [3:0] CFG_XFSM    = 4'd4;
  localparam logic [3:0] CFG_CTRL    = 4'd5;

  function automatic logic [23:0] cfg_addr(input logic [3:0] blk, input int unsigned entry,
                                           input int unsigned word);
    return {blk, 15'(entry), 5'(word)};
  endfunction

  // ---------------------------------------------------------------- d-left hash
  // Way w hashes the key by folding it to 32 bits, multiplying by an odd
  // per-way constant and taking the top bits of the low word.
  function automatic logic [31:0] hash_fold(input logic [FK_W-1:0] key, input int unsigned way);
    logic [31:0] f, k;
    logic [63:0] p;
    f = key[31:0] ^ key[63:32] ^ key[95:64] ^ key[127:96];
    case (way)
      0:       k = 32'h9E3779B1;
      1:       k = 32'h85EBCA77;
      2:       k = 32'hC2B2AE3D;
      default: k = 32'h27D4EB2F;
    endcase
    f = f ^ (f >> 15);
    p = 64'(f) * 64'(k);
    return p[31:0] ^ (p[31:0] >> 13);
  endfunction

endpackage
