// nx_pkg: types and constants shared by the NX-CGRA RTL.
//
// The array is a torus of 4 columns x 6 rows of 32-bit cores: rows 0, 2, 3 and 5 hold
// processing elements (PEs), rows 1 and 4 hold memory-operation blocks (MOBs), which is the
// 16 PE + 8 MOB arrangement of the published floor plan. Everything else here (the 32-bit
// micro-instruction format, the opcode numbering, register-file depths, the context record
// format and the bus structs) is this design's own choice, since the published description
// names the operators but gives no encoding.
//
// Micro-instruction word (one per cycle, per core):
//   [31:26] opcode          [25:23] source select A    [22:20] source select B
//   [19:16] index A         [15:12] index B            [11:8]  destination index rd
//   [7]     write rd        [6:0]   immediate (branch target, byte lane, ...)
// Operand C of a PE is always its temporary register rd (accumulator / mask).
package nx_pkg;

  localparam int unsigned XLEN      = 32;
  localparam int unsigned N_COLS    = 4;
  localparam int unsigned N_ROWS    = 6;
  localparam int unsigned N_CORES   = N_COLS * N_ROWS;   // 24
  localparam int unsigned N_MOBS    = 8;
  localparam int unsigned IRF_DEPTH = 32;                 // micro-code words per core
  localparam int unsigned CRF_DEPTH = 16;                 // inline constants per core
  localparam int unsigned TRF_DEPTH = 8;                  // PE temporary registers
  localparam int unsigned PC_W      = $clog2(IRF_DEPTH);

  // Row kinds of the torus (Fig. 1(b) order: PE, MOB, PE, PE, MOB, PE).
  function automatic logic row_is_mob(int unsigned row);
    return (row == 1) || (row == 4);
  endfunction

  // Operand source selects.
  typedef enum logic [2:0] {
    SRC_TRF  = 3'd0,  // PE: temporary RF / MOB: constant RF (its writable RF)
    SRC_CRF  = 3'd1,  // inline constant RF
    SRC_N    = 3'd2,  // output register of the north neighbour
    SRC_E    = 3'd3,
    SRC_S    = 3'd4,
    SRC_W    = 3'd5,
    SRC_SELF = 3'd6,  // own output register
    SRC_ZERO = 3'd7
  } src_e;

  typedef enum logic [5:0] {
    OP_NOP    = 6'd0,
    OP_EXIT   = 6'd1,   // core finished: report done and sleep
    OP_JUMP   = 6'd2,   // pc <- imm
    OP_CJUMP  = 6'd3,   // if (A != 0) pc <- imm
    OP_MOV    = 6'd4,   // out <- A
    // ALU32
    OP_ADD    = 6'd8,
    OP_SUB    = 6'd9,
    OP_AND    = 6'd10,
    OP_OR     = 6'd11,
    OP_XOR    = 6'd12,
    OP_SLL    = 6'd13,
    OP_SRL    = 6'd14,
    OP_SRA    = 6'd15,
    OP_SLT    = 6'd16,
    OP_SLTU   = 6'd17,
    OP_SEQ    = 6'd18,
    OP_MERGE  = 6'd19,  // sub-word masking: (A & ~C) | (B & C)
    OP_SEL    = 6'd20,  // C != 0 ? A : B
    OP_BEXT   = 6'd21,  // byte lane imm[1:0] of A, zero-extended
    OP_ADDC   = 6'd22,  // A + B + C
    // ALU8
    OP_MUL8U  = 6'd24,  // A[7:0] * B[7:0] unsigned
    OP_MAC4   = 6'd25,  // C + sum_i sA[i]*sB[i], four signed int8 lanes
    OP_SAT8   = 6'd26,  // clamp signed A to [-128,127]
    OP_DIV8   = 6'd27,  // A[7:0] / B[7:0] unsigned
    // MUL16/32
    OP_MUL16U = 6'd28,  // A[15:0] * B[15:0] unsigned
    OP_MUL32  = 6'd29,  // low 32 bits of signed A * signed B
    // DIV32
    OP_DIV    = 6'd30,
    OP_DIVU   = 6'd31,
    OP_REM    = 6'd32,
    OP_REMU   = 6'd33,
    // MOB only
    OP_LD     = 6'd40,  // out <- mem[A]
    OP_LDP    = 6'd41,  // out <- mem[prev + A]
    OP_ST     = 6'd42,  // mem[A] <- B
    OP_STP    = 6'd43   // mem[prev + A] <- B
  } op_e;

  typedef struct packed {
    op_e        op;
    src_e       sa;
    src_e       sb;
    logic [3:0] ia;
    logic [3:0] ib;
    logic [3:0] rd;
    logic       we;
    logic [6:0] imm;
  } instr_t;

  // Open Bus Interface (OBI) request / response, address phase and response phase.
  typedef struct packed {
    logic        req;
    logic        we;
    logic [3:0]  be;
    logic [31:0] addr;
    logic [31:0] wdata;
  } obi_req_t;

  typedef struct packed {
    logic        gnt;
    logic        rvalid;
    logic [31:0] rdata;
  } obi_rsp_t;

  // APB request / response.
  typedef struct packed {
    logic        psel;
    logic        penable;
    logic        pwrite;
    logic [11:0] paddr;
    logic [31:0] pwdata;
  } apb_req_t;

  typedef struct packed {
    logic        pready;
    logic        pslverr;
    logic [31:0] prdata;
  } apb_rsp_t;

  // Configuration write from the memory controller to one core register file:
  // address = {core[4:0], rf select, index[5:0]} in word units.
  typedef enum logic {CFG_IRF = 1'b0, CFG_CRF = 1'b1} cfg_sel_e;

  // Context record header: {core[31:27], sel[26], base[25:20], count[19:14], 14'b0},
  // followed by 'count' data words; a header with count == 0 ends the context.
  function automatic logic [31:0] ctx_header(int unsigned core, cfg_sel_e sel,
                                             int unsigned base, int unsigned count);
    return {core[4:0], sel, base[5:0], count[5:0], 14'd0};
  endfunction

  // Memory map (APB byte offsets).
  localparam logic [11:0] MM_CTRL     = 12'h000;  // w: [0] start, [1] clear done
  localparam logic [11:0] MM_STATUS   = 12'h004;  // r: [0] busy, [1] done, [2] fetching
  localparam logic [11:0] MM_CTX_BASE = 12'h008;  // rw: first context word
  localparam logic [11:0] MM_CORES    = 12'h00C;  // r: cores that received context
  localparam logic [11:0] MM_DONE     = 12'h010;  // r: cores that executed EXIT
  localparam logic [11:0] MM_CYCLES   = 12'h014;  // r: cycles of the last run

  function automatic logic [31:0] enc(op_e op, src_e sa, logic [3:0] ia, src_e sb,
                                      logic [3:0] ib, logic [3:0] rd, logic we,
                                      logic [6:0] imm);
    instr_t i;
    i = '{op: op, sa: sa, sb: sb, ia: ia, ib: ib, rd: rd, we: we, imm: imm};
    return i;
  endfunction

endpackage
