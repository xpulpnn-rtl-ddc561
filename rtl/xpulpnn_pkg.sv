// xpulpnn_pkg: types and constants shared by the XpulpNN core slice and the
// cluster.
//
// Vector modes: a 32-bit register holds 2 halves (h), 4 bytes (b), 8 nibbles
// (n) or 16 crumbs (c). Dot-product signedness: up (both unsigned), usp (first
// operand unsigned, second signed), sp (both signed). The ALU operation list is
// the one of the XpulpNN SIMD instruction set (add, sub, avg, max, min,
// shifts, abs, dot products). The instruction opcodes and function codes below
// are this design's own choice; only the nn_sdotp field positions (immediate
// in bits 24..20, signedness in bits 31..25) are fixed by the ISA description.
// The TCDM request/response structs are the word-wide load/store bundle
// between a core, the DMA port and the logarithmic interconnect.
package xpulpnn_pkg;


  typedef enum logic [1:0] {
    VEC_H = 2'd0,   // 2 x 16 bit
    VEC_B = 2'd1,   // 4 x 8 bit
    VEC_N = 2'd2,   // 8 x 4 bit  (nibble)
    VEC_C = 2'd3    // 16 x 2 bit (crumb)
  } vec_mode_e;

  typedef enum logic [1:0] {
    DOT_UP  = 2'd0,
    DOT_USP = 2'd1,
    DOT_SP  = 2'd2
  } dot_sign_e;

  typedef enum logic [4:0] {
    ALU_ADD     = 5'd0,
    ALU_SUB     = 5'd1,
    ALU_AVG     = 5'd2,
    ALU_AVGU    = 5'd3,
    ALU_MAX     = 5'd4,
    ALU_MAXU    = 5'd5,
    ALU_MIN     = 5'd6,
    ALU_MINU    = 5'd7,
    ALU_SRL     = 5'd8,
    ALU_SRA     = 5'd9,
    ALU_SLL     = 5'd10,
    ALU_ABS     = 5'd11,
    ALU_DOTUP   = 5'd12,
    ALU_DOTUSP  = 5'd13,
    ALU_DOTSP   = 5'd14,
    ALU_SDOTUP  = 5'd15,
    ALU_SDOTUSP = 5'd16,
    ALU_SDOTSP  = 5'd17
  } alu_op_e;

  // Opcodes (design choice: RISC-V custom/vector major opcodes).
  localparam logic [6:0] OPC_XPULPNN_VEC = 7'h57;
  localparam logic [6:0] OPC_NNSDOTP     = 7'h5B;
  localparam logic [6:0] OPC_CU          = 7'h7B;

  // nn_sdotp immediate (instr[24:20]).
  typedef struct packed {
    logic       upd_w;   // bit 4: load mem[rs1] into the addressed weight register
    logic       upd_a;   // bit 3: load mem[rs1] into the addressed activation register
    logic [1:0] w_addr;  // bits 2..1: weight register 0..3
    logic       a_addr;  // bit 0: activation register 0..1
  } nn_imm_t;

  typedef enum logic [1:0] {
    UNIT_NONE = 2'd0,
    UNIT_ALU  = 2'd1,
    UNIT_DOTP = 2'd2
  } unit_e;

  typedef struct packed {
    logic      valid;      // a legal XpulpNN instruction
    unit_e     unit;
    alu_op_e   op;
    vec_mode_e mode;
    dot_sign_e sign;
    logic      accumulate; // sdotp: add rD
    logic      scalar;     // .sc: replicate lane 0 of rs2
    logic      nn;         // nn_sdotp or C&U: weight operand from the NN-RF
    logic      cu;         // C&U: second operand from rs2, not from the NN-RF
    nn_imm_t   imm;
    logic [4:0] rd;
    logic [4:0] rs1;
    logic [4:0] rs2;
    logic      rd_we;      // writes rD (not when rD is x0)
    logic      read_rs2;
    logic      read_rd;    // rD is read as the accumulator
  } ctrl_t;

  typedef struct packed {
    logic        req;
    logic        we;
    logic [3:0]  be;
    logic [31:0] addr;    // byte address
    logic [31:0] wdata;
  } tcdm_req_t;

  typedef struct packed {
    logic        rvalid;
    logic [31:0] rdata;
  } tcdm_rsp_t;

  function automatic int unsigned lane_width(vec_mode_e m);
    case (m)
      VEC_H:   return 16;
      VEC_B:   return 8;
      VEC_N:   return 4;
      default: return 2;
    endcase
  endfunction

endpackage
