// xpulpnn_decoder: decodes XpulpNN instruction words into a control word.
//
// Two formats are recognised, both laid out like RISC-V R-type words:
//
//   SIMD ops (opcode 0x57)   [31:27] operation (alu_op_e code), [26:25] 0,
//                            [24:20] rs2, [19:15] rs1, [14] .sc, [13:12] DT,
//                            [11:7] rD
//   nn_sdotp (opcode 0x5B)   [31:25] signedness (0 up, 1 usp, 2 sp),
//                            [24:20] immediate, [19:15] rs1 (address of the
//                            next memory access), [14:12] DT, [11:7] rD
//   C&U   (opcode 0x7B)      [31:27] signedness (0 up, 1 usp, 2 sp),
//                            [26:25] NN-RF weight register i, [24:20] rs2
//                            (second operand), [19:15] rs1 (address of the
//                            next memory access), [14:12] DT, [11:7] rD
//
// The Compute&Update (C&U) form is the first Mac&Load variant: it always
// refills the weight register it consumes. It is decoded as an nn_sdotp with
// the weight-update bit set and the activation taken from rs2.
//
// DT is 0 h, 1 b, 2 n, 3 c. The .sc variant replicates lane 0 of rs2 over all
// lanes; there is no variant with an immediate operand. The nn_sdotp
// immediate: bit 0 activation register, bits 2..1 weight register, bit 3
// update the activation register, bit 4 update the weight register; bits 3
// and 4 together are illegal because a single load unit cannot do both.
// Anything else (including abs with .sc) decodes as not valid.
//
// Combinational. The nn_sdotp and C&U field positions and immediate meaning follow
// the XpulpNN ISA description; the opcode and function-code values are this
// design's own choice.
module xpulpnn_decoder
  import xpulpnn_pkg::*;
(
  input  logic [31:0] instr_i,
  output ctrl_t       ctrl_o
);

  logic [6:0] opcode;
  logic [4:0] rd, rs1, rs2, f5;
  logic [6:0] f7;
  logic [2:0] f3;

  assign opcode = instr_i[6:0];
  assign rd     = instr_i[11:7];
  assign f3     = instr_i[14:12];
  assign rs1    = instr_i[19:15];
  assign rs2    = instr_i[24:20];
  assign f7     = instr_i[31:25];
  assign f5     = instr_i[31:27];

  always_comb begin
    ctrl_o      = '0;
    ctrl_o.rd   = rd;
    ctrl_o.rs1  = rs1;
    ctrl_o.rs2  = rs2;
    ctrl_o.mode = vec_mode_e'(f3[1:0]);
    ctrl_o.imm  = nn_imm_t'(rs2);

    if (opcode == OPC_XPULPNN_VEC && f7[1:0] == 2'b00 && f5 <= 5'd17) begin
      ctrl_o.valid    = 1'b1;
      ctrl_o.op       = alu_op_e'(f5);
      ctrl_o.scalar   = f3[2];
      ctrl_o.read_rs2 = 1'b1;
      case (alu_op_e'(f5))
        ALU_DOTUP, ALU_DOTUSP, ALU_DOTSP, ALU_SDOTUP, ALU_SDOTUSP, ALU_SDOTSP: begin
          ctrl_o.unit = UNIT_DOTP;
          ctrl_o.sign = (f5 == ALU_DOTUP  || f5 == ALU_SDOTUP)  ? DOT_UP  :
                        (f5 == ALU_DOTUSP || f5 == ALU_SDOTUSP) ? DOT_USP : DOT_SP;
          ctrl_o.accumulate = (f5 >= ALU_SDOTUP);
          ctrl_o.read_rd    = (f5 >= ALU_SDOTUP);
        end
        ALU_ABS: begin
          ctrl_o.unit     = UNIT_ALU;
          ctrl_o.read_rs2 = 1'b0;
          if (f3[2]) ctrl_o.valid = 1'b0;
        end
        default: ctrl_o.unit = UNIT_ALU;
      endcase
    end else if (opcode == OPC_NNSDOTP && f7 <= 7'd2 && !f3[2] && !(rs2[4] && rs2[3])) begin
      ctrl_o.valid      = 1'b1;
      ctrl_o.unit       = UNIT_DOTP;
      ctrl_o.nn         = 1'b1;
      ctrl_o.sign       = dot_sign_e'(f7[1:0]);
      ctrl_o.op         = (f7 == 7'd0) ? ALU_SDOTUP : (f7 == 7'd1) ? ALU_SDOTUSP : ALU_SDOTSP;
      ctrl_o.accumulate = 1'b1;
      ctrl_o.read_rd    = 1'b1;
    end else if (opcode == OPC_CU && f5 <= 5'd2 && !f3[2]) begin
      ctrl_o.valid      = 1'b1;
      ctrl_o.unit       = UNIT_DOTP;
      ctrl_o.nn         = 1'b1;
      ctrl_o.cu         = 1'b1;
      ctrl_o.sign       = dot_sign_e'(f5[1:0]);
      ctrl_o.op         = (f5 == 5'd0) ? ALU_SDOTUP : (f5 == 5'd1) ? ALU_SDOTUSP : ALU_SDOTSP;
      ctrl_o.accumulate = 1'b1;
      ctrl_o.read_rd    = 1'b1;
      ctrl_o.read_rs2   = 1'b1;
      ctrl_o.imm        = '{upd_w: 1'b1, upd_a: 1'b0, w_addr: f7[1:0], a_addr: 1'b0};
    end

    ctrl_o.rd_we = ctrl_o.valid && (rd != 5'd0);
    if (!ctrl_o.valid) ctrl_o.unit = UNIT_NONE;
  end

endmodule
