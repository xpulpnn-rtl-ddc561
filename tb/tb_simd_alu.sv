// tb_simd_alu: self-checking testbench of xpulpnn_simd_alu.
//
// Drives random operands for every operation and every lane width, plus
// directed corner values (most negative lane, all ones), and compares each
// lane with a reference computed here from the per-lane definitions using
// plain integer arithmetic.
module tb_simd_alu;
  import xpulpnn_pkg::*;

  alu_op_e     op;
  vec_mode_e   mode;
  logic [31:0] a, b, res;
  int checks = 0, failures = 0;

  xpulpnn_simd_alu dut (.op_i(op), .mode_i(mode), .a_i(a), .b_i(b), .res_o(res));

  function automatic logic [31:0] ref_alu(alu_op_e o, vec_mode_e m, logic [31:0] x, logic [31:0] y);
    int w, n;
    logic [31:0] r;
    longint ux, uy, sx, sy, t, msk;
    w = (m == VEC_H) ? 16 : (m == VEC_B) ? 8 : (m == VEC_N) ? 4 : 2;
    n = 32 / w;
    msk = (64'd1 << w) - 1;
    r = 0;
    for (int i = 0; i < n; i++) begin
      ux = (x >> (w*i)) & msk;
      uy = (y >> (w*i)) & msk;
      sx = (ux >= (64'd1 << (w-1))) ? ux - (64'd1 << w) : ux;
      sy = (uy >= (64'd1 << (w-1))) ? uy - (64'd1 << w) : uy;
      case (o)
        ALU_ADD:  t = ux + uy;
        ALU_SUB:  t = ux - uy;
        ALU_AVG:  t = (sx + sy) >>> 1;
        ALU_AVGU: t = (ux + uy) >> 1;
        ALU_MAX:  t = (sx > sy) ? ux : uy;
        ALU_MAXU: t = (ux > uy) ? ux : uy;
        ALU_MIN:  t = (sx < sy) ? ux : uy;
        ALU_MINU: t = (ux < uy) ? ux : uy;
        ALU_SRL:  t = ux >> (uy % w);
        ALU_SRA:  t = sx >>> (uy % w);
        ALU_SLL:  t = ux << (uy % w);
        ALU_ABS:  t = (sx < 0) ? -sx : sx;
        default:  t = 0;
      endcase
      r = r | ((32'(t & msk)) << (w*i));
    end
    return r;
  endfunction

  initial begin
    for (int k = 0; k < 20000; k++) begin
      op   = alu_op_e'($urandom % 12);
      mode = vec_mode_e'($urandom % 4);
      case (k % 5)
        0: begin a = 32'h8888_8888; b = $urandom; end
        1: begin a = $urandom; b = 32'hFFFF_FFFF; end
        2: begin a = 32'h8000_8080; b = 32'h8000_8080; end
        default: begin a = $urandom; b = $urandom; end
      endcase
      #1;
      checks++;
      if (res !== ref_alu(op, mode, a, b)) begin
        failures++;
        if (failures < 10) $display("FAIL op=%s mode=%s a=%h b=%h res=%h exp=%h",
                                    op.name(), mode.name(), a, b, res, ref_alu(op, mode, a, b));
      end
    end
    // directed: nibble add wraps per lane, crumb max signed
    op = ALU_ADD; mode = VEC_N; a = 32'h7777_7777; b = 32'h1111_1111; #1;
    checks++; if (res !== 32'h8888_8888) failures++;
    op = ALU_MAX; mode = VEC_C; a = 32'h5555_5555; b = 32'hAAAA_AAAA; #1; // 1 vs -2 -> 1
    checks++; if (res !== 32'h5555_5555) failures++;
    // dot products are not computed by the ALU
    op = ALU_SDOTSP; #1;
    checks++; if (res !== 32'h0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
