// tb_decoder: self-checking testbench of xpulpnn_decoder.
//
// Builds instruction words field by field (independently of the decoder) for
// every SIMD operation in both the vector and the .sc form, for every nn_sdotp
// signedness/width/immediate, for every C&U (pv.cusdot) signedness/width/
// weight register, and for illegal words (wrong opcode, abs.sc,
// both nn_sdotp update bits set, unknown function codes), and checks the
// decoded control fields.
module tb_decoder;
  import xpulpnn_pkg::*;

  logic [31:0] instr;
  ctrl_t       ctrl;
  int checks = 0, failures = 0;

  xpulpnn_decoder dut (.instr_i(instr), .ctrl_o(ctrl));

  task automatic expect_eq(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s instr=%h got=%0h exp=%0h", what, instr, got, exp);
    end
  endtask

  initial begin
    logic [4:0] rd, rs1, rs2;
    // SIMD ops
    for (int op = 0; op < 32; op++) begin
      for (int sc = 0; sc < 2; sc++) begin
        for (int dt = 0; dt < 4; dt++) begin
          rd = 5'($urandom); rs1 = 5'($urandom); rs2 = 5'($urandom);
          instr = {5'(op), 2'b00, rs2, rs1, 1'(sc), 2'(dt), rd, 7'h57};
          #1;
          if (op > 17 || (op == 11 && sc == 1)) begin
            expect_eq("illegal", ctrl.valid, 0);
            expect_eq("unit none", ctrl.unit, UNIT_NONE);
            expect_eq("no write", ctrl.rd_we, 0);
          end else begin
            expect_eq("valid", ctrl.valid, 1);
            expect_eq("op", ctrl.op, op);
            expect_eq("mode", ctrl.mode, dt);
            expect_eq("scalar", ctrl.scalar, sc);
            expect_eq("rd", ctrl.rd, rd);
            expect_eq("rs1", ctrl.rs1, rs1);
            expect_eq("rs2", ctrl.rs2, rs2);
            expect_eq("rd_we", ctrl.rd_we, rd != 0);
            expect_eq("nn", ctrl.nn, 0);
            expect_eq("unit", ctrl.unit, (op >= 12) ? UNIT_DOTP : UNIT_ALU);
            expect_eq("accumulate", ctrl.accumulate, op >= 15);
            expect_eq("read_rd", ctrl.read_rd, op >= 15);
            if (op >= 12)
              expect_eq("sign", ctrl.sign, (op == 12 || op == 15) ? DOT_UP :
                                           (op == 13 || op == 16) ? DOT_USP : DOT_SP);
          end
        end
      end
    end
    // nn_sdotp
    for (int s = 0; s < 4; s++) begin
      for (int dt = 0; dt < 8; dt++) begin
        for (int imm = 0; imm < 32; imm++) begin
          rd = 5'($urandom); rs1 = 5'($urandom);
          instr = {7'(s), 5'(imm), rs1, 3'(dt), rd, 7'h5B};
          #1;
          if (s == 3 || dt >= 4 || (imm[4] && imm[3])) begin
            expect_eq("nn illegal", ctrl.valid, 0);
          end else begin
            expect_eq("nn valid", ctrl.valid, 1);
            expect_eq("nn flag", ctrl.nn, 1);
            expect_eq("nn unit", ctrl.unit, UNIT_DOTP);
            expect_eq("nn sign", ctrl.sign, s);
            expect_eq("nn mode", ctrl.mode, dt);
            expect_eq("nn acc", ctrl.accumulate, 1);
            expect_eq("nn upd_w", ctrl.imm.upd_w, imm[4]);
            expect_eq("nn upd_a", ctrl.imm.upd_a, imm[3]);
            expect_eq("nn w_addr", ctrl.imm.w_addr, imm[2:1]);
            expect_eq("nn a_addr", ctrl.imm.a_addr, imm[0]);
            expect_eq("nn rs1", ctrl.rs1, rs1);
            expect_eq("nn rd", ctrl.rd, rd);
          end
        end
      end
    end
    // C&U
    for (int s = 0; s < 32; s++) begin
      for (int dt = 0; dt < 8; dt++) begin
        for (int i = 0; i < 4; i++) begin
          rd = 5'($urandom); rs1 = 5'($urandom); rs2 = 5'($urandom);
          instr = {5'(s), 2'(i), rs2, rs1, 3'(dt), rd, 7'h7B};
          #1;
          if (s > 2 || dt >= 4) begin
            expect_eq("cu illegal", ctrl.valid, 0);
          end else begin
            expect_eq("cu valid", ctrl.valid, 1);
            expect_eq("cu flags", {ctrl.nn, ctrl.cu}, 2'b11);
            expect_eq("cu unit", ctrl.unit, UNIT_DOTP);
            expect_eq("cu sign", ctrl.sign, s);
            expect_eq("cu mode", ctrl.mode, dt);
            expect_eq("cu acc", ctrl.accumulate, 1);
            expect_eq("cu read_rs2", ctrl.read_rs2, 1);
            expect_eq("cu upd", {ctrl.imm.upd_w, ctrl.imm.upd_a}, 2'b10);
            expect_eq("cu w_addr", ctrl.imm.w_addr, i);
            expect_eq("cu rs1", ctrl.rs1, rs1);
            expect_eq("cu rs2", ctrl.rs2, rs2);
            expect_eq("cu rd", ctrl.rd, rd);
          end
        end
      end
    end
    // other opcodes
    for (int k = 0; k < 200; k++) begin
      instr = $urandom;
      if (instr[6:0] == 7'h57 || instr[6:0] == 7'h5B || instr[6:0] == 7'h7B) instr[6:0] = 7'h33;
      #1;
      expect_eq("other opcode", ctrl.valid, 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
