// tb_core_ext: self-checking testbench of xpulpnn_core_ext.
//
// The testbench plays the fetch side (an instruction stream) and a TCDM port
// (grant in the request cycle when allowed, data one cycle after the grant).
// An instruction-level reference model kept here executes the same program
// in order: GP-RF, NN-RF and the nn_sdotp/C&U post-increment. At the end every
// GP-RF register is read through the debug port and compared.
//
//  1. 8-bit MatMul inner loop written with nn_sdotp (the "4x2" kernel: one
//     explicit activation load and eight Mac&Load dot products per
//     iteration), with the memory always granting. Checks the results and
//     that the loop issues one instruction per cycle: no stall cycles.
//  1b. The "4x4" kernel of Fig. 10 (four im2col buffers, 16 accumulators,
//     16 dot products per explicit load): results, 17 instructions per
//     iteration at one per cycle, no stalls.
//  2. Random programs mixing all SIMD ALU ops, dot products (.vv and .sc) and
//     nn_sdotp with random immediates and C&U words, under random grant delays. Checks the
//     results and that both stall kinds (TCDM grant and NN-RF hazard) were
//     exercised.
module tb_core_ext;
  import xpulpnn_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        instr_valid, instr_ready;
  logic [31:0] instr;
  tcdm_req_t   dreq;
  logic        dgnt;
  tcdm_rsp_t   drsp;
  logic [4:0]  dbg_addr;
  logic [31:0] dbg_data;
  logic [31:0] c_instr, c_dotp, c_load, c_sgnt, c_snn, c_ill;
  logic        busy;

  xpulpnn_core_ext dut (
    .clk_i(clk), .rst_ni(rst_n), .instr_valid_i(instr_valid), .instr_i(instr),
    .instr_ready_o(instr_ready), .data_req_o(dreq), .data_gnt_i(dgnt), .data_rsp_i(drsp),
    .dbg_raddr_i(dbg_addr), .dbg_rdata_o(dbg_data), .dbg_we_i(1'b0), .dbg_wdata_i(32'd0), .cnt_instr_o(c_instr), .cnt_dotp_o(c_dotp),
    .cnt_nnload_o(c_load), .cnt_stall_gnt_o(c_sgnt), .cnt_stall_nnrf_o(c_snn),
    .cnt_illegal_o(c_ill), .busy_o(busy));

  int checks = 0, failures = 0;

  // ---------------------------------------------------------------- memory
  localparam int MW = 1024;
  logic [31:0] mem [MW];
  logic        gnt_allow;
  assign dgnt = dreq.req && gnt_allow;
  always_ff @(posedge clk) begin
    drsp.rvalid <= dreq.req && dgnt;
    if (dreq.req && dgnt) drsp.rdata <= mem[dreq.addr[11:2]];
  end

  // ---------------------------------------------------------------- encoders
  function automatic logic [31:0] enc_vec(alu_op_e op, logic sc, vec_mode_e m,
                                          logic [4:0] rd, logic [4:0] rs1, logic [4:0] rs2);
    return {op, 2'b00, rs2, rs1, sc, m, rd, 7'h57};
  endfunction
  function automatic logic [31:0] enc_nn(dot_sign_e s, vec_mode_e m, logic [4:0] rd,
                                         logic [4:0] rs1, logic [4:0] imm);
    return {5'd0, s, imm, rs1, 1'b0, m, rd, 7'h5B};
  endfunction
  // C&U (Fig. 6): rd += dotp(W[i], rs2); W[i] <- mem[rs1]; rs1 += 4
  function automatic logic [31:0] enc_cu(dot_sign_e s, vec_mode_e m, logic [1:0] i, logic [4:0] rd,
                                         logic [4:0] rs1, logic [4:0] rs2);
    return {3'd0, s, i, rs2, rs1, 1'b0, m, rd, 7'h7B};
  endfunction

  // ---------------------------------------------------------------- reference model
  logic [31:0] m_rf [32];
  logic [31:0] m_w [4];
  logic [31:0] m_a [2];
  int m_dotp, m_load, m_cu;

  function automatic logic [31:0] ref_dot(vec_mode_e m, dot_sign_e s, logic [31:0] x, logic [31:0] y);
    int w, n;
    longint sum, ex, ey;
    w = (m == VEC_H) ? 16 : (m == VEC_B) ? 8 : (m == VEC_N) ? 4 : 2;
    n = 32 / w;
    sum = 0;
    for (int i = 0; i < n; i++) begin
      ex = (x >> (w*i)) & ((64'd1 << w) - 1);
      ey = (y >> (w*i)) & ((64'd1 << w) - 1);
      if (s == DOT_SP && ex >= (64'd1 << (w-1))) ex -= (64'd1 << w);
      if (s != DOT_UP && ey >= (64'd1 << (w-1))) ey -= (64'd1 << w);
      sum += ex * ey;
    end
    return sum[31:0];
  endfunction

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

  function automatic logic [31:0] repl(vec_mode_e m, logic [31:0] v);
    case (m)
      VEC_H:   return {2{v[15:0]}};
      VEC_B:   return {4{v[7:0]}};
      VEC_N:   return {8{v[3:0]}};
      default: return {16{v[1:0]}};
    endcase
  endfunction

  task automatic model_exec(logic [31:0] iw);
    logic [6:0] opc;
    logic [4:0] rd, rs1, rs2, f5;
    logic [2:0] f3;
    logic [6:0] f7;
    logic [31:0] r, x, y, addr;
    logic has_res;
    opc = iw[6:0]; rd = iw[11:7]; f3 = iw[14:12]; rs1 = iw[19:15]; rs2 = iw[24:20];
    f7 = iw[31:25]; f5 = iw[31:27];
    has_res = 0; r = 0;
    addr = m_rf[rs1];
    if (opc == 7'h57 && f7[1:0] == 0 && f5 <= 17 && !(f5 == 11 && f3[2])) begin
      x = m_rf[rs1];
      y = f3[2] ? repl(vec_mode_e'(f3[1:0]), m_rf[rs2]) : m_rf[rs2];
      if (f5 >= 12) begin
        dot_sign_e s;
        s = (f5 == 12 || f5 == 15) ? DOT_UP : (f5 == 13 || f5 == 16) ? DOT_USP : DOT_SP;
        r = ref_dot(vec_mode_e'(f3[1:0]), s, x, y) + ((f5 >= 15) ? m_rf[rd] : 32'd0);
        m_dotp++;
      end else begin
        r = ref_alu(alu_op_e'(f5), vec_mode_e'(f3[1:0]), x, y);
      end
      has_res = 1;
    end else if (opc == 7'h5B && f7 <= 2 && !f3[2] && !(rs2[4] && rs2[3])) begin
      r = ref_dot(vec_mode_e'(f3[1:0]), dot_sign_e'(f7[1:0]), m_w[rs2[2:1]], m_a[rs2[0]]) + m_rf[rd];
      m_dotp++;
      has_res = 1;
      if (rs2[4] || rs2[3]) begin
        if (rs2[4]) m_w[rs2[2:1]] = mem[addr[11:2]];
        else        m_a[rs2[0]]   = mem[addr[11:2]];
        m_load++;
        if (rs1 != 0) m_rf[rs1] = addr + 4;
      end
    end else if (opc == 7'h7B && f5 <= 2 && !f3[2]) begin
      r = ref_dot(vec_mode_e'(f3[1:0]), dot_sign_e'(f5[1:0]), m_w[f7[1:0]], m_rf[rs2]) + m_rf[rd];
      m_dotp++;
      m_cu++;
      has_res = 1;
      m_w[f7[1:0]] = mem[addr[11:2]];
      m_load++;
      if (rs1 != 0) m_rf[rs1] = addr + 4;
    end
    if (has_res && rd != 0) m_rf[rd] = r;
  endtask

  // ---------------------------------------------------------------- program driver
  logic [31:0] prog [$];
  int          pc;
  int          first_cycle, last_cycle, cyc;
  always_ff @(posedge clk) cyc <= cyc + 1;

  task automatic run_prog(int grant_pct);
    pc = 0;
    first_cycle = -1;
    while (pc < prog.size()) begin
      @(negedge clk);
      gnt_allow   = ($urandom % 100) < grant_pct;
      instr_valid = 1;
      instr       = prog[pc];
      @(posedge clk);
      if (instr_ready) begin
        if (first_cycle < 0) first_cycle = cyc;
        last_cycle = cyc;
        model_exec(prog[pc]);
        pc++;
      end
    end
    @(negedge clk);
    instr_valid = 0;
    gnt_allow = 1;
    while (busy) @(negedge clk);
    repeat (2) @(negedge clk);
  endtask

  task automatic compare_rf(string tag);
    for (int i = 0; i < 32; i++) begin
      dbg_addr = 5'(i);
      #1;
      checks++;
      if (dbg_data !== m_rf[i]) begin
        failures++;
        if (failures < 10) $display("FAIL %s x%0d = %h, expected %h", tag, i, dbg_data, m_rf[i]);
      end
    end
  endtask

  // register names for the MatMul kernel
  localparam logic [4:0] S1 = 5'd10, AW1 = 5'd20, AW2 = 5'd21, AW3 = 5'd22, AW4 = 5'd23,
                         AX1 = 5'd24, AX2 = 5'd25,
                         AX3 = 5'd26, AX4 = 5'd27;

  initial begin
    int iters, base_dotp, base_load, base_sgnt, base_snn;
    instr_valid = 0; instr = 0; gnt_allow = 1; dbg_addr = 0; cyc = 0;
    m_dotp = 0; m_load = 0; m_cu = 0;
    for (int i = 0; i < 32; i++) m_rf[i] = 0;
    for (int i = 0; i < 4; i++) m_w[i] = 0;
    for (int i = 0; i < 2; i++) m_a[i] = 0;
    for (int i = 0; i < MW; i++) mem[i] = $urandom;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- 1. MatMul 4x2 kernel with nn_sdotp
    // Address setup. Registers reset to zero, so rs1 = x0 addresses word 0,
    // which holds the constant 1. It is loaded into W0 and A0 (x0 is never
    // written), a dot product gives x3 = 1, and shifts and adds build the
    // base addresses: four filters at bytes 4, 256, 512, 768 and the two
    // im2col buffers at 1024 and 1280.
    iters = 0;
    mem[0] = 32'h0000_0001;
    prog.push_back(enc_nn(DOT_UP, VEC_H, 5'd0, 5'd0, 5'b10000)); // W0 <- mem[0]=1 (x0 stays 0)
    prog.push_back(enc_nn(DOT_UP, VEC_H, 5'd0, 5'd0, 5'b01000)); // A0 <- 1
    prog.push_back(enc_nn(DOT_UP, VEC_H, 5'd3, 5'd0, 5'b00000)); // x3 = 1
    prog.push_back(enc_vec(ALU_ADD, 1'b0, VEC_H, 5'd4, 5'd3, 5'd3));   // x4 = 2
    prog.push_back(enc_vec(ALU_SLL, 1'b0, VEC_H, AW1, 5'd3, 5'd0));    // aw1 = 1<<0 = 1
    prog.push_back(enc_vec(ALU_SLL, 1'b0, VEC_H, AW1, AW1, 5'd4));     // aw1 = 1<<2 = 4
    prog.push_back(enc_vec(ALU_SLL, 1'b0, VEC_H, AW2, AW1, 5'd4));     // 16
    prog.push_back(enc_vec(ALU_SLL, 1'b0, VEC_H, AW2, AW2, 5'd4));     // 64
    prog.push_back(enc_vec(ALU_SLL, 1'b0, VEC_H, AW2, AW2, 5'd4));     // 256
    prog.push_back(enc_vec(ALU_ADD, 1'b0, VEC_H, AW3, AW2, AW2));      // 512
    prog.push_back(enc_vec(ALU_ADD, 1'b0, VEC_H, AW4, AW3, AW2));      // 768
    prog.push_back(enc_vec(ALU_ADD, 1'b0, VEC_H, AX1, AW3, AW3));      // 1024
    prog.push_back(enc_vec(ALU_ADD, 1'b0, VEC_H, AX2, AX1, AW2));      // 1280
    // clear accumulators s1..s8 (x10..x17) = x0 + x0
    for (int s = 0; s < 8; s++) prog.push_back(enc_vec(ALU_ADD, 1'b0, VEC_B, 5'(10+s), 5'd0, 5'd0));
    // INIT NN-RF (Fig. 9 immediates 16, 18, 20, 22, 8)
    prog.push_back(enc_nn(DOT_USP, VEC_H, 5'd0, AW1, 5'd16));
    prog.push_back(enc_nn(DOT_USP, VEC_H, 5'd0, AW2, 5'd18));
    prog.push_back(enc_nn(DOT_USP, VEC_H, 5'd0, AW3, 5'd20));
    prog.push_back(enc_nn(DOT_USP, VEC_H, 5'd0, AW4, 5'd22));
    prog.push_back(enc_nn(DOT_USP, VEC_H, 5'd0, AX1, 5'd8));
    run_prog(100);
    base_dotp = c_dotp; base_load = c_load; base_sgnt = c_sgnt; base_snn = c_snn;
    // loop body, 16 iterations (hardware loop unrolled by the fetch side)
    prog.delete();
    for (int it = 0; it < 16; it++) begin
      prog.push_back(enc_nn(DOT_UP,  VEC_H, 5'd0,     AX2, 5'd9));
      prog.push_back(enc_nn(DOT_USP, VEC_B, 5'd10,    AW2, 5'd0));
      prog.push_back(enc_nn(DOT_USP, VEC_B, 5'd11,    AW4, 5'd2));
      prog.push_back(enc_nn(DOT_USP, VEC_B, 5'd12,    AW3, 5'd4));
      prog.push_back(enc_nn(DOT_USP, VEC_B, 5'd13,    AX1, 5'd14));
      prog.push_back(enc_nn(DOT_USP, VEC_B, 5'd14,    AW2, 5'd17));
      prog.push_back(enc_nn(DOT_USP, VEC_B, 5'd15,    AW4, 5'd19));
      prog.push_back(enc_nn(DOT_USP, VEC_B, 5'd16,    AW3, 5'd21));
      prog.push_back(enc_nn(DOT_USP, VEC_B, 5'd17,    AW1, 5'd23));
    end
    run_prog(100);
    compare_rf("matmul");
    // 144 instructions, one per cycle, no stalls
    checks++;
    if (last_cycle - first_cycle != 143) begin
      failures++; $display("FAIL matmul took %0d cycles for 144 instructions", last_cycle - first_cycle + 1);
    end
    checks++;
    if (c_dotp - base_dotp != 144 || c_load - base_load != 6*16) begin
      failures++; $display("FAIL counts dotp=%0d load=%0d", c_dotp - base_dotp, c_load - base_load);
    end
    checks++;
    if (c_sgnt != base_sgnt || c_snn != base_snn) begin
      failures++; $display("FAIL matmul stalled gnt=%0d nn=%0d", c_sgnt - base_sgnt, c_snn - base_snn);
    end
    $display("matmul 4x2: 128 SIMD MACs + 16 loads in %0d cycles", last_cycle - first_cycle + 1);

    // ---- 1b. MatMul 4x4 kernel of Fig. 10: four im2col buffers, the two
    // NN-RF activation registers reloaded in turn, 16 accumulators x2..x17.
    // x3 = 1 and x4 = 2 are still set; the address registers are rebuilt
    // first (filters at 4, 256, 512, 768; buffers at 1024..1792).
    prog.delete();
    prog.push_back(enc_vec(ALU_SLL, 1'b0, VEC_H, AW1, 5'd3, 5'd4));     // 4
    prog.push_back(enc_vec(ALU_SLL, 1'b0, VEC_H, AW2, AW1, 5'd4));     // 16
    prog.push_back(enc_vec(ALU_SLL, 1'b0, VEC_H, AW2, AW2, 5'd4));     // 64
    prog.push_back(enc_vec(ALU_SLL, 1'b0, VEC_H, AW2, AW2, 5'd4));     // 256
    prog.push_back(enc_vec(ALU_ADD, 1'b0, VEC_H, AW3, AW2, AW2));      // 512
    prog.push_back(enc_vec(ALU_ADD, 1'b0, VEC_H, AW4, AW3, AW2));      // 768
    prog.push_back(enc_vec(ALU_ADD, 1'b0, VEC_H, AX1, AW3, AW3));      // 1024
    prog.push_back(enc_vec(ALU_ADD, 1'b0, VEC_H, AX2, AX1, AW2));      // 1280
    prog.push_back(enc_vec(ALU_ADD, 1'b0, VEC_H, AX3, AX2, AW2));      // 1536
    prog.push_back(enc_vec(ALU_ADD, 1'b0, VEC_H, AX4, AX3, AW2));      // 1792
    for (int s = 0; s < 16; s++) prog.push_back(enc_vec(ALU_ADD, 1'b0, VEC_B, 5'(2+s), 5'd0, 5'd0));
    prog.push_back(enc_nn(DOT_USP, VEC_H, 5'd0, AW1, 5'd16));
    prog.push_back(enc_nn(DOT_USP, VEC_H, 5'd0, AW2, 5'd18));
    prog.push_back(enc_nn(DOT_USP, VEC_H, 5'd0, AW3, 5'd20));
    prog.push_back(enc_nn(DOT_USP, VEC_H, 5'd0, AW4, 5'd22));
    prog.push_back(enc_nn(DOT_USP, VEC_H, 5'd0, AX1, 5'd8));
    run_prog(100);
    base_dotp = c_dotp; base_load = c_load; base_sgnt = c_sgnt; base_snn = c_snn;
    prog.delete();
    for (int it = 0; it < 16; it++) begin
      prog.push_back(enc_nn(DOT_UP,  VEC_H, 5'd0,  AX2, 5'd9));
      prog.push_back(enc_nn(DOT_USP, VEC_B, 5'd2,  AW1, 5'd0));
      prog.push_back(enc_nn(DOT_USP, VEC_B, 5'd3,  AW2, 5'd2));
      prog.push_back(enc_nn(DOT_USP, VEC_B, 5'd4,  AW3, 5'd4));
      prog.push_back(enc_nn(DOT_USP, VEC_B, 5'd5,  AX3, 5'd14));
      prog.push_back(enc_nn(DOT_USP, VEC_B, 5'd6,  AW1, 5'd1));
      prog.push_back(enc_nn(DOT_USP, VEC_B, 5'd7,  AW2, 5'd3));
      prog.push_back(enc_nn(DOT_USP, VEC_B, 5'd8,  AW3, 5'd5));
      prog.push_back(enc_nn(DOT_USP, VEC_B, 5'd9,  AX4, 5'd15));
      prog.push_back(enc_nn(DOT_USP, VEC_B, 5'd10, AW1, 5'd0));
      prog.push_back(enc_nn(DOT_USP, VEC_B, 5'd11, AW2, 5'd2));
      prog.push_back(enc_nn(DOT_USP, VEC_B, 5'd12, AW3, 5'd4));
      prog.push_back(enc_nn(DOT_USP, VEC_B, 5'd13, AX1, 5'd14));
      prog.push_back(enc_nn(DOT_USP, VEC_B, 5'd14, AW1, 5'd17));
      prog.push_back(enc_nn(DOT_USP, VEC_B, 5'd15, AW2, 5'd19));
      prog.push_back(enc_nn(DOT_USP, VEC_B, 5'd16, AW3, 5'd21));
      prog.push_back(enc_nn(DOT_USP, VEC_B, 5'd17, AW4, 5'd23));
    end
    run_prog(100);
    compare_rf("matmul4x4");
    checks++;
    if (last_cycle - first_cycle != 271) begin
      failures++; $display("FAIL matmul 4x4 took %0d cycles for 272 instructions", last_cycle - first_cycle + 1);
    end
    checks++;
    if (c_dotp - base_dotp != 272 || c_load - base_load != 8*16 || c_sgnt != base_sgnt || c_snn != base_snn) begin
      failures++; $display("FAIL 4x4 counts dotp=%0d load=%0d", c_dotp - base_dotp, c_load - base_load);
    end
    $display("matmul 4x4: 256 SIMD MACs + 16 loads in %0d cycles", last_cycle - first_cycle + 1);

    // ---- 2. random programs under random grant delay
    for (int round = 0; round < 6; round++) begin
      prog.delete();
      // any register value is a valid address: the memory decodes addr[11:2]
      for (int k = 0; k < 400; k++) begin
        int kind;
        kind = $urandom % 10;
        if (kind < 4) begin
          prog.push_back(enc_vec(alu_op_e'($urandom % 18), 1'($urandom), vec_mode_e'($urandom % 4),
                                 5'($urandom), 5'($urandom), 5'($urandom)));
        end else if (kind == 8) begin
          prog.push_back(enc_cu(dot_sign_e'($urandom % 3), vec_mode_e'($urandom % 4), 2'($urandom),
                                5'($urandom % 8), 5'(24 + $urandom % 8), 5'($urandom)));
        end else if (kind < 8) begin
          logic [4:0] imm;
          imm = 5'($urandom);
          if (imm[4] && imm[3]) imm[3] = 1'b0;
          prog.push_back(enc_nn(dot_sign_e'($urandom % 3), vec_mode_e'($urandom % 4),
                                5'($urandom % 8), 5'(24 + $urandom % 8), imm));
        end else begin
          prog.push_back($urandom); // mostly illegal words
        end
      end
      run_prog(round < 2 ? 100 : 40);
      compare_rf($sformatf("random%0d", round));
    end
    checks++;
    if (c_dotp != m_dotp || c_load != m_load) begin
      failures++; $display("FAIL totals dotp %0d/%0d load %0d/%0d", c_dotp, m_dotp, c_load, m_load);
    end
    checks++;
    if (m_cu == 0) begin failures++; $display("FAIL no C&U instruction executed"); end
    checks++;
    if (c_sgnt == 0) begin failures++; $display("FAIL no grant stall happened"); end
    checks++;
    if (c_snn == 0) begin failures++; $display("FAIL no NN-RF hazard stall happened"); end
    $display("stalls: grant %0d cycles, NN-RF hazard %0d cycles, illegal %0d", c_sgnt, c_snn, c_ill);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
