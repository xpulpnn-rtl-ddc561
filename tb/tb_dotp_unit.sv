// tb_dotp_unit: self-checking testbench of xpulpnn_dotp_unit.
//
// Issues a random stream of dot-product operations, one per cycle and back
// to back, over all four widths (h, b, n, c) and all three signedness modes,
// with and without accumulation. The reference result is computed here with
// full-precision integer arithmetic lane by lane (no truncated products) and
// compared with res_o in the EX cycle right after the issue, which also
// checks the single-cycle latency. A second phase checks that issuing an
// operation of one width leaves the operand registers of the other widths
// untouched (the clock-gated regions).
module tb_dotp_unit;
  import xpulpnn_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        issue;
  vec_mode_e   mode;
  dot_sign_e   sign;
  logic [31:0] a, b, c, res;
  logic        acc;

  int checks = 0, failures = 0;

  xpulpnn_dotp_unit dut (
    .clk_i(clk), .rst_ni(rst_n), .issue_i(issue), .mode_i(mode), .sign_i(sign),
    .op_a_i(a), .op_b_i(b), .op_c_i(c), .accumulate_i(acc), .res_o(res));

  function automatic logic [31:0] ref_dot(vec_mode_e m, dot_sign_e s, logic [31:0] x,
                                          logic [31:0] y, logic [31:0] cc, logic ac);
    int w, n;
    longint sum, ex, ey;
    w = (m == VEC_H) ? 16 : (m == VEC_B) ? 8 : (m == VEC_N) ? 4 : 2;
    n = 32 / w;
    sum = ac ? longint'(cc) : 0;
    for (int i = 0; i < n; i++) begin
      ex = (x >> (w*i)) & ((64'd1 << w) - 1);
      ey = (y >> (w*i)) & ((64'd1 << w) - 1);
      if (s == DOT_SP && ex >= (64'd1 << (w-1))) ex -= (64'd1 << w);
      if ((s == DOT_SP || s == DOT_USP) && ey >= (64'd1 << (w-1))) ey -= (64'd1 << w);
      sum += ex * ey;
    end
    return sum[31:0];
  endfunction

  function automatic logic [31:0] rnd_vec(int k);
    // mix of random values and extreme lane values
    case (k % 4)
      0: return $urandom;
      1: return 32'hFFFF_FFFF;
      2: return 32'h8888_8888 ^ (($urandom % 2) ? 32'h0 : 32'h2222_2222);
      default: return $urandom & 32'h7777_7777;
    endcase
  endfunction

  logic [31:0] exp_q;
  logic        pend_q;
  logic [31:0] c_next;
  logic        acc_next;

  initial begin
    issue = 0; mode = VEC_H; sign = DOT_UP; a = 0; b = 0; c = 0; acc = 0;
    pend_q = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // phase 1: back-to-back random operations
    for (int k = 0; k < 4000; k++) begin
      @(negedge clk);
      // EX side of the previous issue
      if (pend_q) begin
        c = c_next; acc = acc_next;
        #1;
        checks++;
        if (res !== exp_q) begin
          failures++;
          if (failures < 10) $display("FAIL k=%0d res=%h exp=%h", k, res, exp_q);
        end
      end
      issue = 1;
      mode  = vec_mode_e'($urandom % 4);
      sign  = dot_sign_e'($urandom % 3);
      a     = rnd_vec($urandom);
      b     = rnd_vec($urandom);
      c_next   = $urandom;
      acc_next = $urandom % 2;
      exp_q  = ref_dot(mode, sign, a, b, c_next, acc_next);
      pend_q = 1;
    end
    @(negedge clk);
    issue = 0;
    // phase 2: region isolation. Load h region, then run n ops, then read h
    // again with a no-issue cycle: result must be from the h operands.
    @(negedge clk);
    issue = 1; mode = VEC_H; sign = DOT_SP; a = 32'h0003_FFFE; b = 32'h0005_0007;
    @(negedge clk);
    issue = 1; mode = VEC_N; a = $urandom; b = $urandom;
    @(negedge clk);
    issue = 1; mode = VEC_C; a = $urandom; b = $urandom;
    @(negedge clk);
    issue = 0; c = 32'd100; acc = 1;
    #1; // still selecting the c region
    checks++;
    if (res !== ref_dot(VEC_C, DOT_SP, a, b, 32'd100, 1)) begin failures++; $display("FAIL c region"); end
    // re-select h without new operands: issue h with same regs is impossible
    // without loading, so load h with identical operands and check that the
    // n/c ops did not disturb the value: 3*5 + (-2)*7 + 100 = 101
    @(negedge clk);
    issue = 1; mode = VEC_H; sign = DOT_SP; a = 32'h0003_FFFE; b = 32'h0005_0007;
    @(negedge clk);
    issue = 0; c = 32'd100; acc = 1;
    #1;
    checks++;
    if (res !== 32'd101) begin failures++; $display("FAIL h region %0d", res); end
    // held result with no issue: stays on the last operation
    @(negedge clk);
    #1;
    checks++;
    if (res !== 32'd101) begin failures++; $display("FAIL hold %0d", res); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
