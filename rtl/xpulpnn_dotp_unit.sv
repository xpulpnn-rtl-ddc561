// xpulpnn_dotp_unit: integer SIMD dot-product unit of the XpulpNN core.
//
// Four separate multiplier regions, one per vector width, so that no
// multiplier or adder tree is shared across widths:
//   h:  2 multipliers of 17x17 bit, products kept on 32 bit
//   b:  4 multipliers of  9x9  bit, products kept on 16 bit
//   n:  8 multipliers of  5x5  bit, products kept on  8 bit
//   c: 16 multipliers of  3x3  bit, products kept on  4 bit
// Each element gets one extra bit that sign- or zero-extends it, as selected
// by the signedness mode (up, usp, sp). Every region has its own 2x32-bit
// operand register, loaded only when an operation of that width is issued
// (en_h, en_b, en_n, en_c); in silicon these enables drive clock-gating cells,
// so regions not in use do not toggle. Each region's adder tree sums its
// products, extended to 32 bit, plus the 32-bit OpC (the accumulator for
// sdotp, zero for dotp). An output mux picks the region of the current width.
//
// Timing: operands, width and signedness are captured at the clock edge that
// ends the issue (ID) cycle, issue_i high. In the following (EX) cycle res_o is
// the combinational result of the stored operands plus op_c_i, so an operation
// has one cycle of latency and back-to-back operations need no stall.
//
// From the paper: the region structure, multiplier and product widths, the
// gated operand registers and the single-cycle adder trees. Own choices: the
// OpC/accumulate interface taken in the EX cycle, and mode/sign registers.
module xpulpnn_dotp_unit
  import xpulpnn_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  // ID cycle
  input  logic        issue_i,
  input  vec_mode_e   mode_i,
  input  dot_sign_e   sign_i,
  input  logic [31:0] op_a_i,
  input  logic [31:0] op_b_i,
  // EX cycle
  input  logic [31:0] op_c_i,
  input  logic        accumulate_i,
  output logic [31:0] res_o
);

  logic [3:0]  en;           // en_h, en_b, en_n, en_c
  logic [31:0] a_q [4];
  logic [31:0] b_q [4];
  vec_mode_e   mode_q;
  dot_sign_e   sign_q;
  logic [31:0] region_res [4];
  logic [31:0] opc;

  always_comb begin
    en = '0;
    en[mode_i] = issue_i;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      mode_q <= VEC_H;
      sign_q <= DOT_UP;
    end else if (issue_i) begin
      mode_q <= mode_i;
      sign_q <= sign_i;
    end
  end

  for (genvar r = 0; r < 4; r++) begin : g_region_reg
    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni) begin
        a_q[r] <= '0;
        b_q[r] <= '0;
      end else if (en[r]) begin
        a_q[r] <= op_a_i;
        b_q[r] <= op_b_i;
      end
    end
  end

  assign opc = accumulate_i ? op_c_i : 32'd0;

  // One region: N = 32/W lanes of W bits, (W+1)-bit multipliers, 2W-bit
  // products, adder tree to 32 bit.
  for (genvar r = 0; r < 4; r++) begin : g_region
    localparam int W  = (r == 0) ? 16 : (r == 1) ? 8 : (r == 2) ? 4 : 2;
    localparam int N  = 32 / W;
    localparam int PW = 2 * W;

    logic a_signed, b_signed, p_signed;
    assign a_signed = (sign_q == DOT_SP);
    assign b_signed = (sign_q == DOT_SP) || (sign_q == DOT_USP);
    assign p_signed = a_signed || b_signed;

    logic signed [W:0]      ea   [N];
    logic signed [W:0]      eb   [N];
    logic signed [2*W+1:0]  full [N];
    logic        [PW-1:0]   prod [N];
    logic        [31:0]     ext  [N];

    for (genvar i = 0; i < N; i++) begin : g_mult
      assign ea[i]   = {a_signed & a_q[r][W*i+W-1], a_q[r][W*i +: W]};
      assign eb[i]   = {b_signed & b_q[r][W*i+W-1], b_q[r][W*i +: W]};
      assign full[i] = ea[i] * eb[i];
      assign prod[i] = full[i][PW-1:0];
      if (PW < 32) begin : g_ext
        assign ext[i] = {{(32-PW){p_signed & prod[i][PW-1]}}, prod[i]};
      end else begin : g_noext
        assign ext[i] = prod[i];
      end
    end

    always_comb begin
      logic [31:0] acc;
      acc = opc;
      for (int i = 0; i < N; i++) acc = acc + ext[i];
      region_res[r] = acc;
    end
  end

  // Output data selection
  always_comb begin
    res_o = '0;
    for (int r = 0; r < 4; r++) res_o |= {32{mode_q == vec_mode_e'(r)}} & region_res[r];
  end

endmodule
