// xpulpnn_simd_alu: lane-parallel SIMD ALU for packed 16, 8, 4 and 2-bit
// vectors.
//
// Operations, per lane i (a = rs1, b = rs2 or the replicated scalar):
//   add/sub   a[i] +/- b[i], wrapping in the lane
//   avg/avgu  (a[i] + b[i]) >> 1, sum formed on W+1 bits, signed/unsigned
//   max(u)    larger of a[i], b[i]; min(u) smaller; signed or unsigned
//   srl/sra   a[i] >> b[i] logical / arithmetic; sll a[i] << b[i]
//   abs       a[i] < 0 ? -a[i] : a[i]
// The nibble and crumb versions are the XpulpNN additions; the halfword and
// byte versions are produced by the same lane code. The dot-product
// operations are not handled here (see xpulpnn_dotp_unit); for them res_o
// is zero.
//
// Purely combinational. Result selection is written as AND-OR trees of
// masked results rather than multiplexers. The lane semantics follow the XpulpNN instruction
// table; the avg precision and the shift-amount width (the low log2(W) bits of
// each lane of b) are this design's own choices.
module xpulpnn_simd_alu
  import xpulpnn_pkg::*;
(
  input  alu_op_e     op_i,
  input  vec_mode_e   mode_i,
  input  logic [31:0] a_i,
  input  logic [31:0] b_i,
  output logic [31:0] res_o
);

  logic [31:0] width_res [4];

  for (genvar r = 0; r < 4; r++) begin : g_width
    localparam int W  = (r == 0) ? 16 : (r == 1) ? 8 : (r == 2) ? 4 : 2;
    localparam int N  = 32 / W;
    localparam int SW = $clog2(W);

    always_comb begin
      logic        [W-1:0] a, b, y, sr, sl;
      logic signed [W:0]   sa, sb, ssum;
      logic        [W:0]   usum;
      logic        [SW-1:0] sh;
      width_res[r] = '0;
      for (int i = 0; i < N; i++) begin
        a    = a_i[W*i +: W];
        b    = b_i[W*i +: W];
        sa   = {a[W-1], a};
        sb   = {b[W-1], b};
        ssum = sa + sb;
        usum = {1'b0, a} + {1'b0, b};
        sh   = b[SW-1:0];
        // logarithmic shifter, one stage per bit of the amount; the right
        // shift fills with the sign bit for sra and with zeros for srl
        sr   = a;
        sl   = a;
        for (int k = 0; k < SW; k++) begin
          if (sh[k]) begin
            sr = (sr >> (1 << k)) | ({W{(op_i == ALU_SRA) & a[W-1]}} << (W - (1 << k)));
            sl = sl << (1 << k);
          end
        end
        // each result is computed and masked by its operation select, so
        // the result multiplexer is an AND-OR tree
        y = ({W{op_i == ALU_ADD}}  & W'(a + b))
          | ({W{op_i == ALU_SUB}}  & W'(a - b))
          | ({W{op_i == ALU_AVG}}  & ssum[W:1])
          | ({W{op_i == ALU_AVGU}} & usum[W:1])
          | ({W{op_i == ALU_MAX}}  & (($signed(a) > $signed(b)) ? a : b))
          | ({W{op_i == ALU_MAXU}} & ((a > b) ? a : b))
          | ({W{op_i == ALU_MIN}}  & (($signed(a) < $signed(b)) ? a : b))
          | ({W{op_i == ALU_MINU}} & ((a < b) ? a : b))
          | ({W{op_i == ALU_SRL}}  & sr)
          | ({W{op_i == ALU_SRA}}  & sr)
          | ({W{op_i == ALU_SLL}}  & sl)
          | ({W{op_i == ALU_ABS}}  & (a[W-1] ? W'(~a + 1'b1) : a));
        width_res[r][W*i +: W] = y;
      end
    end
  end

  always_comb begin
    res_o = '0;
    for (int r = 0; r < 4; r++) res_o |= {32{mode_i == vec_mode_e'(r)}} & width_res[r];
  end

endmodule
