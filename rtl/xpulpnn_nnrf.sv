// xpulpnn_nnrf: the Neural-Network Register File (NN-RF) that the nn_sdotp
// Mac&Load instruction uses.
//
// Six 32-bit registers in two banks: four weight registers W0..W3 and two
// activation registers A0..A1. Two read ports feed the dot-product unit: the
// weight port (rPort1, to OpA) and the activation port (rPort2, to OpB), both
// addressed by the immediate of the instruction (bits 2..1 and bit 0). One
// write port takes the word returned by the load-store unit; wsel_act_i picks
// the bank and waddr_i the register. A register is written only when it is
// addressed, so in silicon each one sits behind its own clock gate.
//
// Timing: reads are combinational. A write takes effect at the clock edge;
// a read of the register being written in the same cycle returns the new
// word (write-through), so a load that returns just in time causes no stall.
// Registers reset to zero.
//
// From the paper: the number of registers (4 weights, 2 activations), one
// write port and two read ports. Own choices: reset value and write-through.
module xpulpnn_nnrf #(
  parameter int unsigned N_W = 4,
  parameter int unsigned N_A = 2
) (
  input  logic                         clk_i,
  input  logic                         rst_ni,
  input  logic [$clog2(N_W)-1:0]       w_raddr_i,
  input  logic [$clog2(N_A)-1:0]       a_raddr_i,
  output logic [31:0]                  w_rdata_o,
  output logic [31:0]                  a_rdata_o,
  input  logic                         we_i,
  input  logic                         wsel_act_i,
  input  logic [$clog2(N_W)-1:0]       waddr_i,
  input  logic [31:0]                  wdata_i
);

  logic [31:0] w_q [N_W];
  logic [31:0] a_q [N_A];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int i = 0; i < N_W; i++) w_q[i] <= '0;
      for (int i = 0; i < N_A; i++) a_q[i] <= '0;
    end else if (we_i) begin
      if (wsel_act_i) a_q[waddr_i[$clog2(N_A)-1:0]] <= wdata_i;
      else            w_q[waddr_i]                   <= wdata_i;
    end
  end

  always_comb begin
    w_rdata_o = w_q[w_raddr_i];
    a_rdata_o = a_q[a_raddr_i];
    if (we_i && !wsel_act_i && waddr_i == w_raddr_i) w_rdata_o = wdata_i;
    if (we_i &&  wsel_act_i && waddr_i[$clog2(N_A)-1:0] == a_raddr_i) a_rdata_o = wdata_i;
  end

endmodule
