// tcdm_bank: one bank of the cluster's L1 tightly coupled data memory.
//
// A single-port, word-wide memory: in a cycle with req_i high it reads or
// (we_i) writes the word at addr_i, writing only the bytes enabled in be_i.
// Read data appears on rdata_o in the next cycle and stays until the next
// read. With the default 2048 words a bank holds 8 kB; sixteen of them make
// the 128 kB TCDM. The contents are not reset. In silicon this is an SRAM
// macro; here it is written as an array so that it simulates and synthesises
// as a memory.
module tcdm_bank #(
  parameter int unsigned WORDS = 2048,
  parameter int unsigned DW    = 32
) (
  input  logic                     clk_i,
  input  logic                     req_i,
  input  logic                     we_i,
  input  logic [DW/8-1:0]          be_i,
  input  logic [$clog2(WORDS)-1:0] addr_i,
  input  logic [DW-1:0]            wdata_i,
  output logic [DW-1:0]            rdata_o
);

  logic [DW-1:0] mem [WORDS];

  always_ff @(posedge clk_i) begin
    if (req_i) begin
      if (we_i) begin
        for (int b = 0; b < DW/8; b++)
          if (be_i[b]) mem[addr_i][8*b +: 8] <= wdata_i[8*b +: 8];
      end else begin
        rdata_o <= mem[addr_i];
      end
    end
  end

endmodule
