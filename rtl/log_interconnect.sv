// log_interconnect: the single-cycle interconnect between the cluster's
// masters (the cores' load-store units and the DMA port) and the TCDM banks.
//
// Banks are word-interleaved: byte address bits [BB+1:2] (BB = log2 N_BANKS)
// pick the bank and the bits above pick the word inside it, so consecutive
// words lie in consecutive banks. Each bank has its own round-robin arbiter:
// among the masters that address it in a cycle, the first at or after the
// bank's priority pointer wins, and the pointer moves just past the winner.
// The grant is given in the request cycle (combinational); a master that is
// not granted keeps its request and retries. Every granted access, read or
// write, is answered one cycle later with rvalid and, for reads, the bank's
// data. Masters addressing different banks never delay each other; only
// masters meeting on the same bank do.
//
// The one-cycle service and the banking come from the cluster description;
// the logarithmic tree of the original interconnect is implemented here as an
// equivalent flat crossbar with per-bank arbiters, and the address map and
// arbitration policy are this design's own choices.
module log_interconnect
  import xpulpnn_pkg::*;
#(
  parameter int unsigned N_MASTERS  = 9,
  parameter int unsigned N_BANKS    = 16,
  parameter int unsigned BANK_WORDS = 2048
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  // master side
  input  tcdm_req_t   req_i  [N_MASTERS],
  output logic        gnt_o  [N_MASTERS],
  output tcdm_rsp_t   rsp_o  [N_MASTERS],
  // bank side
  output logic                          bank_req_o   [N_BANKS],
  output logic                          bank_we_o    [N_BANKS],
  output logic [3:0]                    bank_be_o    [N_BANKS],
  output logic [$clog2(BANK_WORDS)-1:0] bank_addr_o  [N_BANKS],
  output logic [31:0]                   bank_wdata_o [N_BANKS],
  input  logic [31:0]                   bank_rdata_i [N_BANKS]
);

  localparam int unsigned BB = $clog2(N_BANKS);
  localparam int unsigned WB = $clog2(BANK_WORDS);
  localparam int unsigned MB = (N_MASTERS > 1) ? $clog2(N_MASTERS) : 1;

  logic [BB-1:0] m_bank [N_MASTERS];
  logic [MB-1:0] rr_q   [N_BANKS];
  logic [MB-1:0] win    [N_BANKS];
  logic          any    [N_BANKS];

  for (genvar m = 0; m < N_MASTERS; m++) begin : g_dec
    assign m_bank[m] = req_i[m].addr[2 +: BB];
  end

  // Per-bank round-robin arbitration
  always_comb begin
    for (int b = 0; b < N_BANKS; b++) begin
      any[b] = 1'b0;
      win[b] = '0;
      for (int k = 0; k < N_MASTERS; k++) begin
        int unsigned m;
        m = (int'(rr_q[b]) + k) % N_MASTERS;
        if (!any[b] && req_i[m].req && m_bank[m] == BB'(b)) begin
          any[b] = 1'b1;
          win[b] = MB'(m);
        end
      end
    end
  end

  always_comb begin
    for (int m = 0; m < N_MASTERS; m++) gnt_o[m] = 1'b0;
    for (int b = 0; b < N_BANKS; b++) begin
      bank_req_o[b]   = any[b];
      bank_we_o[b]    = req_i[win[b]].we;
      bank_be_o[b]    = req_i[win[b]].be;
      bank_addr_o[b]  = req_i[win[b]].addr[2+BB +: WB];
      bank_wdata_o[b] = req_i[win[b]].wdata;
      if (any[b]) gnt_o[win[b]] = 1'b1;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int b = 0; b < N_BANKS; b++) rr_q[b] <= '0;
    end else begin
      for (int b = 0; b < N_BANKS; b++)
        if (any[b]) rr_q[b] <= (int'(win[b]) == N_MASTERS - 1) ? '0 : win[b] + 1'b1;
    end
  end

  // Response path: one cycle after the grant
  logic          rvalid_q [N_MASTERS];
  logic [BB-1:0] rbank_q  [N_MASTERS];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int m = 0; m < N_MASTERS; m++) begin
        rvalid_q[m] <= 1'b0;
        rbank_q[m]  <= '0;
      end
    end else begin
      for (int m = 0; m < N_MASTERS; m++) begin
        rvalid_q[m] <= gnt_o[m];
        if (gnt_o[m]) rbank_q[m] <= m_bank[m];
      end
    end
  end

  for (genvar m = 0; m < N_MASTERS; m++) begin : g_rsp
    assign rsp_o[m].rvalid = rvalid_q[m];
    assign rsp_o[m].rdata  = bank_rdata_i[rbank_q[m]];
  end

  // A grant only answers a request.
  for (genvar m = 0; m < N_MASTERS; m++) begin : g_chk
    a_gnt_needs_req: assert property (@(posedge clk_i) disable iff (!rst_ni)
      gnt_o[m] |-> req_i[m].req);
  end

endmodule
