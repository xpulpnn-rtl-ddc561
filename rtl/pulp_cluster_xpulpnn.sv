// pulp_cluster_xpulpnn: a PULP compute cluster of XpulpNN-extended cores.
//
// N_CORES core slices (xpulpnn_core_ext) share an L1 tightly coupled data
// memory (TCDM) of N_BANKS word-interleaved banks of BANK_WORDS words each,
// reached through a single-cycle logarithmic interconnect. The defaults are
// the reference configuration: 8 cores, 16 banks (banking factor 2), 128 kB.
// The interconnect has one master port per core plus one for the DMA, which
// moves data between the TCDM and the second-level memory of the host.
//
// The parts of the cluster that are not built here appear as ports:
//   instr_*  the instruction stream of each core, which in the full cluster
//            comes from the core's prefetch buffer and hardware loops fed by
//            the hierarchical instruction cache;
//   dma_*    the DMA's master port onto the TCDM (also usable by a host or a
//            testbench to fill and read the memory);
//   dbg_*    a read/write port into each core's register file (the debug
//            unit's view), used to set up address registers and read
//            accumulators;
//   cnt_*    per-core event counters (dot products, Mac&Load loads, stall
//            cycles on TCDM contention and on NN-RF hazards).
// busy_o shows which cores still have work in flight.
//
// Timing: all requests are granted in the cycle they are made unless two
// masters meet on one bank; responses come one cycle after the grant.
module pulp_cluster_xpulpnn
  import xpulpnn_pkg::*;
#(
  parameter int unsigned N_CORES    = 8,
  parameter int unsigned N_BANKS    = 16,
  parameter int unsigned BANK_WORDS = 2048
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  // per-core instruction streams
  input  logic        instr_valid_i [N_CORES],
  input  logic [31:0] instr_i       [N_CORES],
  output logic        instr_ready_o [N_CORES],
  // DMA master port on the TCDM
  input  tcdm_req_t   dma_req_i,
  output logic        dma_gnt_o,
  output tcdm_rsp_t   dma_rsp_o,
  // debug register access
  input  logic [4:0]  dbg_raddr_i [N_CORES],
  output logic [31:0] dbg_rdata_o [N_CORES],
  input  logic        dbg_we_i    [N_CORES],
  input  logic [31:0] dbg_wdata_i [N_CORES],
  // event counters
  output logic [31:0] cnt_instr_o      [N_CORES],
  output logic [31:0] cnt_dotp_o       [N_CORES],
  output logic [31:0] cnt_nnload_o     [N_CORES],
  output logic [31:0] cnt_stall_gnt_o  [N_CORES],
  output logic [31:0] cnt_stall_nnrf_o [N_CORES],
  output logic [31:0] cnt_illegal_o    [N_CORES],
  output logic        busy_o           [N_CORES]
);

  localparam int unsigned N_M = N_CORES + 1;
  localparam int unsigned WB  = $clog2(BANK_WORDS);

  tcdm_req_t m_req [N_M];
  logic      m_gnt [N_M];
  tcdm_rsp_t m_rsp [N_M];

  logic          b_req   [N_BANKS];
  logic          b_we    [N_BANKS];
  logic [3:0]    b_be    [N_BANKS];
  logic [WB-1:0] b_addr  [N_BANKS];
  logic [31:0]   b_wdata [N_BANKS];
  logic [31:0]   b_rdata [N_BANKS];

  for (genvar c = 0; c < N_CORES; c++) begin : g_core
    xpulpnn_core_ext i_core (
      .clk_i            (clk_i),
      .rst_ni           (rst_ni),
      .instr_valid_i    (instr_valid_i[c]),
      .instr_i          (instr_i[c]),
      .instr_ready_o    (instr_ready_o[c]),
      .data_req_o       (m_req[c]),
      .data_gnt_i       (m_gnt[c]),
      .data_rsp_i       (m_rsp[c]),
      .dbg_raddr_i      (dbg_raddr_i[c]),
      .dbg_rdata_o      (dbg_rdata_o[c]),
      .dbg_we_i         (dbg_we_i[c]),
      .dbg_wdata_i      (dbg_wdata_i[c]),
      .cnt_instr_o      (cnt_instr_o[c]),
      .cnt_dotp_o       (cnt_dotp_o[c]),
      .cnt_nnload_o     (cnt_nnload_o[c]),
      .cnt_stall_gnt_o  (cnt_stall_gnt_o[c]),
      .cnt_stall_nnrf_o (cnt_stall_nnrf_o[c]),
      .cnt_illegal_o    (cnt_illegal_o[c]),
      .busy_o           (busy_o[c])
    );
  end

  assign m_req[N_CORES] = dma_req_i;
  assign dma_gnt_o      = m_gnt[N_CORES];
  assign dma_rsp_o      = m_rsp[N_CORES];

  log_interconnect #(
    .N_MASTERS  (N_M),
    .N_BANKS    (N_BANKS),
    .BANK_WORDS (BANK_WORDS)
  ) i_xbar (
    .clk_i        (clk_i),
    .rst_ni       (rst_ni),
    .req_i        (m_req),
    .gnt_o        (m_gnt),
    .rsp_o        (m_rsp),
    .bank_req_o   (b_req),
    .bank_we_o    (b_we),
    .bank_be_o    (b_be),
    .bank_addr_o  (b_addr),
    .bank_wdata_o (b_wdata),
    .bank_rdata_i (b_rdata)
  );

  for (genvar b = 0; b < N_BANKS; b++) begin : g_bank
    tcdm_bank #(.WORDS(BANK_WORDS), .DW(32)) i_bank (
      .clk_i   (clk_i),
      .req_i   (b_req[b]),
      .we_i    (b_we[b]),
      .be_i    (b_be[b]),
      .addr_i  (b_addr[b]),
      .wdata_i (b_wdata[b]),
      .rdata_o (b_rdata[b])
    );
  end

endmodule
