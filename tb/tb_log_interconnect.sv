// tb_log_interconnect: self-checking testbench of log_interconnect with
// reference-sized banks attached (9 masters, 16 banks of 2048 words).
//
// Each master runs random reads and writes over a small address window so
// that masters often meet on the same bank. A master keeps its request until
// it is granted. Checked here: a bank grants at most one master per cycle;
// every granted access gets rvalid exactly one cycle later; read data equals
// a reference memory kept in the testbench; no master waits longer than
// N_MASTERS-1 cycles for a grant (round robin); requests to distinct banks in
// one cycle are all granted. Conflict cycles are counted and must occur.
module tb_log_interconnect;
  import xpulpnn_pkg::*;
  localparam int NM = 9, NB = 16, BW = 2048;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  tcdm_req_t   req  [NM];
  logic        gnt  [NM];
  tcdm_rsp_t   rsp  [NM];
  logic        b_req [NB];
  logic        b_we  [NB];
  logic [3:0]  b_be  [NB];
  logic [10:0] b_addr [NB];
  logic [31:0] b_wdata [NB];
  logic [31:0] b_rdata [NB];

  log_interconnect #(.N_MASTERS(NM), .N_BANKS(NB), .BANK_WORDS(BW)) dut (
    .clk_i(clk), .rst_ni(rst_n), .req_i(req), .gnt_o(gnt), .rsp_o(rsp),
    .bank_req_o(b_req), .bank_we_o(b_we), .bank_be_o(b_be), .bank_addr_o(b_addr),
    .bank_wdata_o(b_wdata), .bank_rdata_i(b_rdata));

  for (genvar b = 0; b < NB; b++) begin : g_b
    tcdm_bank #(.WORDS(BW), .DW(32)) i_bank (
      .clk_i(clk), .req_i(b_req[b]), .we_i(b_we[b]), .be_i(b_be[b]), .addr_i(b_addr[b]),
      .wdata_i(b_wdata[b]), .rdata_o(b_rdata[b]));
  end

  logic [31:0] refm [256];       // window of 256 words at byte address 0
  logic        exp_v  [NM];
  logic        exp_rd [NM];
  logic [31:0] exp_d  [NM];
  int          wait_c [NM];
  int checks = 0, failures = 0, conflicts = 0, max_wait = 0;

  task automatic fail(string s);
    failures++;
    if (failures < 10) $display("FAIL %s", s);
  endtask

  initial begin
    for (int m = 0; m < NM; m++) begin req[m] = '0; exp_v[m] = 0; wait_c[m] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    // initialise the window through master 8 (no contention)
    for (int i = 0; i < 256; i++) begin
      @(negedge clk);
      req[8] = '{req: 1'b1, we: 1'b1, be: 4'hF, addr: 32'(i*4), wdata: 32'(i * 32'h01010101)};
      refm[i] = i * 32'h01010101;
    end
    @(negedge clk);
    req[8] = '0;
    @(negedge clk);
    for (int k = 0; k < 20000; k++) begin
      // negedge: responses of the previous cycle's grants are visible
      for (int m = 0; m < NM; m++) begin
        checks++;
        if (rsp[m].rvalid !== exp_v[m]) fail($sformatf("rvalid m=%0d", m));
        if (exp_v[m] && exp_rd[m]) begin
          checks++;
          if (rsp[m].rdata !== exp_d[m]) fail($sformatf("rdata m=%0d got %h exp %h", m, rsp[m].rdata, exp_d[m]));
        end
      end
      // new requests for masters that are idle
      for (int m = 0; m < NM; m++) begin
        if (!req[m].req && ($urandom % 3 != 0)) begin
          req[m].req   = 1'b1;
          req[m].we    = ($urandom % 4) == 0;
          req[m].be    = 4'hF;
          req[m].addr  = 32'(($urandom % ((k < 10000) ? 32 : 256)) * 4);
          req[m].wdata = $urandom;
        end
      end
      #1;
      // grant checks
      begin
        int per_bank [NB];
        int reqs_bank [NB];
        for (int b = 0; b < NB; b++) begin per_bank[b] = 0; reqs_bank[b] = 0; end
        for (int m = 0; m < NM; m++) begin
          if (req[m].req) reqs_bank[req[m].addr[5:2]]++;
          if (gnt[m]) begin
            if (!req[m].req) fail("grant without request");
            per_bank[req[m].addr[5:2]]++;
          end
        end
        for (int b = 0; b < NB; b++) begin
          checks++;
          if (per_bank[b] != ((reqs_bank[b] > 0) ? 1 : 0)) fail($sformatf("bank %0d grants %0d of %0d", b, per_bank[b], reqs_bank[b]));
          if (reqs_bank[b] > 1) conflicts++;
        end
      end
      // expected responses, reference memory update
      for (int m = 0; m < NM; m++) begin
        exp_v[m] = gnt[m];
        exp_rd[m] = gnt[m] && !req[m].we;
        if (gnt[m] && !req[m].we) exp_d[m] = refm[req[m].addr[9:2]];
      end
      for (int m = 0; m < NM; m++) begin
        if (gnt[m] && req[m].we) refm[req[m].addr[9:2]] = req[m].wdata;
        if (req[m].req && !gnt[m]) begin
          wait_c[m]++;
          if (wait_c[m] > max_wait) max_wait = wait_c[m];
        end else wait_c[m] = 0;
      end
      @(negedge clk);
      for (int m = 0; m < NM; m++) if (exp_v[m]) req[m].req = 1'b0;
    end
    checks++;
    if (max_wait > NM - 1) fail($sformatf("starvation: waited %0d cycles", max_wait));
    checks++;
    if (conflicts == 0) fail("no bank conflict happened");
    $display("bank conflict cycles: %0d, longest wait: %0d", conflicts, max_wait);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
