// tb_cluster: end-to-end, full-size testbench of pulp_cluster_xpulpnn.
//
// The cluster is used at its default size (8 cores, 16 banks, 128 kB) with no
// parameter override. It runs a complete convolution layer from the paper's
// benchmark set, 16x16x32 input, 64 filters of 3x3x32, stride 1, padding 1,
// three times: with 8-bit, 4-bit and 2-bit operands.
//
// Flow of one layer:
//   * the DMA port writes all filters into the TCDM (one filter is one row of
//     288 elements, packed 4, 8 or 16 per word);
//   * the DMA port then writes im2col buffers: for every core, two output
//     pixels (one "pair") expanded into two 288-element columns. Buffers are
//     double-buffered, so the DMA writes the next round while the cores work;
//   * each core takes one pixel pair per round and walks over the 16 groups of
//     4 filters (core c starts at group 2c). For each group the debug port sets the six address
//     registers, then the core runs: eight pv.add (clear accumulators), the
//     Fig. 9 NN-RF initialisation, and one 9-instruction Mac&Load iteration
//     per packed word (nnsdotup, then eight nnsdotusp). The 8 accumulators are
//     read through the debug port and compared with a reference convolution
//     computed here. Odd groups use the initialisation in reverse order, so
//     the last loaded weight is read right away (NN-RF hazard).
//   * at the end the DMA port reads the filter area back and checks it.
//
// Mechanisms that must each happen at least once (failure otherwise): TCDM
// bank-contention stalls in the cores, DMA grant waits, NN-RF hazard stalls,
// DMA writes and reads, the illegal-instruction path (one illegal word per
// core), and dot products in 8-, 4- and 2-bit modes.
//
// Cycle accounting: for every group the testbench counts the cycles from the
// first instruction offered to the core going idle and checks that this
// equals instructions + contention stalls + hazard stalls + a fixed drain,
// i.e. the Mac&Load loop issues one instruction per cycle whenever it is not
// stalled. Cycles/MAC per precision are reported.
module tb_cluster;
  import xpulpnn_pkg::*;
  localparam int NC = 8;
  localparam int H = 16, WD = 16, CI = 32, CO = 64, K = 3 * 3 * CI;   // 288
  localparam int NPAIR = H * WD / 2;                                   // 128
  localparam int NROUND = NPAIR / NC;                                  // 16
  localparam int NGROUP = CO / 4;                                      // 16
  localparam logic [31:0] XBASE = 32'h8000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // ------------------------------------------------------------ DUT
  logic        instr_valid [NC];
  logic [31:0] instr       [NC];
  logic        instr_ready [NC];
  tcdm_req_t   dma_req;
  logic        dma_gnt;
  tcdm_rsp_t   dma_rsp;
  logic [4:0]  dbg_addr  [NC];
  logic [31:0] dbg_rdata [NC];
  logic        dbg_we    [NC];
  logic [31:0] dbg_wdata [NC];
  logic [31:0] c_instr [NC], c_dotp [NC], c_load [NC], c_sgnt [NC], c_snn [NC], c_ill [NC];
  logic        busy [NC];

  pulp_cluster_xpulpnn dut (
    .clk_i(clk), .rst_ni(rst_n),
    .instr_valid_i(instr_valid), .instr_i(instr), .instr_ready_o(instr_ready),
    .dma_req_i(dma_req), .dma_gnt_o(dma_gnt), .dma_rsp_o(dma_rsp),
    .dbg_raddr_i(dbg_addr), .dbg_rdata_o(dbg_rdata), .dbg_we_i(dbg_we), .dbg_wdata_i(dbg_wdata),
    .cnt_instr_o(c_instr), .cnt_dotp_o(c_dotp), .cnt_nnload_o(c_load),
    .cnt_stall_gnt_o(c_sgnt), .cnt_stall_nnrf_o(c_snn), .cnt_illegal_o(c_ill), .busy_o(busy));

  // ------------------------------------------------------------ shared state
  int checks = 0, failures = 0;
  int prec;                       // current element width: 8, 4 or 2
  int wl [CO][K];                 // filters
  int fm [H][WD][CI];             // input feature map
  int ready_round = -1;           // last round whose im2col buffers are in memory
  int done_round [NC];            // last round finished by each core
  int dma_wait = 0, dma_writes = 0, dma_reads = 0;
  int drain_ref = -1;
  longint mac_cycles [3];         // busiest-core cycles per precision
  int dotp_modes [4];

  task automatic fail(string s);
    failures++;
    if (failures < 12) $display("FAIL @%0d %s", cyc, s);
  endtask

  function automatic vec_mode_e mode_of(int p);
    return (p == 8) ? VEC_B : (p == 4) ? VEC_N : VEC_C;
  endfunction
  function automatic int kw_of(int p);   // words per filter row / column
    return K * p / 32;
  endfunction

  // im2col element k of output pixel pix (HWC order inside the 3x3 window)
  function automatic int col(int pix, int k);
    int y, x, ky, kx, ch;
    y = pix / WD; x = pix % WD;
    ky = k / (3 * CI); kx = (k / CI) % 3; ch = k % CI;
    y = y + ky - 1; x = x + kx - 1;
    if (y < 0 || y >= H || x < 0 || x >= WD) return 0;
    return fm[y][x][ch];
  endfunction

  function automatic logic [31:0] pack(int p, int v [16]);
    logic [31:0] r = 0;
    for (int i = 0; i < 32 / p; i++) r |= (32'(v[i]) & ((32'd1 << p) - 1)) << (p * i);
    return r;
  endfunction

  // rows are padded by one word so that consecutive rows start in different
  // banks (the word-interleaved banks would otherwise see rows of 72 words
  // all start in banks 0 and 8)
  function automatic logic [31:0] wbase(int f);
    return 32'(f * (kw_of(prec) + 1) * 4);
  endfunction
  function automatic logic [31:0] xbase(int set, int c, int j);
    return XBASE + 32'(((set * NC + c) * 2 + j) * (kw_of(prec) + 1) * 4);
  endfunction

  function automatic logic [31:0] enc_vec(alu_op_e op, logic sc, vec_mode_e m,
                                          logic [4:0] rd, logic [4:0] rs1, logic [4:0] rs2);
    return {op, 2'b00, rs2, rs1, sc, m, rd, 7'h57};
  endfunction
  function automatic logic [31:0] enc_nn(dot_sign_e s, vec_mode_e m, logic [4:0] rd,
                                         logic [4:0] rs1, logic [4:0] imm);
    return {5'd0, s, imm, rs1, 1'b0, m, rd, 7'h5B};
  endfunction

  // ------------------------------------------------------------ DMA port
  task automatic dma_write(logic [31:0] a, logic [31:0] d);
    @(negedge clk);
    dma_req = '{req: 1'b1, we: 1'b1, be: 4'hF, addr: a, wdata: d};
    #4;
    while (!dma_gnt) begin dma_wait++; @(negedge clk); #4; end
    dma_writes++;          // the request is dropped by the next call or dma_idle
  endtask

  task automatic dma_idle();
    @(negedge clk);
    dma_req = '0;
  endtask

  task automatic dma_read_check(logic [31:0] a, logic [31:0] exp);
    @(negedge clk);
    dma_req = '{req: 1'b1, we: 1'b0, be: 4'hF, addr: a, wdata: 32'd0};
    #4;
    while (!dma_gnt) begin dma_wait++; @(negedge clk); #4; end
    @(negedge clk);
    dma_req = '0;
    dma_reads++;
    checks++;
    if (!dma_rsp.rvalid || dma_rsp.rdata !== exp)
      fail($sformatf("DMA read %h = %h (rvalid %0d), expected %h", a, dma_rsp.rdata, dma_rsp.rvalid, exp));
  endtask

  task automatic wait_cores_done(int r);
    bit ok;
    do begin
      @(negedge clk);
      ok = 1;
      for (int c = 0; c < NC; c++) if (done_round[c] < r) ok = 0;
    end while (!ok);
  endtask

  task automatic write_filters();
    int v [16];
    for (int f = 0; f < CO; f++)
      for (int j = 0; j < kw_of(prec); j++) begin
        for (int i = 0; i < 32 / prec; i++) v[i] = wl[f][j * (32 / prec) + i];
        dma_write(wbase(f) + 32'(4 * j), pack(prec, v));
      end
    dma_idle();
  endtask

  task automatic write_round(int r, int gr);
    int v [16];
    for (int c = 0; c < NC; c++)
      for (int jj = 0; jj < 2; jj++) begin
        int pix = 2 * (r * NC + c) + jj;
        for (int j = 0; j < kw_of(prec); j++) begin
          for (int i = 0; i < 32 / prec; i++) v[i] = col(pix, j * (32 / prec) + i);
          dma_write(xbase(gr % 2, c, jj) + 32'(4 * j), pack(prec, v));
        end
      end
    dma_idle();
  endtask

  // ------------------------------------------------------------ per-core driver
  localparam logic [4:0] S1 = 5'd10, AW1 = 5'd20, AW2 = 5'd21, AW3 = 5'd22, AW4 = 5'd23,
                         AX1 = 5'd24, AX2 = 5'd25;

  for (genvar gc = 0; gc < NC; gc++) begin : g_drv
    logic        iv, we;
    logic [31:0] iw, wd;
    logic [4:0]  da;
    assign instr_valid[gc] = iv;
    assign instr[gc]       = iw;
    assign dbg_we[gc]      = we;
    assign dbg_wdata[gc]   = wd;
    assign dbg_addr[gc]    = da;

    task automatic dbg_set(logic [4:0] r, logic [31:0] v);
      @(negedge clk);
      da = r; wd = v; we = 1'b1;
      @(negedge clk);
      we = 1'b0;
    endtask

    // offer a program; returns the cycles from first offer to idle
    task automatic run(logic [31:0] prog [$], output int cycles);
      int pc = 0, t0;
      t0 = cyc;
      while (pc < prog.size()) begin
        @(negedge clk);
        iv = 1'b1; iw = prog[pc];
        #4;
        if (instr_ready[gc]) pc++;
      end
      @(negedge clk);
      iv = 1'b0;
      #4;
      while (busy[gc]) begin @(negedge clk); #4; end
      cycles = cyc - t0;
    endtask

    initial begin
      logic [31:0] prog [$];
      int cycles, gr, kw, s0, h0, i0;
      vec_mode_e m;
      iv = 0; iw = 0; we = 0; wd = 0; da = 0;
      done_round[gc] = -1;
      @(posedge rst_n);
      // one illegal word: counted, no state change
      prog = {32'hFFFF_FFFF};
      run(prog, cycles);
      for (int pi = 0; pi < 3; pi++) begin
        for (int r = 0; r < NROUND; r++) begin
          gr = pi * NROUND + r;
          while (ready_round < gr) @(negedge clk);
          kw = kw_of(prec);
          m  = mode_of(prec);
          for (int gi = 0; gi < NGROUP; gi++) begin
            // cores start at different filter groups so that they do not all
            // read the same weight words in lockstep
            int g;
            g = (gi + 2 * gc) % NGROUP;
            dbg_set(AW1, wbase(4 * g + 0));
            dbg_set(AW2, wbase(4 * g + 1));
            dbg_set(AW3, wbase(4 * g + 2));
            dbg_set(AW4, wbase(4 * g + 3));
            dbg_set(AX1, xbase(gr % 2, gc, 0));
            dbg_set(AX2, xbase(gr % 2, gc, 1));
            prog.delete();
            for (int s = 0; s < 8; s++) prog.push_back(enc_vec(ALU_ADD, 1'b0, VEC_B, S1 + 5'(s), 5'd0, 5'd0));
            // NN-RF initialisation (Fig. 9 order; reversed in odd groups)
            if (gi % 2 == 0) begin
              prog.push_back(enc_nn(DOT_USP, m, 5'd0, AW1, 5'd16));
              prog.push_back(enc_nn(DOT_USP, m, 5'd0, AW2, 5'd18));
              prog.push_back(enc_nn(DOT_USP, m, 5'd0, AW3, 5'd20));
              prog.push_back(enc_nn(DOT_USP, m, 5'd0, AW4, 5'd22));
              prog.push_back(enc_nn(DOT_USP, m, 5'd0, AX1, 5'd8));
            end else begin
              prog.push_back(enc_nn(DOT_USP, m, 5'd0, AX1, 5'd8));
              prog.push_back(enc_nn(DOT_USP, m, 5'd0, AW4, 5'd22));
              prog.push_back(enc_nn(DOT_USP, m, 5'd0, AW3, 5'd20));
              prog.push_back(enc_nn(DOT_USP, m, 5'd0, AW2, 5'd18));
              prog.push_back(enc_nn(DOT_USP, m, 5'd0, AW1, 5'd16));
            end
            // Mac&Load loop, one iteration per packed word
            for (int it = 0; it < kw; it++) begin
              prog.push_back(enc_nn(DOT_UP,  m, 5'd0,   AX2, 5'd9));
              prog.push_back(enc_nn(DOT_USP, m, S1 + 0, AW2, 5'd0));
              prog.push_back(enc_nn(DOT_USP, m, S1 + 1, AW2, 5'd2));
              prog.push_back(enc_nn(DOT_USP, m, S1 + 2, AW2, 5'd4));
              prog.push_back(enc_nn(DOT_USP, m, S1 + 3, AX1, 5'd14));
              prog.push_back(enc_nn(DOT_USP, m, S1 + 4, AW1, 5'd17));
              prog.push_back(enc_nn(DOT_USP, m, S1 + 5, AW2, 5'd19));
              prog.push_back(enc_nn(DOT_USP, m, S1 + 6, AW3, 5'd21));
              prog.push_back(enc_nn(DOT_USP, m, S1 + 7, AW4, 5'd23));
            end
            @(negedge clk);
            s0 = c_sgnt[gc]; h0 = c_snn[gc]; i0 = c_instr[gc];
            run(prog, cycles);
            dotp_modes[m] += 9 * kw;
            checks++;
            if (c_instr[gc] - i0 != prog.size())
              fail($sformatf("core %0d issued %0d of %0d", gc, c_instr[gc] - i0, prog.size()));
            begin
              int drain;
              drain = cycles - prog.size() - (c_sgnt[gc] - s0) - (c_snn[gc] - h0);
              checks++;
              if (drain_ref < 0) drain_ref = drain;
              else if (drain != drain_ref)
                fail($sformatf("core %0d cycle accounting: drain %0d, expected %0d", gc, drain, drain_ref));
            end
            if (gc == 0) mac_cycles[pi] += cycles + 6;
            // compare the eight accumulators
            for (int jj = 0; jj < 2; jj++)
              for (int fi = 0; fi < 4; fi++) begin
                int pix, exp;
                pix = 2 * (r * NC + gc) + jj;
                exp = 0;
                for (int k = 0; k < K; k++) exp += wl[4 * g + fi][k] * col(pix, k);
                da = S1 + 5'(jj * 4 + fi);
                #1;
                checks++;
                if (dbg_rdata[gc] !== 32'(exp))
                  fail($sformatf("core %0d prec %0d pix %0d filter %0d: %0d, expected %0d",
                                 gc, prec, pix, 4 * g + fi, $signed(dbg_rdata[gc]), exp));
              end
          end
          done_round[gc] = gr;
        end
      end
    end
  end

  // ------------------------------------------------------------ main: DMA and checks
  int precs [3] = '{8, 4, 2};

  initial begin
    longint sgnt, snn;
    dma_req = '0;
    for (int i = 0; i < 4; i++) dotp_modes[i] = 0;
    for (int i = 0; i < 3; i++) mac_cycles[i] = 0;
    prec = 8;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int pi = 0; pi < 3; pi++) begin
      if (pi > 0) wait_cores_done(pi * NROUND - 1);
      prec = precs[pi];
      // weights unsigned, activations signed (usp), full range of the width
      for (int f = 0; f < CO; f++)
        for (int k = 0; k < K; k++) wl[f][k] = int'($urandom % (1 << prec));
      for (int y = 0; y < H; y++)
        for (int x = 0; x < WD; x++)
          for (int ch = 0; ch < CI; ch++)
            fm[y][x][ch] = int'($urandom % (1 << prec)) - (1 << (prec - 1));
      write_filters();
      for (int r = 0; r < NROUND; r++) begin
        int gr;
        gr = pi * NROUND + r;
        if (r >= 2) wait_cores_done(gr - 2);
        write_round(r, gr);
        ready_round = gr;
      end
    end
    wait_cores_done(3 * NROUND - 1);
    // read the last filter area back
    for (int f = 0; f < CO; f++)
      for (int j = 0; j < kw_of(prec); j++) begin
        int v [16];
        for (int i = 0; i < 32 / prec; i++) v[i] = wl[f][j * (32 / prec) + i];
        dma_read_check(wbase(f) + 32'(4 * j), pack(prec, v));
      end
    // mechanism counts
    sgnt = 0; snn = 0;
    for (int c = 0; c < NC; c++) begin
      sgnt += c_sgnt[c]; snn += c_snn[c];
      checks++;
      if (c_ill[c] != 1) fail($sformatf("core %0d illegal count %0d", c, c_ill[c]));
    end
    $display("cores: %0d contention stall cycles, %0d NN-RF hazard stall cycles", sgnt, snn);
    $display("DMA: %0d writes, %0d reads, %0d grant-wait cycles", dma_writes, dma_reads, dma_wait);
    $display("dot products: 8b %0d, 4b %0d, 2b %0d", dotp_modes[VEC_B], dotp_modes[VEC_N], dotp_modes[VEC_C]);
    for (int pi = 0; pi < 3; pi++)
      $display("%0d-bit layer: core 0 spent %0d cycles on %0d MACs (%.3f MAC/cycle/core)",
               precs[pi], mac_cycles[pi], NROUND * NGROUP * 8 * K,
               real'(NROUND * NGROUP * 8 * K) / real'(mac_cycles[pi]));
    $display("fixed drain per program: %0d cycles", drain_ref);
    checks++; if (sgnt == 0) fail("no TCDM contention stall happened");
    checks++; if (snn == 0) fail("no NN-RF hazard stall happened");
    checks++; if (dma_wait == 0) fail("the DMA never waited for a grant");
    checks++; if (dma_writes == 0 || dma_reads == 0) fail("no DMA traffic");
    for (int i = 1; i < 4; i++) begin
      checks++; if (dotp_modes[i] == 0) fail($sformatf("no dot product in mode %0d", i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
