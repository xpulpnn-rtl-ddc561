// tb_tcdm_bank: self-checking testbench of tcdm_bank at its default size.
//
// Writes every word, then mixes random reads and byte-masked writes, keeping
// a reference array here. Read data is checked one cycle after the read
// request, and checked to hold through cycles without a read.
module tb_tcdm_bank;
  localparam int WORDS = 2048;
  logic clk = 0;
  always #5 clk = ~clk;

  logic        req, we;
  logic [3:0]  be;
  logic [10:0] addr;
  logic [31:0] wdata, rdata;
  logic [31:0] refm [WORDS];
  logic [31:0] exp_q;
  logic        chk_q;
  int checks = 0, failures = 0;

  tcdm_bank #(.WORDS(WORDS), .DW(32)) dut (
    .clk_i(clk), .req_i(req), .we_i(we), .be_i(be), .addr_i(addr), .wdata_i(wdata), .rdata_o(rdata));

  initial begin
    req = 0; we = 0; be = 0; addr = 0; wdata = 0; chk_q = 0;
    for (int i = 0; i < WORDS; i++) begin
      @(negedge clk);
      req = 1; we = 1; be = 4'hF; addr = 11'(i); wdata = $urandom;
      refm[i] = wdata;
    end
    for (int k = 0; k < 20000; k++) begin
      @(negedge clk);
      if (chk_q) begin
        checks++;
        if (rdata !== exp_q) begin
          failures++;
          if (failures < 10) $display("FAIL k=%0d rdata=%h exp=%h", k, rdata, exp_q);
        end
      end
      req  = ($urandom % 4) != 0;
      we   = $urandom % 2;
      be   = 4'($urandom);
      addr = 11'($urandom);
      wdata = $urandom;
      if (req && !we) begin
        exp_q = refm[addr];
        chk_q = 1;
      end else if (req && we) begin
        for (int b = 0; b < 4; b++) if (be[b]) refm[addr][8*b +: 8] = wdata[8*b +: 8];
        // chk_q keeps checking that the last read data is held
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
