// tb_nnrf: self-checking testbench of xpulpnn_nnrf.
//
// Random writes into the weight and activation banks, random reads on both
// read ports every cycle, compared with a reference copy of the six
// registers kept here. Also checks the reset value and that a read of the
// register being written in the same cycle returns the new word.
module tb_nnrf;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [1:0]  w_raddr, waddr;
  logic        a_raddr, we, wsel_act;
  logic [31:0] w_rdata, a_rdata, wdata;
  logic [31:0] ref_w [4];
  logic [31:0] ref_a [2];
  logic [31:0] exp_w, exp_a;
  int checks = 0, failures = 0;

  xpulpnn_nnrf dut (
    .clk_i(clk), .rst_ni(rst_n), .w_raddr_i(w_raddr), .a_raddr_i(a_raddr),
    .w_rdata_o(w_rdata), .a_rdata_o(a_rdata), .we_i(we), .wsel_act_i(wsel_act),
    .waddr_i(waddr), .wdata_i(wdata));

  initial begin
    we = 0; wsel_act = 0; waddr = 0; wdata = 0; w_raddr = 0; a_raddr = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 4; i++) ref_w[i] = 0;
    for (int i = 0; i < 2; i++) ref_a[i] = 0;
    @(negedge clk);
    for (int i = 0; i < 4; i++) begin
      w_raddr = 2'(i); a_raddr = i[0]; #1;
      checks++; if (w_rdata !== 0 || a_rdata !== 0) failures++;
    end
    for (int k = 0; k < 5000; k++) begin
      @(negedge clk);
      we       = $urandom % 2;
      wsel_act = $urandom % 2;
      waddr    = wsel_act ? 2'($urandom % 2) : 2'($urandom % 4);
      wdata    = $urandom;
      w_raddr  = (k % 7 == 0) ? waddr : 2'($urandom % 4);
      a_raddr  = (k % 5 == 0) ? waddr[0] : 1'($urandom % 2);
      #1;
      exp_w = (we && !wsel_act && waddr == w_raddr) ? wdata : ref_w[w_raddr];
      exp_a = (we &&  wsel_act && waddr[0] == a_raddr) ? wdata : ref_a[a_raddr];
      checks++;
      if (w_rdata !== exp_w || a_rdata !== exp_a) begin
        failures++;
        if (failures < 10) $display("FAIL k=%0d w=%h/%h a=%h/%h", k, w_rdata, exp_w, a_rdata, exp_a);
      end
      if (we) begin
        if (wsel_act) ref_a[waddr[0]] = wdata;
        else          ref_w[waddr]    = wdata;
      end
    end
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
