// xpulpnn_core_ext: the XpulpNN execution slice of an extended RI5CY core.
//
// It executes the XpulpNN instructions of one core: the nibble/crumb (and
// byte/halfword) SIMD ALU operations, the SIMD dot products and the nn_sdotp
// Mac&Load instruction, plus the paper's earlier C&U form of Mac&Load.
// Instruction words come in from the fetch side of the
// core, which is not part of this block, over a valid/ready pair.
//
// Pipeline (the ID, EX and WB stages of the 4-stage RI5CY pipeline):
//   ID  decode; read rs1, rs2 and rD (accumulator) from the general-purpose
//       register file (GP-RF, 32 x 32 bit, three read ports, two write
//       ports), with forwarding of both write ports of the instruction in
//       EX; for nn_sdotp read the addressed weight and activation registers
//       of the NN-RF instead of rs1/rs2; load the dot-product unit's operand
//       registers.
//   EX  SIMD ALU or dot-product unit result, written to rD at the end of the
//       cycle through write port A. An nn_sdotp with an update bit set also
//       sends a load request for address rs1 to the TCDM and writes rs1+4
//       back through write port B (the post-increment is fixed to one word).
//       EX waits until the request is granted.
//   WB  the loaded word arrives one or more cycles later and is written into
//       the addressed NN-RF register.
// nn_sdotp computes rD += dotp(W[imm[2:1]], A[imm[0]]) with the register
// values before the update, so a register is consumed and refilled by the
// same instruction. The C&U form (pv.cusdot, Fig. 6) runs on the same path:
// rD += dotp(W[i], rs2), W[i] refilled from rs1, and rs1 += 4; it reads no
// activation register. An instruction in ID that reads an NN-RF register whose
// load is still in flight stalls; if the load returns in that very cycle the
// word is forwarded and no stall is needed.
//
// Interface timing: instr_i is taken in a cycle with instr_valid_i and
// instr_ready_o high. data_req_o follows the TCDM protocol: request held until
// data_gnt_i; the response (data_rsp_i.rvalid) arrives in a later cycle. One
// load may be outstanding. The debug port reads any GP-RF register and,
// with dbg_we_i, writes the register dbg_raddr_i at the clock edge (meant for
// an idle core; pipeline writes take precedence). The counters report executed dot products,
// Mac&Load loads and the two kinds of stall cycles.
//
// From the paper: the NN-RF with two read and one write port feeding the
// dot-product unit, the immediate as NN-RF control, the rs1 to LSU and '+4'
// datapath, two GP-RF write ports, single-cycle dot products, stalling on
// data hazards. Own choices: the forwarding network, reset of the GP-RF, one
// outstanding load, rD having priority over rs1+4 when both name the same
// register, and the event counters.
module xpulpnn_core_ext
  import xpulpnn_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  // instruction stream (from fetch)
  input  logic        instr_valid_i,
  input  logic [31:0] instr_i,
  output logic        instr_ready_o,
  // load-store unit port to the TCDM interconnect
  output tcdm_req_t   data_req_o,
  input  logic        data_gnt_i,
  input  tcdm_rsp_t   data_rsp_i,
  // debug access port of the GP-RF
  input  logic [4:0]  dbg_raddr_i,
  output logic [31:0] dbg_rdata_o,
  input  logic        dbg_we_i,
  input  logic [31:0] dbg_wdata_i,
  // event counters
  output logic [31:0] cnt_instr_o,
  output logic [31:0] cnt_dotp_o,
  output logic [31:0] cnt_nnload_o,
  output logic [31:0] cnt_stall_gnt_o,
  output logic [31:0] cnt_stall_nnrf_o,
  output logic [31:0] cnt_illegal_o,
  output logic        busy_o
);

  // ---------------------------------------------------------------- GP-RF
  logic [31:0] rf_q [32];
  logic        wa_en, wb_en;
  logic [4:0]  wa_addr, wb_addr;
  logic [31:0] wa_data, wb_data;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int i = 0; i < 32; i++) rf_q[i] <= '0;
    end else begin
      if (dbg_we_i && dbg_raddr_i != 5'd0) rf_q[dbg_raddr_i] <= dbg_wdata_i;
      if (wb_en && wb_addr != 5'd0) rf_q[wb_addr] <= wb_data;
      if (wa_en && wa_addr != 5'd0) rf_q[wa_addr] <= wa_data;
    end
  end

  // register read as a one-hot AND-OR multiplexer
  function automatic logic [31:0] rf_read(input logic [4:0] a, input logic [31:0] rf [32]);
    logic [31:0] v;
    v = '0;
    for (int i = 1; i < 32; i++) v |= {32{a == 5'(i)}} & rf[i];
    return v;
  endfunction

  assign dbg_rdata_o = rf_read(dbg_raddr_i, rf_q);

  // ---------------------------------------------------------------- ID
  ctrl_t       id_ctrl;
  logic [31:0] id_rs1, id_rs2, id_rd;
  logic [31:0] id_op_a, id_op_b;
  logic        id_fire, id_hazard, ex_stall;
  logic [31:0] nn_w_rdata, nn_a_rdata;

  xpulpnn_decoder i_dec (
    .instr_i (instr_i),
    .ctrl_o  (id_ctrl)
  );

  function automatic logic [31:0] fwd(input logic [4:0] a, input logic [31:0] rfv,
                                      input logic ea, input logic [4:0] aa, input logic [31:0] da,
                                      input logic eb, input logic [4:0] ab, input logic [31:0] db);
    if (a == 5'd0)         return 32'd0;
    if (ea && aa == a)     return da;
    if (eb && ab == a)     return db;
    return rfv;
  endfunction

  assign id_rs1 = fwd(id_ctrl.rs1, rf_read(id_ctrl.rs1, rf_q), wa_en, wa_addr, wa_data, wb_en, wb_addr, wb_data);
  assign id_rs2 = fwd(id_ctrl.rs2, rf_read(id_ctrl.rs2, rf_q), wa_en, wa_addr, wa_data, wb_en, wb_addr, wb_data);
  assign id_rd  = fwd(id_ctrl.rd,  rf_read(id_ctrl.rd, rf_q),  wa_en, wa_addr, wa_data, wb_en, wb_addr, wb_data);

  always_comb begin
    id_op_a = id_rs1;
    id_op_b = id_rs2;
    if (id_ctrl.scalar) begin
      case (id_ctrl.mode)
        VEC_H:   id_op_b = {2{id_rs2[15:0]}};
        VEC_B:   id_op_b = {4{id_rs2[7:0]}};
        VEC_N:   id_op_b = {8{id_rs2[3:0]}};
        default: id_op_b = {16{id_rs2[1:0]}};
      endcase
    end
    if (id_ctrl.nn) begin
      id_op_a = nn_w_rdata;
      id_op_b = id_ctrl.cu ? id_rs2 : nn_a_rdata;
    end
  end

  // ---------------------------------------------------------------- EX regs
  logic        ex_valid_q;
  ctrl_t       ex_ctrl_q;
  logic [31:0] ex_a_q, ex_b_q, ex_c_q, ex_addr_q;

  // Load bookkeeping: the NN-RF register an access will fill.
  logic        ex_load;          // EX holds an nn_sdotp with an update bit
  logic        ex_tgt_act;
  logic [1:0]  ex_tgt_idx;
  logic        out_q;            // a load is outstanding
  logic        out_act_q;
  logic [1:0]  out_idx_q;

  assign ex_load    = ex_valid_q && ex_ctrl_q.nn && (ex_ctrl_q.imm.upd_w || ex_ctrl_q.imm.upd_a);
  assign ex_tgt_act = ex_ctrl_q.imm.upd_a;
  assign ex_tgt_idx = ex_ctrl_q.imm.upd_a ? {1'b0, ex_ctrl_q.imm.a_addr} : ex_ctrl_q.imm.w_addr;

  // NN-RF read hazard in ID
  // does an instruction reading NN-RF registers per imm (and, unless it is a
  // C&U, the activation register) read the register act/idx?
  function automatic logic hits(input logic act, input logic [1:0] idx, input nn_imm_t imm,
                                input logic cu);
    return act ? (!cu && idx == {1'b0, imm.a_addr}) : (idx == imm.w_addr);
  endfunction

  always_comb begin
    id_hazard = 1'b0;
    if (instr_valid_i && id_ctrl.valid && id_ctrl.nn) begin
      if (ex_load && hits(ex_tgt_act, ex_tgt_idx, id_ctrl.imm, id_ctrl.cu)) id_hazard = 1'b1;
      if (out_q && !data_rsp_i.rvalid && hits(out_act_q, out_idx_q, id_ctrl.imm, id_ctrl.cu)) id_hazard = 1'b1;
    end
  end

  logic lsu_busy;
  assign lsu_busy = out_q && !data_rsp_i.rvalid;
  assign ex_stall = ex_load && (lsu_busy || !data_gnt_i);

  assign instr_ready_o = !ex_stall && !id_hazard;
  assign id_fire       = instr_valid_i && instr_ready_o;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ex_valid_q <= 1'b0;
      ex_ctrl_q  <= '0;
      ex_a_q     <= '0;
      ex_b_q     <= '0;
      ex_c_q     <= '0;
      ex_addr_q  <= '0;
    end else if (!ex_stall) begin
      ex_valid_q <= id_fire && id_ctrl.valid;
      if (id_fire) begin
        ex_ctrl_q <= id_ctrl;
        ex_a_q    <= id_op_a;
        ex_b_q    <= id_op_b;
        ex_c_q    <= id_rd;
        ex_addr_q <= id_rs1;
      end
    end
  end

  // ---------------------------------------------------------------- EX units
  logic [31:0] alu_res, dotp_res, ex_res;

  xpulpnn_simd_alu i_alu (
    .op_i   (ex_ctrl_q.op),
    .mode_i (ex_ctrl_q.mode),
    .a_i    (ex_a_q),
    .b_i    (ex_b_q),
    .res_o  (alu_res)
  );

  xpulpnn_dotp_unit i_dotp (
    .clk_i        (clk_i),
    .rst_ni       (rst_ni),
    .issue_i      (id_fire && id_ctrl.unit == UNIT_DOTP),
    .mode_i       (id_ctrl.mode),
    .sign_i       (id_ctrl.sign),
    .op_a_i       (id_op_a),
    .op_b_i       (id_op_b),
    .op_c_i       (ex_c_q),
    .accumulate_i (ex_ctrl_q.accumulate),
    .res_o        (dotp_res)
  );

  assign ex_res = (ex_ctrl_q.unit == UNIT_DOTP) ? dotp_res : alu_res;

  // GP-RF write ports, at the end of a non-stalled EX cycle
  assign wa_en   = ex_valid_q && !ex_stall && ex_ctrl_q.rd_we;
  assign wa_addr = ex_ctrl_q.rd;
  assign wa_data = ex_res;
  assign wb_en   = ex_load && !ex_stall && !(wa_en && wa_addr == ex_ctrl_q.rs1);
  assign wb_addr = ex_ctrl_q.rs1;
  assign wb_data = ex_addr_q + 32'd4;

  // ---------------------------------------------------------------- LSU
  always_comb begin
    data_req_o       = '0;
    data_req_o.req   = ex_load && !lsu_busy;
    data_req_o.we    = 1'b0;
    data_req_o.be    = 4'hF;
    data_req_o.addr  = ex_addr_q;
    data_req_o.wdata = '0;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      out_q     <= 1'b0;
      out_act_q <= 1'b0;
      out_idx_q <= '0;
    end else begin
      if (data_req_o.req && data_gnt_i) begin
        out_q     <= 1'b1;
        out_act_q <= ex_tgt_act;
        out_idx_q <= ex_tgt_idx;
      end else if (data_rsp_i.rvalid) begin
        out_q <= 1'b0;
      end
    end
  end

  // ---------------------------------------------------------------- NN-RF
  xpulpnn_nnrf #(.N_W(4), .N_A(2)) i_nnrf (
    .clk_i      (clk_i),
    .rst_ni     (rst_ni),
    .w_raddr_i  (id_ctrl.imm.w_addr),
    .a_raddr_i  (id_ctrl.imm.a_addr),
    .w_rdata_o  (nn_w_rdata),
    .a_rdata_o  (nn_a_rdata),
    .we_i       (out_q && data_rsp_i.rvalid),
    .wsel_act_i (out_act_q),
    .waddr_i    (out_idx_q),
    .wdata_i    (data_rsp_i.rdata)
  );

  // ---------------------------------------------------------------- counters
  logic [31:0] c_instr, c_dotp, c_load, c_sgnt, c_snn, c_ill;
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      c_instr <= '0; c_dotp <= '0; c_load <= '0; c_sgnt <= '0; c_snn <= '0; c_ill <= '0;
    end else begin
      if (id_fire)                                c_instr <= c_instr + 1;
      if (id_fire && !id_ctrl.valid)              c_ill   <= c_ill + 1;
      if (ex_valid_q && !ex_stall && ex_ctrl_q.unit == UNIT_DOTP) c_dotp <= c_dotp + 1;
      if (data_req_o.req && data_gnt_i)           c_load  <= c_load + 1;
      if (ex_stall)                               c_sgnt  <= c_sgnt + 1;
      if (instr_valid_i && id_hazard && !ex_stall) c_snn  <= c_snn + 1;
    end
  end

  assign cnt_instr_o      = c_instr;
  assign cnt_dotp_o       = c_dotp;
  assign cnt_nnload_o     = c_load;
  assign cnt_stall_gnt_o  = c_sgnt;
  assign cnt_stall_nnrf_o = c_snn;
  assign cnt_illegal_o    = c_ill;
  assign busy_o           = ex_valid_q || out_q;

  // ---------------------------------------------------------------- checks
  // A request is held stable until it is granted.
  a_req_stable: assert property (@(posedge clk_i) disable iff (!rst_ni)
    data_req_o.req && !data_gnt_i |=> data_req_o.req && $stable(data_req_o.addr));
  // A response only comes for an outstanding load.
  a_rsp_expected: assert property (@(posedge clk_i) disable iff (!rst_ni)
    data_rsp_i.rvalid |-> out_q);

endmodule
