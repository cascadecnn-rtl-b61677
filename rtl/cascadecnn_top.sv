// cascadecnn_top: two-stage precision cascade for CNN inference.
//
// Every input sample is first classified by the low-precision unit (LPU,
// 4-bit activations and weights), which is fast but less accurate. The
// class probabilities of its prediction (softmax is computed by the host
// processor) go through the confidence evaluation unit (CEU); confident
// predictions are final, the others are collected by cascade_ctrl and
// re-processed by the high-precision unit (HPU, 8 bits), whose prediction
// replaces the LPU's. Both units are instances of mm_unit; the LPU packs
// two multipliers per DSP and derives its 4-bit weights at run time from
// the 8-bit weights in memory, so one copy of the model serves both.
// The host sequences the CNN layers: it issues one matrix-product command
// per layer to the unit of the current phase (a start is ignored when its
// unit is not the active one), runs softmax on the last layer's outputs and
// streams the probabilities into prob_*. In the paper the two units time-
// share the FPGA through full reconfiguration; here both are present and
// reconfig_req/reconfig_done mark the switch.
// Off-chip memory is outside: each unit has an activation read port, a
// weight read port and an output write port (64-bit words, valid/ready
// requests, in-order read responses).
module cascadecnn_top
  import cascade_pkg::*;
#(
  parameter int unsigned WL_LPU = 4,
  parameter int unsigned WL_HPU = 8,
  parameter int unsigned L_TR   = 64,
  parameter int unsigned L_TP   = 64,
  parameter int unsigned L_TC   = 64,
  parameter int unsigned H_TR   = 64,
  parameter int unsigned H_TP   = 64,
  parameter int unsigned H_TC   = 32,
  parameter int unsigned BATCH  = 1024,
  parameter int unsigned NCLS   = 1000,
  parameter int unsigned PW     = 16,
  parameter int unsigned NMAX   = 10,
  localparam int unsigned BW    = $clog2(BATCH+1),
  localparam int unsigned IW    = $clog2(BATCH),
  localparam int unsigned CLSW  = $clog2(NCLS),
  localparam int unsigned NW    = $clog2(NMAX+1),
  localparam int unsigned SCW   = PW + $clog2(NMAX) + 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // batch control
  input  logic                  batch_start,
  input  logic [BW-1:0]         batch_size,
  output phase_e                phase,
  output logic                  reconfig_req,
  input  logic                  reconfig_done,
  output logic                  batch_done,
  output logic [BW-1:0]         n_pass,
  output logic [BW-1:0]         n_fail,
  // layer commands
  input  logic                  lpu_start,
  input  mm_cmd_t               lpu_cmd,
  output logic                  lpu_busy,
  output logic                  lpu_done,
  input  logic                  hpu_start,
  input  mm_cmd_t               hpu_cmd,
  output logic                  hpu_busy,
  output logic                  hpu_done,
  // LPU memory ports
  output logic                  lpu_a_req_valid,
  input  logic                  lpu_a_req_ready,
  output rd_req_t               lpu_a_req,
  input  logic                  lpu_a_rsp_valid,
  input  word_t                 lpu_a_rsp_data,
  output logic                  lpu_w_req_valid,
  input  logic                  lpu_w_req_ready,
  output rd_req_t               lpu_w_req,
  input  logic                  lpu_w_rsp_valid,
  input  word_t                 lpu_w_rsp_data,
  output logic                  lpu_o_wr_valid,
  input  logic                  lpu_o_wr_ready,
  output wr_req_t               lpu_o_wr,
  // HPU memory ports
  output logic                  hpu_a_req_valid,
  input  logic                  hpu_a_req_ready,
  output rd_req_t               hpu_a_req,
  input  logic                  hpu_a_rsp_valid,
  input  word_t                 hpu_a_rsp_data,
  output logic                  hpu_w_req_valid,
  input  logic                  hpu_w_req_ready,
  output rd_req_t               hpu_w_req,
  input  logic                  hpu_w_rsp_valid,
  input  word_t                 hpu_w_rsp_data,
  output logic                  hpu_o_wr_valid,
  input  logic                  hpu_o_wr_ready,
  output wr_req_t               hpu_o_wr,
  // class probabilities from the host's softmax
  input  logic                  prob_valid,
  input  logic [PW-1:0]         prob,
  input  logic                  prob_last,
  // CEU configuration
  input  logic [NW-1:0]         ceu_m,
  input  logic [NW-1:0]         ceu_n,
  input  logic signed [SCW-1:0] ceu_th,
  // CEU decision of the latest sample
  output logic                  dec_valid,
  output logic                  dec_pass,
  output logic [CLSW-1:0]       dec_class,
  output logic signed [SCW-1:0] dec_score,
  // samples to re-process on the HPU
  output logic                  hpu_id_valid,
  input  logic                  hpu_id_ready,
  output logic [IW-1:0]         hpu_id,
  // final labels
  input  logic [IW-1:0]         lbl_idx,
  output logic [CLSW-1:0]       lbl_class
);
  mm_unit #(.WL(WL_LPU), .W_SRC_WL(WL_HPU), .TR(L_TR), .TP(L_TP), .TC(L_TC),
            .PACK(WL_LPU <= 5)) u_lpu (
    .clk, .rst_n, .start(lpu_start && phase == PH_LPU && !reconfig_req),
    .cmd(lpu_cmd), .busy(lpu_busy), .done(lpu_done),
    .a_req_valid(lpu_a_req_valid), .a_req_ready(lpu_a_req_ready), .a_req(lpu_a_req),
    .a_rsp_valid(lpu_a_rsp_valid), .a_rsp_data(lpu_a_rsp_data),
    .w_req_valid(lpu_w_req_valid), .w_req_ready(lpu_w_req_ready), .w_req(lpu_w_req),
    .w_rsp_valid(lpu_w_rsp_valid), .w_rsp_data(lpu_w_rsp_data),
    .o_wr_valid(lpu_o_wr_valid), .o_wr_ready(lpu_o_wr_ready), .o_wr(lpu_o_wr)
  );

  mm_unit #(.WL(WL_HPU), .W_SRC_WL(WL_HPU), .TR(H_TR), .TP(H_TP), .TC(H_TC),
            .PACK(1'b0)) u_hpu (
    .clk, .rst_n, .start(hpu_start && phase == PH_HPU),
    .cmd(hpu_cmd), .busy(hpu_busy), .done(hpu_done),
    .a_req_valid(hpu_a_req_valid), .a_req_ready(hpu_a_req_ready), .a_req(hpu_a_req),
    .a_rsp_valid(hpu_a_rsp_valid), .a_rsp_data(hpu_a_rsp_data),
    .w_req_valid(hpu_w_req_valid), .w_req_ready(hpu_w_req_ready), .w_req(hpu_w_req),
    .w_rsp_valid(hpu_w_rsp_valid), .w_rsp_data(hpu_w_rsp_data),
    .o_wr_valid(hpu_o_wr_valid), .o_wr_ready(hpu_o_wr_ready), .o_wr(hpu_o_wr)
  );

  ceu #(.PW(PW), .NMAX(NMAX), .NCLS(NCLS)) u_ceu (
    .clk, .rst_n, .cfg_m(ceu_m), .cfg_n(ceu_n), .cfg_th(ceu_th),
    .in_valid(prob_valid), .in_prob(prob), .in_last(prob_last),
    .out_valid(dec_valid), .out_pass(dec_pass), .out_class(dec_class),
    .out_score(dec_score)
  );

  cascade_ctrl #(.BATCH(BATCH), .CLSW(CLSW)) u_ctrl (
    .clk, .rst_n, .start(batch_start), .batch_size, .phase, .reconfig_req,
    .reconfig_done, .done(batch_done),
    .ceu_valid(dec_valid), .ceu_pass(dec_pass), .ceu_class(dec_class),
    .hpu_id_valid, .hpu_id_ready, .hpu_id,
    .lbl_idx, .lbl_class, .n_pass, .n_fail
  );

endmodule
