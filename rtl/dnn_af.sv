// dnn_af: the streaming AF-detection network.
//
// Two depthwise-separable convolution layers and a fused GAP+FC head,
// connected by valid/ready element streams so that all five units work
// concurrently on the same window (dataflow, no intermediate feature-map
// buffers):
//   ECG (CIN ch) -> dw1 (K1, S1) -> pw1 + ReLU (CIN->C1)
//                -> dw2 (K2, S2) -> pw2 + ReLU (C1->C2) -> GAP+FC -> logit
// Each unit has one MAC, five in all. Time steps per window:
//   H1 = (H0-K1)/S1 + 1 and H2 = (H1-K2)/S2 + 1 (valid convolutions).
// Defaults: H0 = 30720 samples (120 s at 256 Hz), K1=128, S1=8, C1=128,
// K2=16, S2=8, C2=32, which gives H1 = 3825, H2 = 477 and 7328 trained
// parameters when batch norm is counted as four values per pointwise channel,
// the size of the model the paper deploys. The layer types, the GAP+FC ending,
// the 2-layer depth and the parameter count are the paper's; the individual
// kernel sizes, strides and channel counts are this design's fit to them.
//
// Interface: s_* is the sample stream (channel fastest). res_valid pulses for
// one cycle with res_logit/res_af when a window of H0 time steps is done.
// clr starts a new window in every layer. wt_sel picks the layer memory
// (afd_pkg::wsel_e) for a weight word written with wt_we.
module dnn_af
  import afd_pkg::*;
#(
  parameter int CIN = 2,
  parameter int H0  = 30720,
  parameter int K1  = 128,
  parameter int S1  = 8,
  parameter int C1  = 128,
  parameter int K2  = 16,
  parameter int S2  = 8,
  parameter int C2  = 32
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clr,
  input  logic        wt_we,
  input  wsel_e       wt_sel,
  input  logic [15:0] wt_addr,
  input  wgt_t        wt_data,
  input  logic        s_valid,
  output logic        s_ready,
  input  act_t        s_data,
  output logic        res_valid,
  output mac_t        res_logit,
  output logic        res_af
);
  localparam int H1 = (H0 - K1) / S1 + 1;
  localparam int H2 = (H1 - K2) / S2 + 1;

  logic v1, r1, v2, r2, v3, r3, v4, r4;
  act_t d1, d2, d3, d4;

  dw_conv1d #(.C(CIN), .K(K1), .S(S1)) u_dw1 (
    .clk, .rst_n, .clr,
    .wt_we(wt_we && wt_sel == SEL_DW1), .wt_addr, .wt_data,
    .s_valid, .s_ready, .s_data,
    .m_valid(v1), .m_ready(r1), .m_data(d1));

  pw_conv1d #(.CIN(CIN), .COUT(C1)) u_pw1 (
    .clk, .rst_n, .clr,
    .wt_we(wt_we && wt_sel == SEL_PW1), .wt_addr, .wt_data,
    .s_valid(v1), .s_ready(r1), .s_data(d1),
    .m_valid(v2), .m_ready(r2), .m_data(d2));

  dw_conv1d #(.C(C1), .K(K2), .S(S2)) u_dw2 (
    .clk, .rst_n, .clr,
    .wt_we(wt_we && wt_sel == SEL_DW2), .wt_addr, .wt_data,
    .s_valid(v2), .s_ready(r2), .s_data(d2),
    .m_valid(v3), .m_ready(r3), .m_data(d3));

  pw_conv1d #(.CIN(C1), .COUT(C2)) u_pw2 (
    .clk, .rst_n, .clr,
    .wt_we(wt_we && wt_sel == SEL_PW2), .wt_addr, .wt_data,
    .s_valid(v3), .s_ready(r3), .s_data(d3),
    .m_valid(v4), .m_ready(r4), .m_data(d4));

  logic fc_valid;
  gap_fc #(.C(C2), .H(H2)) u_gap_fc (
    .clk, .rst_n, .clr,
    .wt_we(wt_we && wt_sel == SEL_FC), .wt_addr, .wt_data,
    .s_valid(v4), .s_ready(r4), .s_data(d4),
    .m_valid(fc_valid), .m_ready(1'b1), .m_logit(res_logit), .m_af(res_af));

  assign res_valid = fc_valid;

  initial begin
    assert (H0 >= K1 && H1 >= K2) else $error("dnn_af: window shorter than a kernel");
  end
endmodule
