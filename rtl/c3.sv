// c3: cross-stage-partial block of YOLOv5 (H x W x C_IN -> H x W x C_OUT).
// The input channels are chunked in two halves by a split. The first half
// goes through a 1x1 CBS (C_IN/2 -> C_OUT/2) into a FIFO; the second half
// through a 1x1 CBS, N bottleneck blocks and another 1x1 CBS. A concat joins
// the two halves (FIFO branch first), giving C_OUT channels. The FIFO holds
// a whole half map, a bound that cannot deadlock. Layer ids used, from
// LAYER_ID: first-branch CBS, second-branch CBS, 2 per bottleneck, final CBS
// (3 + 2N in all).
module c3
#(
  parameter int unsigned DW       = satay_pkg::DW,
  parameter int unsigned WW       = satay_pkg::WW,
  parameter int unsigned H        = 8,
  parameter int unsigned W        = 8,
  parameter int unsigned C_IN     = 4,
  parameter int unsigned C_OUT    = 4,
  parameter int unsigned N        = 1,
  parameter bit          SHORTCUT = 1'b1,
  parameter int unsigned LAYER_ID = 0,
  parameter satay_pkg::act_e        ACT      = satay_pkg::ACT_HARDSWISH
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  logic [DW-1:0] in_data,
  output logic          out_valid,
  input  logic          out_ready,
  output logic [DW-1:0] out_data,
  input  logic          wt_we,
  input  logic [7:0]    wt_layer,
  input  logic [23:0]   wt_addr,
  input  logic [WW-1:0] wt_data
);
  localparam int unsigned CH = C_IN / 2;
  localparam int unsigned CO = C_OUT / 2;

  logic [1:0]         s_valid, s_ready;     // split outputs
  logic [1:0][DW-1:0] s_data;
  logic               a_valid, a_ready;     // branch A after its CBS
  logic [DW-1:0]      a_data;
  logic [1:0]         j_valid, j_ready;     // concat inputs
  logic [1:0][DW-1:0] j_data;
  logic [N:0]         b_valid, b_ready;     // branch B chain
  logic [N:0][DW-1:0] b_data;

  split #(.DW(DW), .N_OUT(2), .C(C_IN), .DEPTH(2 * CH)) u_chunk (
    .clk, .rst_n, .in_valid, .in_ready, .in_data,
    .out_valid(s_valid), .out_ready(s_ready), .out_data(s_data));

  // branch A: CBS -> FIFO
  cbs #(.DW(DW), .WW(WW), .K(1), .H(H), .W(W), .C(CH), .F(CO), .LAYER_ID(LAYER_ID), .ACT(ACT)) u_cbs_a (
    .clk, .rst_n, .in_valid(s_valid[0]), .in_ready(s_ready[0]), .in_data(s_data[0]),
    .out_valid(a_valid), .out_ready(a_ready), .out_data(a_data),
    .wt_we, .wt_layer, .wt_addr, .wt_data);

  stream_fifo #(.DW(DW), .DEPTH(H * W * CO)) u_fifo_a (
    .clk, .rst_n, .in_valid(a_valid), .in_ready(a_ready), .in_data(a_data),
    .out_valid(j_valid[0]), .out_ready(j_ready[0]), .out_data(j_data[0]));

  // branch B: CBS -> bottleneck x N -> CBS
  cbs #(.DW(DW), .WW(WW), .K(1), .H(H), .W(W), .C(CH), .F(CO), .LAYER_ID(LAYER_ID + 1), .ACT(ACT)) u_cbs_b (
    .clk, .rst_n, .in_valid(s_valid[1]), .in_ready(s_ready[1]), .in_data(s_data[1]),
    .out_valid(b_valid[0]), .out_ready(b_ready[0]), .out_data(b_data[0]),
    .wt_we, .wt_layer, .wt_addr, .wt_data);

  for (genvar i = 0; i < N; i++) begin : g_bneck
    bottleneck #(.DW(DW), .WW(WW), .H(H), .W(W), .C(CO), .SHORTCUT(SHORTCUT),
                 .LAYER_ID(LAYER_ID + 2 + 2 * i), .ACT(ACT)) u_bneck (
      .clk, .rst_n,
      .in_valid(b_valid[i]), .in_ready(b_ready[i]), .in_data(b_data[i]),
      .out_valid(b_valid[i+1]), .out_ready(b_ready[i+1]), .out_data(b_data[i+1]),
      .wt_we, .wt_layer, .wt_addr, .wt_data);
  end

  cbs #(.DW(DW), .WW(WW), .K(1), .H(H), .W(W), .C(CO), .F(CO), .LAYER_ID(LAYER_ID + 2 + 2 * N), .ACT(ACT)) u_cbs_c (
    .clk, .rst_n, .in_valid(b_valid[N]), .in_ready(b_ready[N]), .in_data(b_data[N]),
    .out_valid(j_valid[1]), .out_ready(j_ready[1]), .out_data(j_data[1]),
    .wt_we, .wt_layer, .wt_addr, .wt_data);

  concat #(.DW(DW), .N_IN(2), .C(CO), .DEPTH(2 * CO)) u_concat (
    .clk, .rst_n, .in_valid(j_valid), .in_ready(j_ready), .in_data(j_data),
    .out_valid, .out_ready, .out_data);
endmodule
