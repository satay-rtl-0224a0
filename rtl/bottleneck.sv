// bottleneck: residual block of YOLOv5's C3: CBS 1x1 -> CBS 3x3 (+ shortcut).
// The input map (H x W x C) is forked: one copy runs through the two CBS
// blocks (C -> C channels), the other waits in a FIFO, and an element-wise
// add merges them. The FIFO holds a whole feature map, H*W*C words: the 3x3
// branch delays its first result by more than a row, and a whole map is a
// bound that can never deadlock (the paper sizes such buffers from
// simulation instead). With SHORTCUT = 0 the fork, FIFO and add are absent.
// Layer ids used: LAYER_ID (1x1) and LAYER_ID+1 (3x3).
module bottleneck
#(
  parameter int unsigned DW       = satay_pkg::DW,
  parameter int unsigned WW       = satay_pkg::WW,
  parameter int unsigned H        = 8,
  parameter int unsigned W        = 8,
  parameter int unsigned C        = 4,
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
  logic          m_valid, m_ready;      // into the first CBS
  logic [DW-1:0] m_data;
  logic          h_valid, h_ready;      // between the CBS blocks
  logic [DW-1:0] h_data;
  logic          y_valid, y_ready;      // out of the second CBS
  logic [DW-1:0] y_data;

  cbs #(.DW(DW), .WW(WW), .K(1), .H(H), .W(W), .C(C), .F(C), .LAYER_ID(LAYER_ID), .ACT(ACT)) u_cbs1 (
    .clk, .rst_n, .in_valid(m_valid), .in_ready(m_ready), .in_data(m_data),
    .out_valid(h_valid), .out_ready(h_ready), .out_data(h_data),
    .wt_we, .wt_layer, .wt_addr, .wt_data);

  cbs #(.DW(DW), .WW(WW), .K(3), .H(H), .W(W), .C(C), .F(C), .LAYER_ID(LAYER_ID + 1), .ACT(ACT)) u_cbs2 (
    .clk, .rst_n, .in_valid(h_valid), .in_ready(h_ready), .in_data(h_data),
    .out_valid(y_valid), .out_ready(y_ready), .out_data(y_data),
    .wt_we, .wt_layer, .wt_addr, .wt_data);

  if (SHORTCUT) begin : g_short
    logic [1:0]          k_valid, k_ready;
    logic [1:0][DW-1:0]  k_data;
    logic                s_valid, s_ready;
    logic [DW-1:0]       s_data;

    stream_fork #(.DW(DW), .N_OUT(2)) u_fork (
      .clk, .rst_n, .in_valid, .in_ready, .in_data,
      .out_valid(k_valid), .out_ready(k_ready), .out_data(k_data));

    assign m_valid    = k_valid[0];
    assign m_data     = k_data[0];
    assign k_ready[0] = m_ready;

    stream_fifo #(.DW(DW), .DEPTH(H * W * C)) u_skip (
      .clk, .rst_n, .in_valid(k_valid[1]), .in_ready(k_ready[1]), .in_data(k_data[1]),
      .out_valid(s_valid), .out_ready(s_ready), .out_data(s_data));

    add #(.DW(DW)) u_add (
      .clk, .rst_n,
      .a_valid(s_valid), .a_ready(s_ready), .a_data(s_data),
      .b_valid(y_valid), .b_ready(y_ready), .b_data(y_data),
      .out_valid, .out_ready, .out_data);
  end else begin : g_plain
    assign m_valid   = in_valid;
    assign m_data    = in_data;
    assign in_ready  = m_ready;
    assign out_valid = y_valid;
    assign out_data  = y_data;
    assign y_ready   = out_ready;
  end
endmodule
