// sppf: spatial pyramid pooling (fast) of YOLOv5, H x W x C -> H x W x C.
// A 1x1 Conv halves the channels; three 5x5 stride-1 max poolings are
// chained, each output forked to the next pooling and, through a FIFO, to a
// 4-input concat (conv output, pool 1, pool 2, pool 3: 2C channels); a final
// 1x1 Conv returns to C channels. The conv output and every pooled map are
// needed by the concat at the same pixel, but the pooled maps lag by two rows
// per pooling stage, so the FIFOs (and the concat's own input FIFOs) are
// sized to a whole half-channel map, H*W*C/2 words, which cannot deadlock.
// Both convolutions are plain (no activation), as drawn for this block.
// Layer ids used: LAYER_ID (first conv), LAYER_ID+1 (last conv).
module sppf #(
  parameter int unsigned DW       = satay_pkg::DW,
  parameter int unsigned WW       = satay_pkg::WW,
  parameter int unsigned H        = 8,
  parameter int unsigned W        = 8,
  parameter int unsigned C        = 4,
  parameter int unsigned LAYER_ID = 0
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
  localparam int unsigned CH  = C / 2;
  localparam int unsigned MAP = H * W * CH;

  // stage s (0..3): fork input; s=0 is the first conv's output
  logic [3:0]         p_valid, p_ready;     // stage outputs (conv, mp1, mp2, mp3)
  logic [3:0][DW-1:0] p_data;
  logic [3:0]         j_valid, j_ready;     // concat inputs
  logic [3:0][DW-1:0] j_data;
  logic [2:0]         m_valid, m_ready;     // inputs of the three max poolings
  logic [2:0][DW-1:0] m_data;
  logic               q_valid, q_ready;
  logic [DW-1:0]      q_data;

  conv #(.DW(DW), .WW(WW), .K(1), .PAD(0), .H(H), .W(W), .C(C), .F(CH), .LAYER_ID(LAYER_ID)) u_conv1 (
    .clk, .rst_n, .in_valid, .in_ready, .in_data,
    .out_valid(p_valid[0]), .out_ready(p_ready[0]), .out_data(p_data[0]),
    .wt_we, .wt_layer, .wt_addr, .wt_data);

  for (genvar s = 0; s < 3; s++) begin : g_stage
    logic [1:0]         k_valid, k_ready;
    logic [1:0][DW-1:0] k_data;

    stream_fork #(.DW(DW), .N_OUT(2)) u_fork (
      .clk, .rst_n, .in_valid(p_valid[s]), .in_ready(p_ready[s]), .in_data(p_data[s]),
      .out_valid(k_valid), .out_ready(k_ready), .out_data(k_data));

    if (s == 0) begin : g_direct
      assign j_valid[0] = k_valid[0];
      assign j_data[0]  = k_data[0];
      assign k_ready[0] = j_ready[0];
    end else begin : g_fifo
      stream_fifo #(.DW(DW), .DEPTH(MAP)) u_fifo (
        .clk, .rst_n, .in_valid(k_valid[0]), .in_ready(k_ready[0]), .in_data(k_data[0]),
        .out_valid(j_valid[s]), .out_ready(j_ready[s]), .out_data(j_data[s]));
    end

    assign m_valid[s] = k_valid[1];
    assign m_data[s]  = k_data[1];
    assign k_ready[1] = m_ready[s];

    maxpool #(.DW(DW), .K(5), .STRIDE(1), .PAD(2), .H(H), .W(W), .C(CH)) u_mp (
      .clk, .rst_n, .in_valid(m_valid[s]), .in_ready(m_ready[s]), .in_data(m_data[s]),
      .out_valid(p_valid[s+1]), .out_ready(p_ready[s+1]), .out_data(p_data[s+1]));
  end

  stream_fifo #(.DW(DW), .DEPTH(MAP)) u_fifo3 (
    .clk, .rst_n, .in_valid(p_valid[3]), .in_ready(p_ready[3]), .in_data(p_data[3]),
    .out_valid(j_valid[3]), .out_ready(j_ready[3]), .out_data(j_data[3]));

  concat #(.DW(DW), .N_IN(4), .C(CH), .DEPTH(MAP)) u_concat (
    .clk, .rst_n, .in_valid(j_valid), .in_ready(j_ready), .in_data(j_data),
    .out_valid(q_valid), .out_ready(q_ready), .out_data(q_data));

  conv #(.DW(DW), .WW(WW), .K(1), .PAD(0), .H(H), .W(W), .C(4 * CH), .F(C), .LAYER_ID(LAYER_ID + 1)) u_conv2 (
    .clk, .rst_n, .in_valid(q_valid), .in_ready(q_ready), .in_data(q_data),
    .out_valid, .out_ready, .out_data,
    .wt_we, .wt_layer, .wt_addr, .wt_data);
endmodule
