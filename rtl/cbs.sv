// cbs: "Conv-BN-activation" block: a conv followed by an activation.
// Batch normalisation is assumed folded into the convolution weights. The
// activation is HardSwish by default, the hardware-friendly stand-in for
// SiLU; ACT_LEAKY selects Leaky ReLU (YOLOv3-style networks) and ACT_NONE
// leaves the convolution output as is. Padding is K/2 ("same" padding), so
// the output map is ceil(H/STRIDE) x ceil(W/STRIDE) x F. Stream in, stream
// out; weights are loaded through the wt_* port into the conv whose
// LAYER_ID matches.
module cbs
#(
  parameter int unsigned DW       = satay_pkg::DW,
  parameter int unsigned WW       = satay_pkg::WW,
  parameter int unsigned K        = 3,
  parameter int unsigned STRIDE   = 1,
  parameter int unsigned H        = 8,
  parameter int unsigned W        = 8,
  parameter int unsigned C        = 4,
  parameter int unsigned F        = 4,
  parameter int unsigned PF       = 1,
  parameter int unsigned SHIFT    = 7,
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
  logic          c_valid, c_ready;
  logic [DW-1:0] c_data;

  conv #(.DW(DW), .WW(WW), .K(K), .STRIDE(STRIDE), .PAD(K / 2), .H(H), .W(W), .C(C),
         .F(F), .PF(PF), .SHIFT(SHIFT), .LAYER_ID(LAYER_ID)) u_conv (
    .clk, .rst_n, .in_valid, .in_ready, .in_data,
    .out_valid(c_valid), .out_ready(c_ready), .out_data(c_data),
    .wt_we, .wt_layer, .wt_addr, .wt_data);

  if (ACT == satay_pkg::ACT_HARDSWISH) begin : g_hswish
    hardswish #(.DW(DW)) u_act (
      .clk, .rst_n, .in_valid(c_valid), .in_ready(c_ready), .in_data(c_data),
      .out_valid, .out_ready, .out_data);
  end else if (ACT == satay_pkg::ACT_LEAKY) begin : g_leaky
    leaky_relu #(.DW(DW)) u_act (
      .clk, .rst_n, .in_valid(c_valid), .in_ready(c_ready), .in_data(c_data),
      .out_valid, .out_ready, .out_data);
  end else begin : g_none
    assign out_valid = c_valid;
    assign c_ready   = out_ready;
    assign out_data  = c_data;
  end
endmodule
