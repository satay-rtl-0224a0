// satay_yolov5_top: complete streaming YOLOv5 accelerator, one block per
// network layer, every block running concurrently on its own part of the
// image. The input image streams in (NHWC, 3 channels, IMG x IMG); the
// three detection heads stream out their maps (IMG/8, IMG/16 and IMG/32
// square, N_OUT_HEAD channels each). All weights stay on chip and are loaded
// beforehand through the wt_* port (layer id + index).
//
// Layer graph (YOLOv5, widths from CW, bottleneck counts N2..N8):
//   backbone: CBS s2 -> CBS s2 -> C3 -> CBS s2 -> C3 (P3) -> CBS s2 ->
//             C3 (P4) -> CBS s2 -> C3 -> SPPF
//   neck:     CBS 1x1 (A) -> resize -> concat P4 -> C3 -> CBS 1x1 (B) ->
//             resize -> concat P3 -> C3 -> head 0
//             -> CBS s2 -> concat B -> C3 -> head 1
//             -> CBS s2 -> concat A -> C3 -> head 2
// P3 and P4 wait in on-chip FIFOs. The two longest skip connections (A and
// B) leave the chip through im_out[0] / im_out[1] and come back through
// im_in[0] / im_in[1]: outside, a buffer in DRAM (moved by DMA in chunks)
// closes the loop; any FIFO may be attached there instead. A head is a plain
// 1x1 convolution.
// Layer ids: 0 CBS, 1 CBS, 2.. C3, then sequentially (see localparams).
// On-chip skip FIFOs hold a whole feature map; the paper sizes them from
// simulated occupancy instead.
module satay_yolov5_top #(
  parameter int unsigned DW         = satay_pkg::DW,
  parameter int unsigned WW         = satay_pkg::WW,
  parameter int unsigned IMG        = 640,
  parameter int unsigned CW         = 16,
  parameter int unsigned N2         = 1,
  parameter int unsigned N4         = 2,
  parameter int unsigned N6         = 3,
  parameter int unsigned N8         = 1,
  parameter int unsigned NH         = 1,
  parameter int unsigned N_OUT_HEAD = 255
) (
  input  logic                clk,
  input  logic                rst_n,
  // image in
  input  logic                in_valid,
  output logic                in_ready,
  input  logic [DW-1:0]       in_data,
  // weight loading
  input  logic                wt_we,
  input  logic [7:0]          wt_layer,
  input  logic [23:0]         wt_addr,
  input  logic [WW-1:0]       wt_data,
  // detection heads 0..2
  output logic [2:0]          head_valid,
  input  logic [2:0]          head_ready,
  output logic [2:0][DW-1:0]  head_data,
  // skip connections diverted off chip
  output logic [1:0]          im_out_valid,
  input  logic [1:0]          im_out_ready,
  output logic [1:0][DW-1:0]  im_out_data,
  input  logic [1:0]          im_in_valid,
  output logic [1:0]          im_in_ready,
  input  logic [1:0][DW-1:0]  im_in_data
);
  // feature map sizes and widths
  localparam int unsigned S1 = IMG / 2,  S2 = IMG / 4, S3 = IMG / 8, S4 = IMG / 16, S5 = IMG / 32;
  localparam int unsigned C1 = CW, C2 = 2 * CW, C3W = 4 * CW, C4 = 8 * CW, C5 = 16 * CW;
  // layer ids
  localparam int unsigned ID_L0  = 0;
  localparam int unsigned ID_L1  = 1;
  localparam int unsigned ID_L2  = 2;
  localparam int unsigned ID_L3  = ID_L2 + 3 + 2 * N2;
  localparam int unsigned ID_L4  = ID_L3 + 1;
  localparam int unsigned ID_L5  = ID_L4 + 3 + 2 * N4;
  localparam int unsigned ID_L6  = ID_L5 + 1;
  localparam int unsigned ID_L7  = ID_L6 + 3 + 2 * N6;
  localparam int unsigned ID_L8  = ID_L7 + 1;
  localparam int unsigned ID_L9  = ID_L8 + 3 + 2 * N8;   // SPPF (2 ids)
  localparam int unsigned ID_L10 = ID_L9 + 2;
  localparam int unsigned ID_L13 = ID_L10 + 1;
  localparam int unsigned ID_L14 = ID_L13 + 3 + 2 * NH;
  localparam int unsigned ID_L17 = ID_L14 + 1;
  localparam int unsigned ID_H0  = ID_L17 + 3 + 2 * NH;
  localparam int unsigned ID_L18 = ID_H0 + 1;
  localparam int unsigned ID_L20 = ID_L18 + 1;
  localparam int unsigned ID_H1  = ID_L20 + 3 + 2 * NH;
  localparam int unsigned ID_L21 = ID_H1 + 1;
  localparam int unsigned ID_L23 = ID_L21 + 1;
  localparam int unsigned ID_H2  = ID_L23 + 3 + 2 * NH;
  localparam int unsigned N_LAYERS = ID_H2 + 1;

  // One stream per numbered connection: v/r/d[n] is the output of layer n.
  logic [23:0]          v, r;
  logic [23:0][DW-1:0]  d;

`define SATAY_WT .wt_we(wt_we), .wt_layer(wt_layer), .wt_addr(wt_addr), .wt_data(wt_data)
`define SATAY_IO(a, b) .clk(clk), .rst_n(rst_n), .in_valid(v[a]), .in_ready(r[a]), .in_data(d[a]), \
                       .out_valid(v[b]), .out_ready(r[b]), .out_data(d[b])

  // connection 23 is the image input
  assign v[23]    = in_valid;
  assign in_ready = r[23];
  assign d[23]    = in_data;

  // ---------------- backbone ----------------
  cbs #(.K(3), .STRIDE(2), .H(IMG), .W(IMG), .C(3), .F(C1), .LAYER_ID(ID_L0))
    u_l0 (`SATAY_IO(23, 0), `SATAY_WT);
  cbs #(.K(3), .STRIDE(2), .H(S1), .W(S1), .C(C1), .F(C2), .LAYER_ID(ID_L1))
    u_l1 (`SATAY_IO(0, 1), `SATAY_WT);
  c3  #(.H(S2), .W(S2), .C_IN(C2), .C_OUT(C2), .N(N2), .LAYER_ID(ID_L2))
    u_l2 (`SATAY_IO(1, 2), `SATAY_WT);
  cbs #(.K(3), .STRIDE(2), .H(S2), .W(S2), .C(C2), .F(C3W), .LAYER_ID(ID_L3))
    u_l3 (`SATAY_IO(2, 3), `SATAY_WT);

  // C3 -> P3 (fork: onward + FIFO to the neck)
  logic               l4_v;  logic l4_r;  logic [DW-1:0] l4_d;
  logic [1:0]         f4_v, f4_r;  logic [1:0][DW-1:0] f4_d;
  logic               p3_v, p3_r;  logic [DW-1:0] p3_d;
  c3  #(.H(S3), .W(S3), .C_IN(C3W), .C_OUT(C3W), .N(N4), .LAYER_ID(ID_L4))
    u_l4 (.clk, .rst_n, .in_valid(v[3]), .in_ready(r[3]), .in_data(d[3]),
          .out_valid(l4_v), .out_ready(l4_r), .out_data(l4_d), `SATAY_WT);
  stream_fork #(.N_OUT(2)) u_f4 (.clk, .rst_n, .in_valid(l4_v), .in_ready(l4_r), .in_data(l4_d),
                                 .out_valid(f4_v), .out_ready(f4_r), .out_data(f4_d));
  assign v[4] = f4_v[0];  assign d[4] = f4_d[0];  assign f4_r[0] = r[4];
  stream_fifo #(.DEPTH(S3 * S3 * C3W)) u_p3 (
    .clk, .rst_n, .in_valid(f4_v[1]), .in_ready(f4_r[1]), .in_data(f4_d[1]),
    .out_valid(p3_v), .out_ready(p3_r), .out_data(p3_d));

  cbs #(.K(3), .STRIDE(2), .H(S3), .W(S3), .C(C3W), .F(C4), .LAYER_ID(ID_L5))
    u_l5 (`SATAY_IO(4, 5), `SATAY_WT);

  // C3 -> P4
  logic               l6_v;  logic l6_r;  logic [DW-1:0] l6_d;
  logic [1:0]         f6_v, f6_r;  logic [1:0][DW-1:0] f6_d;
  logic               p4_v, p4_r;  logic [DW-1:0] p4_d;
  c3  #(.H(S4), .W(S4), .C_IN(C4), .C_OUT(C4), .N(N6), .LAYER_ID(ID_L6))
    u_l6 (.clk, .rst_n, .in_valid(v[5]), .in_ready(r[5]), .in_data(d[5]),
          .out_valid(l6_v), .out_ready(l6_r), .out_data(l6_d), `SATAY_WT);
  stream_fork #(.N_OUT(2)) u_f6 (.clk, .rst_n, .in_valid(l6_v), .in_ready(l6_r), .in_data(l6_d),
                                 .out_valid(f6_v), .out_ready(f6_r), .out_data(f6_d));
  assign v[6] = f6_v[0];  assign d[6] = f6_d[0];  assign f6_r[0] = r[6];
  stream_fifo #(.DEPTH(S4 * S4 * C4)) u_p4 (
    .clk, .rst_n, .in_valid(f6_v[1]), .in_ready(f6_r[1]), .in_data(f6_d[1]),
    .out_valid(p4_v), .out_ready(p4_r), .out_data(p4_d));

  cbs #(.K(3), .STRIDE(2), .H(S4), .W(S4), .C(C4), .F(C5), .LAYER_ID(ID_L7))
    u_l7 (`SATAY_IO(6, 7), `SATAY_WT);
  c3  #(.H(S5), .W(S5), .C_IN(C5), .C_OUT(C5), .N(N8), .LAYER_ID(ID_L8))
    u_l8 (`SATAY_IO(7, 8), `SATAY_WT);
  sppf #(.H(S5), .W(S5), .C(C5), .LAYER_ID(ID_L9))
    u_l9 (`SATAY_IO(8, 9), `SATAY_WT);

  // ---------------- neck, top-down ----------------
  // CBS A: fork to resize and off chip (im_out[0])
  logic l10_v, l10_r;  logic [DW-1:0] l10_d;
  logic [1:0] f10_v, f10_r;  logic [1:0][DW-1:0] f10_d;
  cbs #(.K(1), .H(S5), .W(S5), .C(C5), .F(C4), .LAYER_ID(ID_L10))
    u_l10 (.clk, .rst_n, .in_valid(v[9]), .in_ready(r[9]), .in_data(d[9]),
           .out_valid(l10_v), .out_ready(l10_r), .out_data(l10_d), `SATAY_WT);
  stream_fork #(.N_OUT(2)) u_f10 (.clk, .rst_n, .in_valid(l10_v), .in_ready(l10_r), .in_data(l10_d),
                                  .out_valid(f10_v), .out_ready(f10_r), .out_data(f10_d));
  assign v[10] = f10_v[0];  assign d[10] = f10_d[0];  assign f10_r[0] = r[10];
  assign im_out_valid[0] = f10_v[1];  assign im_out_data[0] = f10_d[1];  assign f10_r[1] = im_out_ready[0];

  resize #(.W(S5), .C(C4)) u_l11 (`SATAY_IO(10, 11));

  concat #(.N_IN(2), .C(C4), .DEPTH(2 * C4)) u_l12 (
    .clk, .rst_n, .in_valid({p4_v, v[11]}), .in_ready({p4_r, r[11]}), .in_data({p4_d, d[11]}),
    .out_valid(v[12]), .out_ready(r[12]), .out_data(d[12]));

  c3  #(.H(S4), .W(S4), .C_IN(2 * C4), .C_OUT(C4), .N(NH), .SHORTCUT(1'b0), .LAYER_ID(ID_L13))
    u_l13 (`SATAY_IO(12, 13), `SATAY_WT);

  // CBS B: fork to resize and off chip (im_out[1])
  logic l14_v, l14_r;  logic [DW-1:0] l14_d;
  logic [1:0] f14_v, f14_r;  logic [1:0][DW-1:0] f14_d;
  cbs #(.K(1), .H(S4), .W(S4), .C(C4), .F(C3W), .LAYER_ID(ID_L14))
    u_l14 (.clk, .rst_n, .in_valid(v[13]), .in_ready(r[13]), .in_data(d[13]),
           .out_valid(l14_v), .out_ready(l14_r), .out_data(l14_d), `SATAY_WT);
  stream_fork #(.N_OUT(2)) u_f14 (.clk, .rst_n, .in_valid(l14_v), .in_ready(l14_r), .in_data(l14_d),
                                  .out_valid(f14_v), .out_ready(f14_r), .out_data(f14_d));
  assign v[14] = f14_v[0];  assign d[14] = f14_d[0];  assign f14_r[0] = r[14];
  assign im_out_valid[1] = f14_v[1];  assign im_out_data[1] = f14_d[1];  assign f14_r[1] = im_out_ready[1];

  resize #(.W(S4), .C(C3W)) u_l15 (`SATAY_IO(14, 15));

  concat #(.N_IN(2), .C(C3W), .DEPTH(2 * C3W)) u_l16 (
    .clk, .rst_n, .in_valid({p3_v, v[15]}), .in_ready({p3_r, r[15]}), .in_data({p3_d, d[15]}),
    .out_valid(v[16]), .out_ready(r[16]), .out_data(d[16]));

  // C3 -> head 0 and onward
  logic l17_v, l17_r;  logic [DW-1:0] l17_d;
  logic [1:0] f17_v, f17_r;  logic [1:0][DW-1:0] f17_d;
  c3  #(.H(S3), .W(S3), .C_IN(2 * C3W), .C_OUT(C3W), .N(NH), .SHORTCUT(1'b0), .LAYER_ID(ID_L17))
    u_l17 (.clk, .rst_n, .in_valid(v[16]), .in_ready(r[16]), .in_data(d[16]),
           .out_valid(l17_v), .out_ready(l17_r), .out_data(l17_d), `SATAY_WT);
  stream_fork #(.N_OUT(2)) u_f17 (.clk, .rst_n, .in_valid(l17_v), .in_ready(l17_r), .in_data(l17_d),
                                  .out_valid(f17_v), .out_ready(f17_r), .out_data(f17_d));
  assign v[17] = f17_v[0];  assign d[17] = f17_d[0];  assign f17_r[0] = r[17];
  conv #(.K(1), .PAD(0), .H(S3), .W(S3), .C(C3W), .F(N_OUT_HEAD), .LAYER_ID(ID_H0)) u_head0 (
    .clk, .rst_n, .in_valid(f17_v[1]), .in_ready(f17_r[1]), .in_data(f17_d[1]),
    .out_valid(head_valid[0]), .out_ready(head_ready[0]), .out_data(head_data[0]), `SATAY_WT);

  // ---------------- neck, bottom-up ----------------
  cbs #(.K(3), .STRIDE(2), .H(S3), .W(S3), .C(C3W), .F(C3W), .LAYER_ID(ID_L18))
    u_l18 (`SATAY_IO(17, 18), `SATAY_WT);
  concat #(.N_IN(2), .C(C3W), .DEPTH(2 * C3W)) u_l19 (
    .clk, .rst_n, .in_valid({im_in_valid[1], v[18]}), .in_ready({im_in_ready[1], r[18]}),
    .in_data({im_in_data[1], d[18]}),
    .out_valid(v[19]), .out_ready(r[19]), .out_data(d[19]));

  logic l20_v, l20_r;  logic [DW-1:0] l20_d;
  logic [1:0] f20_v, f20_r;  logic [1:0][DW-1:0] f20_d;
  c3  #(.H(S4), .W(S4), .C_IN(2 * C3W), .C_OUT(C4), .N(NH), .SHORTCUT(1'b0), .LAYER_ID(ID_L20))
    u_l20 (.clk, .rst_n, .in_valid(v[19]), .in_ready(r[19]), .in_data(d[19]),
           .out_valid(l20_v), .out_ready(l20_r), .out_data(l20_d), `SATAY_WT);
  stream_fork #(.N_OUT(2)) u_f20 (.clk, .rst_n, .in_valid(l20_v), .in_ready(l20_r), .in_data(l20_d),
                                  .out_valid(f20_v), .out_ready(f20_r), .out_data(f20_d));
  assign v[20] = f20_v[0];  assign d[20] = f20_d[0];  assign f20_r[0] = r[20];
  conv #(.K(1), .PAD(0), .H(S4), .W(S4), .C(C4), .F(N_OUT_HEAD), .LAYER_ID(ID_H1)) u_head1 (
    .clk, .rst_n, .in_valid(f20_v[1]), .in_ready(f20_r[1]), .in_data(f20_d[1]),
    .out_valid(head_valid[1]), .out_ready(head_ready[1]), .out_data(head_data[1]), `SATAY_WT);

  cbs #(.K(3), .STRIDE(2), .H(S4), .W(S4), .C(C4), .F(C4), .LAYER_ID(ID_L21))
    u_l21 (`SATAY_IO(20, 21), `SATAY_WT);
  concat #(.N_IN(2), .C(C4), .DEPTH(2 * C4)) u_l22 (
    .clk, .rst_n, .in_valid({im_in_valid[0], v[21]}), .in_ready({im_in_ready[0], r[21]}),
    .in_data({im_in_data[0], d[21]}),
    .out_valid(v[22]), .out_ready(r[22]), .out_data(d[22]));

  logic l23_v, l23_r;  logic [DW-1:0] l23_d;
  c3  #(.H(S5), .W(S5), .C_IN(2 * C4), .C_OUT(C5), .N(NH), .SHORTCUT(1'b0), .LAYER_ID(ID_L23))
    u_l23 (.clk, .rst_n, .in_valid(v[22]), .in_ready(r[22]), .in_data(d[22]),
           .out_valid(l23_v), .out_ready(l23_r), .out_data(l23_d), `SATAY_WT);
  conv #(.K(1), .PAD(0), .H(S5), .W(S5), .C(C5), .F(N_OUT_HEAD), .LAYER_ID(ID_H2)) u_head2 (
    .clk, .rst_n, .in_valid(l23_v), .in_ready(l23_r), .in_data(l23_d),
    .out_valid(head_valid[2]), .out_ready(head_ready[2]), .out_data(head_data[2]), `SATAY_WT);

`undef SATAY_WT
`undef SATAY_IO

  initial assert (IMG % 32 == 0 && N_LAYERS <= 256)
    else $error("satay_yolov5_top: IMG must be a multiple of 32");
endmodule
