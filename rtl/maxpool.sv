// maxpool: K x K max pooling of an NHWC stream.
// A sliding_window (padding with the most negative word, so padding never
// wins) feeds a balanced comparator tree over the K*K window elements; the
// maximum is registered. One window per beat, one result per window,
// channels kept in order. Window + comparator-tree structure follows the
// paper; kernel 5 / stride 1 / padding 2 are the defaults of the SPPF use.
module maxpool #(
  parameter int unsigned DW     = satay_pkg::DW,
  parameter int unsigned K      = 5,
  parameter int unsigned STRIDE = 1,
  parameter int unsigned PAD    = 2,
  parameter int unsigned H      = 8,
  parameter int unsigned W      = 8,
  parameter int unsigned C      = 4
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  logic [DW-1:0] in_data,
  output logic          out_valid,
  input  logic          out_ready,
  output logic [DW-1:0] out_data
);
  localparam int unsigned KK = K * K;
  localparam int unsigned LV = $clog2(KK);          // tree levels
  localparam int unsigned NP = 1 << LV;             // leaves, padded to 2^LV
  localparam logic [DW-1:0] NEG = {1'b1, {(DW-1){1'b0}}};

  logic                  sw_valid, sw_ready;
  logic [KK-1:0][DW-1:0] sw_win;
  logic signed [DW-1:0]  tree [LV+1][NP];

  sliding_window #(.DW(DW), .K(K), .STRIDE(STRIDE), .PAD(PAD), .H(H), .W(W), .C(C),
                   .PADVAL(NEG)) u_sw (
    .clk, .rst_n, .in_valid, .in_ready, .in_data,
    .out_valid(sw_valid), .out_ready(sw_ready), .out_win(sw_win));

  // comparator tree: level l+1 holds the pairwise maxima of level l
  always_comb begin
    for (int i = 0; i < int'(NP); i++)
      tree[0][i] = (i < int'(KK)) ? signed'(sw_win[i]) : signed'(NEG);
    for (int l = 0; l < int'(LV); l++)
      for (int i = 0; i < int'(NP); i++)
        tree[l+1][i] = (i < (int'(NP) >> (l + 1)))
                     ? ((tree[l][2*i] > tree[l][2*i+1]) ? tree[l][2*i] : tree[l][2*i+1])
                     : signed'(NEG);
  end

  assign sw_ready = !out_valid || out_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else if (sw_valid && sw_ready) out_valid <= 1'b1;
    else if (out_ready) out_valid <= 1'b0;
  end

  always_ff @(posedge clk) begin
    if (sw_valid && sw_ready) out_data <= tree[LV][0];
  end
endmodule
