// sliding_window: turns an NHWC activation stream into K x K windows.
// This is the front end shared by convolution and max pooling. The input
// frame is walked in its zero-padded coordinates (row r, column c, channel
// ch); at padding positions a constant PADVAL is inserted and no input word
// is consumed. K-1 line buffers hold the last K-1 padded rows, (K-1) x WP x C
// words, so each step reads a vertical column of K words for (c, ch). Because
// channels are interleaved, the window column registers are C words deep: the
// column seen at channel ch is kept until the same channel of the next pixel.
// A window is emitted for a position when the K x K neighbourhood is complete
// and the position lies on the STRIDE grid; one window of one channel per
// beat, element (i, j) at out_win[i*K+j], row i=0 and column j=0 oldest.
// Output is a register: one step per cycle when the output is not stalled.
// The line-buffer/shift-register structure follows the paper; padding and
// stride handling are this design's own.
module sliding_window #(
  parameter int unsigned DW     = satay_pkg::DW,
  parameter int unsigned K      = 3,
  parameter int unsigned STRIDE = 1,
  parameter int unsigned PAD    = 1,
  parameter int unsigned H      = 8,
  parameter int unsigned W      = 8,
  parameter int unsigned C      = 4,
  parameter logic [DW-1:0] PADVAL = '0
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic [DW-1:0]           in_data,
  output logic                    out_valid,
  input  logic                    out_ready,
  output logic [K*K-1:0][DW-1:0]  out_win
);
  localparam int unsigned HP  = H + 2 * PAD;
  localparam int unsigned WP  = W + 2 * PAD;
  localparam int unsigned NLB = (K > 1) ? K - 1 : 1;   // line buffers
  localparam int unsigned LBD = WP * C;                // words per line buffer
  localparam int unsigned RW  = $clog2(HP + 1);
  localparam int unsigned XW  = $clog2(WP + 1);
  localparam int unsigned CHW = (C > 1) ? $clog2(C) : 1;
  localparam int unsigned LAW = $clog2(LBD + 1);

  logic [RW-1:0]  r;
  logic [XW-1:0]  c;
  logic [CHW-1:0] ch;

  logic [DW-1:0] lb  [NLB][LBD];          // line buffers, lb[0] oldest row
  logic [K-1:0][DW-1:0] colreg [NLB][C];  // column registers, [0] newest column

  logic is_pad, emit, step;
  logic [DW-1:0] x;
  logic [K-1:0][DW-1:0] col;              // col[K-1] is the current row
  logic [K*K-1:0][DW-1:0] win;
  logic [LAW-1:0] la;

  assign is_pad = (r < RW'(PAD)) || (r >= RW'(H + PAD)) ||
                  (c < XW'(PAD)) || (c >= XW'(W + PAD));
  assign x  = is_pad ? PADVAL : in_data;
  assign la = LAW'(c) * LAW'(C) + LAW'(ch);
  assign emit = (r >= RW'(K - 1)) && (c >= XW'(K - 1)) &&
                (((r - RW'(K - 1)) % RW'(STRIDE)) == '0) &&
                (((c - XW'(K - 1)) % XW'(STRIDE)) == '0);
  assign in_ready = !is_pad && (!emit || !out_valid || out_ready);
  assign step = (is_pad || in_valid) && (!emit || !out_valid || out_ready);

  always_comb begin
    col[K-1] = x;
    for (int i = 0; i < int'(K) - 1; i++) col[i] = lb[i][la];
    for (int i = 0; i < int'(K); i++) begin
      win[i*K + K - 1] = col[i];
      for (int j = 0; j < int'(K) - 1; j++)
        win[i*K + K - 2 - j] = colreg[j][ch][i];
    end
  end

  // position counters over the padded frame
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      r <= '0; c <= '0; ch <= '0;
    end else if (step) begin
      if (ch == CHW'(C - 1)) begin
        ch <= '0;
        if (c == XW'(WP - 1)) begin
          c <= '0;
          r <= (r == RW'(HP - 1)) ? '0 : r + 1'b1;
        end else c <= c + 1'b1;
      end else ch <= ch + 1'b1;
    end
  end

  // line buffers and window column registers (no reset: filled before use)
  always_ff @(posedge clk) begin
    if (step && K > 1) begin
      for (int i = 0; i < int'(K) - 2; i++) lb[i][la] <= lb[i+1][la];
      lb[NLB-1][la] <= x;
      colreg[0][ch] <= col;
      for (int j = 1; j < int'(K) - 1; j++) colreg[j][ch] <= colreg[j-1][ch];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else if (step && emit) out_valid <= 1'b1;
    else if (out_ready) out_valid <= 1'b0;
  end

  always_ff @(posedge clk) begin
    if (step && emit) out_win <= win;
  end
endmodule
