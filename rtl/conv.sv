// conv: K x K convolution of an NHWC stream, F output channels.
// A sliding_window delivers one K x K window per (output position, input
// channel). The matrix-vector engine holds that window for F/PF cycles; in
// each cycle PF filters are evaluated, each a dot product of the window with
// the K*K weights of (filter, channel), i.e. K*K*PF multipliers. Partial sums
// are accumulated over the C input channels in one accumulator per filter.
// During the last input channel each finished filter group is requantised
// (arithmetic shift right by SHIFT, saturation to 16 bits) into an output
// buffer, which then streams out the F results of the position in filter
// order. A position therefore costs C*F/PF cycles, the paper's latency model.
// Weights live in an on-chip array loaded through the wt_* port: a write
// whose wt_layer equals LAYER_ID stores wt_data at index
// wt_addr = (f*C + c)*K*K + i*K + j. The paper places weights on chip and
// describes the window / multiplier array / accumulation structure; the
// filter-parallel engine organisation, the loading port, the shift
// requantisation and the absence of a bias are this design's own choices.
// The output buffer is reused only after it has drained, so a layer with a
// single input channel waits F cycles per position for it.
module conv #(
  parameter int unsigned DW       = satay_pkg::DW,
  parameter int unsigned WW       = satay_pkg::WW,
  parameter int unsigned K        = 3,
  parameter int unsigned STRIDE   = 1,
  parameter int unsigned PAD      = 1,
  parameter int unsigned H        = 8,
  parameter int unsigned W        = 8,
  parameter int unsigned C        = 4,
  parameter int unsigned F        = 4,
  parameter int unsigned PF       = 1,
  parameter int unsigned SHIFT    = 7,
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
  localparam int unsigned KK   = K * K;
  localparam int unsigned NG   = F / PF;                          // filter groups
  localparam int unsigned ACCW = DW + WW + $clog2(KK * C + 1) + 1;
  localparam int unsigned CHW  = (C > 1) ? $clog2(C) : 1;
  localparam int unsigned GW   = (NG > 1) ? $clog2(NG) : 1;
  localparam int unsigned FW   = (F > 1) ? $clog2(F) : 1;

  // ---------------- weights ----------------
  logic signed [WW-1:0] wmem [F][C][KK];

  always_ff @(posedge clk) begin
    if (wt_we && wt_layer == 8'(LAYER_ID) && wt_addr < 24'(F * C * KK))
      wmem[wt_addr / 24'(C * KK)][(wt_addr / 24'(KK)) % 24'(C)][wt_addr % 24'(KK)] <= wt_data;
  end

  // ---------------- window generator ----------------
  logic                  sw_valid, sw_ready;
  logic [KK-1:0][DW-1:0] sw_win;

  sliding_window #(.DW(DW), .K(K), .STRIDE(STRIDE), .PAD(PAD), .H(H), .W(W), .C(C)) u_sw (
    .clk, .rst_n, .in_valid, .in_ready, .in_data,
    .out_valid(sw_valid), .out_ready(sw_ready), .out_win(sw_win));

  // ---------------- matrix-vector engine ----------------
  logic                  busy;
  logic [KK-1:0][DW-1:0] win_r;
  logic [CHW-1:0]        ch;
  logic [GW-1:0]         fg;
  logic signed [ACCW-1:0] acc [F];
  logic signed [ACCW-1:0] dot [PF];
  logic                  last_g, last_ch, step;

  logic [F-1:0][DW-1:0]  obuf;
  logic                  obuf_valid;
  logic [FW-1:0]         oidx;

  assign last_g  = (fg == GW'(NG - 1));
  assign last_ch = (ch == CHW'(C - 1));
  assign step    = busy && !(last_ch && obuf_valid);
  assign sw_ready = !busy || (step && last_g);

  always_comb begin
    for (int p = 0; p < int'(PF); p++) begin
      dot[p] = '0;
      for (int k = 0; k < int'(KK); k++)
        dot[p] += ACCW'(signed'(win_r[k])) *
                  ACCW'(wmem[int'(fg) * int'(PF) + p][ch][k]);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy <= 1'b0; fg <= '0; ch <= '0;
    end else begin
      if (sw_valid && sw_ready) begin
        busy  <= 1'b1;
        win_r <= sw_win;
      end else if (step && last_g) busy <= 1'b0;
      if (step) begin
        if (last_g) begin
          fg <= '0;
          ch <= last_ch ? '0 : ch + 1'b1;
        end else fg <= fg + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (step)
      for (int p = 0; p < int'(PF); p++)
        acc[int'(fg) * int'(PF) + p] <= (ch == '0) ? dot[p]
                                         : acc[int'(fg) * int'(PF) + p] + dot[p];
  end

  // ---------------- output buffer ----------------
  always_ff @(posedge clk) begin
    if (step && last_ch)
      for (int p = 0; p < int'(PF); p++)
        obuf[int'(fg) * int'(PF) + p] <= satay_pkg::sat_act(
          64'(((C == 1) ? dot[p] : acc[int'(fg) * int'(PF) + p] + dot[p]) >>> SHIFT));
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      obuf_valid <= 1'b0; oidx <= '0;
    end else if (step && last_ch && last_g) begin
      obuf_valid <= 1'b1; oidx <= '0;
    end else if (out_valid && out_ready) begin
      if (oidx == FW'(F - 1)) obuf_valid <= 1'b0;
      oidx <= oidx + 1'b1;
    end
  end

  assign out_valid = obuf_valid;
  assign out_data  = obuf[oidx];

  initial assert (F % PF == 0) else $error("conv: F must be a multiple of PF");
endmodule
