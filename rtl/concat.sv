// concat: joins N_IN streams along the channel dimension.
// Every input carries C channels per pixel; the output carries N_IN*C, namely
// the C words of input 0, then the C words of input 1, and so on, pixel by
// pixel. Each input first enters its own stream_fifo (DEPTH words) so that a
// producer that runs ahead is not stalled while the multiplexer serves
// another input; the multiplexer then drains the selected FIFO at one word
// per cycle. FIFOs + stream multiplexer follow the paper; equal channel
// counts on all inputs are this design's simplification (all concatenations
// of the YOLOv5 network have them).
module concat #(
  parameter int unsigned DW    = satay_pkg::DW,
  parameter int unsigned N_IN  = 2,
  parameter int unsigned C     = 4,
  parameter int unsigned DEPTH = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [N_IN-1:0]          in_valid,
  output logic [N_IN-1:0]          in_ready,
  input  logic [N_IN-1:0][DW-1:0]  in_data,
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic [DW-1:0]            out_data
);
  localparam int unsigned SW  = (N_IN > 1) ? $clog2(N_IN) : 1;
  localparam int unsigned CHW = (C > 1) ? $clog2(C) : 1;

  logic [N_IN-1:0]         f_valid, f_ready;
  logic [N_IN-1:0][DW-1:0] f_data;
  logic [SW-1:0]           sel;
  logic [CHW-1:0]          ch;

  for (genvar i = 0; i < N_IN; i++) begin : g_fifo
    stream_fifo #(.DW(DW), .DEPTH(DEPTH)) u_fifo (
      .clk, .rst_n,
      .in_valid(in_valid[i]), .in_ready(in_ready[i]), .in_data(in_data[i]),
      .out_valid(f_valid[i]), .out_ready(f_ready[i]), .out_data(f_data[i]));
  end

  always_comb begin
    f_ready = '0;
    f_ready[sel] = out_ready;
  end
  assign out_valid = f_valid[sel];
  assign out_data  = f_data[sel];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sel <= '0; ch <= '0;
    end else if (out_valid && out_ready) begin
      if (ch == CHW'(C - 1)) begin
        ch  <= '0;
        sel <= (sel == SW'(N_IN - 1)) ? '0 : sel + 1'b1;
      end else ch <= ch + 1'b1;
    end
  end
endmodule
