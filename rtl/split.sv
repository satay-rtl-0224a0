// split: separates the channels of a stream into N_OUT streams ("chunk").
// The input carries C channels per pixel; the first C/N_OUT of each pixel go
// to output 0, the next C/N_OUT to output 1, and so on. A demultiplexer
// steered by a channel counter routes each word into the FIFO of its output
// (DEPTH words), so one slow consumer only stalls the input when its own FIFO
// fills. Demultiplexer + FIFOs follow the paper; the equal split is this
// design's choice (the C3 block divides its channels in halves).
module split #(
  parameter int unsigned DW    = satay_pkg::DW,
  parameter int unsigned N_OUT = 2,
  parameter int unsigned C     = 4,
  parameter int unsigned DEPTH = 16
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  output logic                      in_ready,
  input  logic [DW-1:0]             in_data,
  output logic [N_OUT-1:0]          out_valid,
  input  logic [N_OUT-1:0]          out_ready,
  output logic [N_OUT-1:0][DW-1:0]  out_data
);
  localparam int unsigned CO  = C / N_OUT;
  localparam int unsigned SW  = (N_OUT > 1) ? $clog2(N_OUT) : 1;
  localparam int unsigned CHW = (CO > 1) ? $clog2(CO) : 1;

  logic [N_OUT-1:0] f_valid, f_ready;
  logic [SW-1:0]    sel;
  logic [CHW-1:0]   ch;

  always_comb begin
    f_valid = '0;
    f_valid[sel] = in_valid;
  end
  assign in_ready = f_ready[sel];

  for (genvar i = 0; i < N_OUT; i++) begin : g_fifo
    stream_fifo #(.DW(DW), .DEPTH(DEPTH)) u_fifo (
      .clk, .rst_n,
      .in_valid(f_valid[i]), .in_ready(f_ready[i]), .in_data(in_data),
      .out_valid(out_valid[i]), .out_ready(out_ready[i]), .out_data(out_data[i]));
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sel <= '0; ch <= '0;
    end else if (in_valid && in_ready) begin
      if (ch == CHW'(CO - 1)) begin
        ch  <= '0;
        sel <= (sel == SW'(N_OUT - 1)) ? '0 : sel + 1'b1;
      end else ch <= ch + 1'b1;
    end
  end

  initial assert (C % N_OUT == 0) else $error("split: C must divide by N_OUT");
endmodule
