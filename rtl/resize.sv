// resize: nearest-neighbour 2x upsampling of an NHWC stream, on the fly.
// Each input row of W pixels (C channels each) becomes two output rows of 2W
// pixels. While an input row arrives, its words pass straight through (first
// copy of each pixel) and are written to a line buffer of W*C words; after
// the C channels of a pixel the same C words are replayed from the buffer
// (second copy). When the row is complete the whole doubled row is replayed
// from the line buffer without consuming input. The output multiplexer thus
// picks between the live input and buffered words, steered by the position
// counters. Input is stalled during replays, so the block takes 4 output
// cycles per input word. The line buffer + MUX structure follows the paper;
// the exact sequencing and the fixed factor of 2 are this design's own.
module resize #(
  parameter int unsigned DW = satay_pkg::DW,
  parameter int unsigned W  = 8,
  parameter int unsigned C  = 4
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
  localparam int unsigned XW  = $clog2(W + 1);
  localparam int unsigned CHW = (C > 1) ? $clog2(C) : 1;
  localparam int unsigned LAW = $clog2(W * C + 1);

  typedef enum logic [1:0] {
    S_PASS,     // first copy of a pixel, from the input
    S_DUP,      // second copy of the pixel, from the line buffer
    S_REPLAY    // second output row, from the line buffer
  } state_e;

  state_e         state;
  logic [XW-1:0]  x;
  logic [CHW-1:0] ch;
  logic           dup;        // which copy of the pixel in S_REPLAY
  logic [DW-1:0]  lb [W * C];
  logic [LAW-1:0] la;
  logic           fire;

  assign la = LAW'(x) * LAW'(C) + LAW'(ch);

  always_comb begin
    if (state == S_PASS) begin
      out_valid = in_valid;
      out_data  = in_data;
      in_ready  = out_ready;
    end else begin
      out_valid = 1'b1;
      out_data  = lb[la];
      in_ready  = 1'b0;
    end
  end
  assign fire = out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (state == S_PASS && fire) lb[la] <= in_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_PASS; x <= '0; ch <= '0; dup <= 1'b0;
    end else if (fire) begin
      ch <= (ch == CHW'(C - 1)) ? '0 : ch + 1'b1;
      if (ch == CHW'(C - 1)) begin
        unique case (state)
          S_PASS: state <= S_DUP;
          S_DUP: begin
            if (x == XW'(W - 1)) begin
              x <= '0; state <= S_REPLAY; dup <= 1'b0;
            end else begin
              x <= x + 1'b1; state <= S_PASS;
            end
          end
          S_REPLAY: begin
            dup <= !dup;
            if (dup) begin
              if (x == XW'(W - 1)) begin
                x <= '0; state <= S_PASS;
              end else x <= x + 1'b1;
            end
          end
          default: state <= S_PASS;
        endcase
      end
    end
  end
endmodule
