// hardswish: y = x * RELU6(x + 3) / 6 on Q8.8 activations, stream in/out.
// The datapath is ADD 3 -> CLIP to [0, 6] -> DIV 6 -> multiply by x. The
// division by the constant 6 is a multiplication by round(2^16/6) followed by
// a 16-bit shift, so the block uses two multipliers. The product is shifted
// back to Q8.8 (rounding toward minus infinity) and saturated. Registered
// output, one result per cycle, one cycle latency. The operator chain is the
// paper's; the fixed-point format and rounding are this design's choice.
module hardswish #(
  parameter int unsigned DW   = satay_pkg::DW,
  parameter int unsigned FRAC = satay_pkg::FRAC
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
  localparam int signed  THREE = 3 << FRAC;
  localparam int signed  SIX   = 6 << FRAC;
  localparam longint     INV6  = (65536 + 3) / 6;   // round(2^16 / 6)

  longint x, t, d, y;

  always_comb begin
    x = longint'(signed'(in_data));
    t = x + longint'(THREE);                       // ADD 3
    if (t < 0) t = 0;                              // CLIP
    if (t > longint'(SIX)) t = longint'(SIX);
    d = (t * INV6) >>> 16;                         // DIV 6
    y = (x * d) >>> FRAC;                          // multiply
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else if (in_valid && in_ready) out_valid <= 1'b1;
    else if (out_ready) out_valid <= 1'b0;
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) out_data <= satay_pkg::sat_act(64'(y));
  end
endmodule
