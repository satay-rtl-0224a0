// leaky_relu: y = x for x > 0, else ALPHA * x, on Q8.8 activations.
// A constant multiplier forms ALPHA*x (ALPHA in units of 2^-FRAC, default
// 26/256 ~ 0.1) and a multiplexer picks it or x by the sign of x. Registered
// output, one result per cycle, one cycle latency. The multiplier + MUX
// structure is the paper's; the slope value is this design's assumption.
module leaky_relu #(
  parameter int unsigned DW    = satay_pkg::DW,
  parameter int unsigned FRAC  = satay_pkg::FRAC,
  parameter int          ALPHA = 26
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
  logic signed [DW-1:0]    x;
  logic signed [DW+31:0]   scaled;
  logic [DW-1:0]           y;

  assign x      = signed'(in_data);
  assign scaled = ((DW+32)'(x) * (DW+32)'(ALPHA)) >>> FRAC;
  assign y      = (x > 0) ? in_data : scaled[DW-1:0];

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else if (in_valid && in_ready) out_valid <= 1'b1;
    else if (out_ready) out_valid <= 1'b0;
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) out_data <= y;
  end
endmodule
