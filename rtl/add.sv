// add: element-wise sum of two activation streams (residual merge).
// A word pair is taken when both inputs are valid and the registered output
// slot is free or being emptied; the sum saturates to 16 bits (overflow
// handling is this design's choice). One result per cycle, one cycle latency.
module add #(
  parameter int unsigned DW = satay_pkg::DW
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          a_valid,
  output logic          a_ready,
  input  logic [DW-1:0] a_data,
  input  logic          b_valid,
  output logic          b_ready,
  input  logic [DW-1:0] b_data,
  output logic          out_valid,
  input  logic          out_ready,
  output logic [DW-1:0] out_data
);
  logic take, slot;
  assign slot    = !out_valid || out_ready;
  assign take    = a_valid && b_valid && slot;
  assign a_ready = b_valid && slot;
  assign b_ready = a_valid && slot;

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else if (take) out_valid <= 1'b1;
    else if (out_ready) out_valid <= 1'b0;
  end

  always_ff @(posedge clk) begin
    if (take) out_data <= satay_pkg::sat_act(64'(signed'(a_data)) + 64'(signed'(b_data)));
  end
endmodule
