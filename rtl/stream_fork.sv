// stream_fork: copies one ready/valid stream to N_OUT consumers, as drawn
// wherever one block's output feeds two blocks (a skip connection leaves the
// main path). Each output offers the current word until it takes it; a
// per-output "taken" flag records which consumers already have it, and the
// input word is released once all have. Consumers may therefore accept in
// different cycles without being blocked by one another for the same word.
// No storage besides the flags; zero latency.
module stream_fork #(
  parameter int unsigned DW    = satay_pkg::DW,
  parameter int unsigned N_OUT = 2
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  output logic                       in_ready,
  input  logic [DW-1:0]              in_data,
  output logic [N_OUT-1:0]           out_valid,
  input  logic [N_OUT-1:0]           out_ready,
  output logic [N_OUT-1:0][DW-1:0]   out_data
);
  logic [N_OUT-1:0] taken;

  always_comb begin
    in_ready = 1'b1;
    for (int i = 0; i < N_OUT; i++) begin
      out_valid[i] = in_valid && !taken[i];
      out_data[i]  = in_data;
      if (!(taken[i] || out_ready[i])) in_ready = 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) taken <= '0;
    else if (in_valid && in_ready) taken <= '0;
    else
      for (int i = 0; i < N_OUT; i++)
        if (out_valid[i] && out_ready[i]) taken[i] <= 1'b1;
  end
endmodule
