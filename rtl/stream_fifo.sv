// stream_fifo: first-in first-out buffer between two ready/valid streams.
// It is the on-chip buffer placed on skip connections and inside the split
// and concat blocks. Words are kept in a circular array with a read and a
// write pointer and an occupancy count; the head word is shown on out_data
// without delay (first-word fall-through), so a word written in one cycle can
// leave in the next. One push and one pop may happen in the same cycle, so a
// stream passes at one word per cycle. in_ready is low only when the FIFO
// holds DEPTH words. The depth is a parameter: the paper sizes these buffers
// from simulated occupancy, the parents in this design give a safe bound.
module stream_fifo #(
  parameter int unsigned DW    = satay_pkg::DW,
  parameter int unsigned DEPTH = 16
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
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CW = $clog2(DEPTH + 1);

  logic [DW-1:0] mem [DEPTH];
  logic [AW-1:0] wr_ptr, rd_ptr;
  logic [CW-1:0] count;
  logic push, pop;

  assign in_ready  = (count != CW'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rd_ptr];
  assign push = in_valid && in_ready;
  assign pop  = out_valid && out_ready;

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= inc(wr_ptr);
      if (pop)  rd_ptr <= inc(rd_ptr);
      if (push && !pop)      count <= count + 1'b1;
      else if (pop && !push) count <= count - 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_data;
  end

  // Handshake rule: a word offered on the output stays until taken.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           out_valid && !out_ready |=> out_valid && $stable(out_data));
endmodule
