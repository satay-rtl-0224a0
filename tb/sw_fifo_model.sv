// sw_fifo_model: behavioural model (not synthesisable) of the off-chip
// "software FIFO" that closes a diverted skip connection: a DMA writes the
// stream leaving the chip into DRAM in chunks of CHUNK words, and a second
// DMA streams chunks back once they are complete, in first-in first-out
// order (a chunk is sent only after it has been fully received; the last,
// partial chunk of a frame of FRAME words is sent when the frame is
// complete). The receive side is always ready, as DRAM is large. It counts
// the chunks it has forwarded. Storage is an unbounded queue.
module sw_fifo_model #(
  parameter int CHUNK = 256,
  parameter int FRAME = 1024
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  logic [15:0] in_data,
  output logic        out_valid,
  input  logic        out_ready,
  output logic [15:0] out_data,
  output int          chunks_sent
);
  logic [15:0] mem [$];
  int received = 0, sent = 0, avail;

  assign in_ready = 1'b1;
  always_comb begin
    avail = (received % FRAME == 0) ? received : (received / CHUNK) * CHUNK;
    // a completed frame releases its partial tail chunk
    if ((received / FRAME) * FRAME > avail) avail = (received / FRAME) * FRAME;
  end
  assign out_valid = rst_n && (sent < avail);
  assign out_data  = (mem.size() > 0) ? mem[0] : '0;

  always @(posedge clk) begin
    if (!rst_n) begin
      mem.delete(); received <= 0; sent <= 0; chunks_sent <= 0;
    end else begin
      if (out_valid && out_ready) begin
        void'(mem.pop_front());
        sent <= sent + 1;
        if ((sent + 1) % CHUNK == 0 || (sent + 1) % FRAME == 0) chunks_sent <= chunks_sent + 1;
      end
      if (in_valid) begin
        mem.push_back(in_data);
        received <= received + 1;
      end
    end
  end
endmodule
