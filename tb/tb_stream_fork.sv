// tb_stream_fork: self-checking testbench of stream_fork.
// One stream of 200 words copied to three consumers with independent back-pressure.
// Each input stream gets its own random valid gaps and each output its own
// random back-pressure (pass 1), then everything runs at full rate (pass 2)
// and the cycle count is checked against one word per cycle. Every word on every
// output is compared with a reference computed in the testbench. A watchdog
// ends the run with a failure if it hangs.
module tb_stream_fork;
  import satay_ref_pkg::*;
  localparam int N = 200;
  localparam int NI = 1;
  localparam int NO = 3;
  localparam int WATCHDOG = 200000;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [NI-1:0]        in_valid, in_ready;
  logic [NI-1:0][15:0]  in_data;
  logic [NO-1:0]        out_valid, out_ready;
  logic [NO-1:0][16-1:0] out_data;

  stream_fork #(.N_OUT(3)) dut (.clk, .rst_n, .in_valid(in_valid[0]), .in_ready(in_ready[0]),
    .in_data(in_data[0]), .out_valid, .out_ready, .out_data);

  int checks = 0, failures = 0;
  arr_t stim [NI];
  arr_t expv [NO];
  int got [NO][$];
  int ip [NI];
  bit running = 1'b0, stalls = 1'b1;
  logic [NI-1:0] gate_in = '0;
  logic [NO-1:0] gate_out = '0;
  longint cyc = 0, t_first = -1, t_last = -1;

  always_comb
    for (int i = 0; i < NI; i++) begin
      in_valid[i] = running && gate_in[i] && (ip[i] < stim[i].size());
      in_data[i]  = (ip[i] < stim[i].size()) ? 16'(stim[i][ip[i]]) : '0;
    end
  assign out_ready = gate_out;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    for (int i = 0; i < NI; i++) begin
      if (!(in_valid[i] && !in_ready[i])) gate_in[i] <= !stalls || ($urandom % 4 != 0);
      if (in_valid[i] && in_ready[i]) begin
        if (t_first < 0) t_first <= cyc;
        ip[i] <= ip[i] + 1;
      end
    end
    for (int o = 0; o < NO; o++) begin
      gate_out[o] <= !stalls || ($urandom % 3 != 0);
      if (out_valid[o] && out_ready[o]) begin
        got[o].push_back(int'(signed'(out_data[o])));
        t_last <= cyc;
      end
    end
  end

  function automatic bit all_done();
    for (int o = 0; o < NO; o++) if (got[o].size() < expv[o].size()) return 1'b0;
    return 1'b1;
  endfunction

  task automatic run_pass(bit with_stalls);
    @(negedge clk);
    stalls = with_stalls; t_first = -1; t_last = -1;
    for (int i = 0; i < NI; i++) ip[i] = 0;
    for (int o = 0; o < NO; o++) got[o].delete();
    running = 1'b1;
    while (!all_done()) @(negedge clk);
    @(negedge clk);
    running = 1'b0;
    for (int o = 0; o < NO; o++)
      for (int i = 0; i < expv[o].size(); i++) begin
        checks++;
        if (got[o][i] !== expv[o][i]) begin
          failures++;
          if (failures < 10) $display("mismatch out %0d word %0d: got %0d expected %0d", o, i, got[o][i], expv[o][i]);
        end
      end
  endtask

  initial begin
    stim[0] = rand_map(N, -32768, 32767);
    for (int o = 0; o < NO; o++) expv[o] = stim[0];
    repeat (4) @(negedge clk);
    rst_n = 1'b1;

    run_pass(1'b1);
    run_pass(1'b0);
    begin
      longint took, model;
      took = t_last - t_first + 1;
      model = N;
      checks++;
      if (took < model || took > model + model / 8 + 16) begin
        failures++;
        $display("cycle count %0d outside model %0d", took, model);
      end else $display("cycles %0d, model %0d", took, model);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
