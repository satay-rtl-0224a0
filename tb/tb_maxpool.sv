// tb_maxpool: self-checking testbench of maxpool.
// Max pooling 5x5, stride 1, padding 2 on a 7x6x3 map (the SPPF configuration).
// The same input map is streamed twice. Pass 1 drives random valid gaps and
// random output back-pressure; pass 2 runs at full rate and its cycle count,
// from the first input word to the last output word, is checked against
// the model H*W*C/p plus the padded border the window generator walks (slack). Every output word is compared with the reference model of
// satay_ref_pkg. A watchdog ends the run with a failure if it hangs.
module tb_maxpool;
  import satay_ref_pkg::*;
  localparam int H = 7;
  localparam int W = 6;
  localparam int C = 3;
  localparam int WATCHDOG = 200000;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        in_valid, in_ready, out_valid, out_ready;
  logic [15:0] in_data, out_data;
  logic        wt_we = 1'b0;
  logic [7:0]  wt_layer = '0;
  logic [23:0] wt_addr = '0;
  logic [7:0]  wt_data = '0;

  maxpool #(.K(5), .STRIDE(1), .PAD(2), .H(H), .W(W), .C(C)) dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_data,
    .out_valid, .out_ready, .out_data);

  int checks = 0, failures = 0;
  arr_t stim, expv;
  int got[$];
  int ip = 0;
  bit running = 1'b0, stalls = 1'b1;
  bit gate_in = 1'b0, gate_out = 1'b0;
  longint cyc = 0, t_first = -1, t_last = -1;

  assign in_valid  = running && gate_in && (ip < stim.size());
  assign in_data   = (ip < stim.size()) ? 16'(stim[ip]) : '0;
  assign out_ready = gate_out;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (!(in_valid && !in_ready)) gate_in <= !stalls || ($urandom % 4 != 0);
    gate_out <= !stalls || ($urandom % 3 != 0);
    if (in_valid && in_ready) begin
      if (t_first < 0) t_first <= cyc;
      ip <= ip + 1;
    end
    if (out_valid && out_ready) begin
      got.push_back(int'(signed'(out_data)));
      t_last <= cyc;
    end
  end

  task automatic load_layer(int layer, int n);
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      wt_we = 1'b1; wt_layer = 8'(layer); wt_addr = 24'(i); wt_data = 8'(wgen(layer, i));
    end
    @(negedge clk);
    wt_we = 1'b0;
  endtask

  task automatic run_pass(bit with_stalls);
    @(negedge clk);
    stalls = with_stalls; got.delete(); ip = 0; t_first = -1; t_last = -1;
    running = 1'b1;
    wait (got.size() >= expv.size());
    @(negedge clk);
    running = 1'b0;
    for (int i = 0; i < expv.size(); i++) begin
      checks++;
      if (got[i] !== expv[i]) begin
        failures++;
        if (failures < 10) $display("mismatch pass %0d word %0d: got %0d expected %0d", with_stalls ? 1 : 2, i, got[i], expv[i]);
      end
    end
  endtask

  initial begin
    stim = rand_map(H * W * C, -3000, 3000);
    expv = maxpool(stim, H, W, C, 5, 2);
    repeat (4) @(negedge clk);
    rst_n = 1'b1;

    run_pass(1'b1);
    run_pass(1'b0);
    begin
      longint took, model;
      took = t_last - t_first + 1;
      model = H * W * C;
      checks++;
      if (took < model || took > model + model / 8 + 300) begin
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
