// tb_workload_yolov5n: the YOLOv5n network with its real layer widths
// (base width 16, C3 depths 1/2/3/1, 255 head channels, 1.9 M weights) run
// end to end on a 64x64 image. Same checks as tb_satay_yolov5_top: all
// weights go in through the weight port, the image is streamed with random
// gaps, heads are drained with random back-pressure, both off-chip skip
// connections go through software-FIFO models, every head word is compared
// with the integer reference network, and each mechanism must take place.
// The 640x640 and 320x320 instances differ only in IMG; they are too long to
// simulate but this run covers every layer shape except the spatial size.
module tb_workload_yolov5n;
  import satay_ref_pkg::*;
  localparam int IMG = 64, CW = 16, N2 = 1, N4 = 2, N6 = 3, N8 = 1, NH = 1, NOH = 255;
  localparam int C1 = CW, C2 = 2 * CW, C3W = 4 * CW, C4 = 8 * CW, C5 = 16 * CW;
  localparam int S1 = IMG / 2, S2 = IMG / 4, S3 = IMG / 8, S4 = IMG / 16, S5 = IMG / 32;
  localparam int WATCHDOG = 60000000;
  // layer ids, in the order the accelerator assigns them
  localparam int ID_L2 = 2, ID_L3 = ID_L2 + 3 + 2 * N2, ID_L4 = ID_L3 + 1, ID_L5 = ID_L4 + 3 + 2 * N4;
  localparam int ID_L6 = ID_L5 + 1, ID_L7 = ID_L6 + 3 + 2 * N6, ID_L8 = ID_L7 + 1, ID_L9 = ID_L8 + 3 + 2 * N8;
  localparam int ID_L10 = ID_L9 + 2, ID_L13 = ID_L10 + 1, ID_L14 = ID_L13 + 3 + 2 * NH, ID_L17 = ID_L14 + 1;
  localparam int ID_H0 = ID_L17 + 3 + 2 * NH, ID_L18 = ID_H0 + 1, ID_L20 = ID_L18 + 1;
  localparam int ID_H1 = ID_L20 + 3 + 2 * NH, ID_L21 = ID_H1 + 1, ID_L23 = ID_L21 + 1, ID_H2 = ID_L23 + 3 + 2 * NH;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        in_valid, in_ready;
  logic [15:0] in_data;
  logic        wt_we = 1'b0;
  logic [7:0]  wt_layer = '0;
  logic [23:0] wt_addr = '0;
  logic [7:0]  wt_data = '0;
  logic [2:0]        head_valid, head_ready;
  logic [2:0][15:0]  head_data;
  logic [1:0]        imo_valid, imo_ready, imi_valid, imi_ready;
  logic [1:0][15:0]  imo_data, imi_data;
  int                chunks [2];

  satay_yolov5_top #(.IMG(IMG), .CW(CW), .N2(N2), .N4(N4), .N6(N6), .N8(N8), .NH(NH),
                     .N_OUT_HEAD(NOH)) dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_data, .wt_we, .wt_layer, .wt_addr, .wt_data,
    .head_valid, .head_ready, .head_data,
    .im_out_valid(imo_valid), .im_out_ready(imo_ready), .im_out_data(imo_data),
    .im_in_valid(imi_valid), .im_in_ready(imi_ready), .im_in_data(imi_data));

  // off-chip buffers: connection A (S5 x S5 x C4) and B (S4 x S4 x C3W)
  sw_fifo_model #(.CHUNK(64), .FRAME(S5 * S5 * C4)) u_swf0 (
    .clk, .rst_n, .in_valid(imo_valid[0]), .in_ready(imo_ready[0]), .in_data(imo_data[0]),
    .out_valid(imi_valid[0]), .out_ready(imi_ready[0]), .out_data(imi_data[0]), .chunks_sent(chunks[0]));
  sw_fifo_model #(.CHUNK(64), .FRAME(S4 * S4 * C3W)) u_swf1 (
    .clk, .rst_n, .in_valid(imo_valid[1]), .in_ready(imo_ready[1]), .in_data(imo_data[1]),
    .out_valid(imi_valid[1]), .out_ready(imi_ready[1]), .out_data(imi_data[1]), .chunks_sent(chunks[1]));

  int checks = 0, failures = 0;
  arr_t img, a, b, expv [3];
  int got [3][$];
  int ip = 0;
  bit running = 1'b0, stalls = 1'b1, gate_in = 1'b0;
  logic [2:0] gate_out = '0;
  // mechanism counters
  int n_in_stall = 0, n_head_stall = 0, n_p3_held = 0, n_p4_held = 0, n_replay = 0;
  int n_off [2] = '{0, 0};
  int off_got [2][$];

  assign in_valid   = running && gate_in && (ip < img.size());
  assign in_data    = (ip < img.size()) ? 16'(img[ip]) : '0;
  assign head_ready = gate_out;

  always @(posedge clk) begin
    if (!(in_valid && !in_ready)) gate_in <= !stalls || ($urandom % 4 != 0);
    for (int h = 0; h < 3; h++) begin
      gate_out[h] <= !stalls || ($urandom % 3 != 0);
      if (head_valid[h] && head_ready[h]) got[h].push_back(int'(signed'(head_data[h])));
      if (head_valid[h] && !head_ready[h]) n_head_stall++;
    end
    if (in_valid && in_ready) ip <= ip + 1;
    if (in_valid && !in_ready) n_in_stall++;
    for (int k = 0; k < 2; k++)
      if (rst_n && imo_valid[k] && imo_ready[k]) begin
        n_off[k]++;
        off_got[k].push_back(int'(signed'(imo_data[k])));
      end
    if (dut.u_p3.count != 0) n_p3_held++;
    if (dut.u_p4.count != 0) n_p4_held++;
    // state 2 of resize is its row replay
    if (dut.u_l11.state == 2 || dut.u_l15.state == 2) n_replay++;
  end

  task automatic load_layer(int layer, int n);
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      wt_we = 1'b1; wt_layer = 8'(layer); wt_addr = 24'(i); wt_data = 8'(wgen(layer, i));
    end
    @(negedge clk);
    wt_we = 1'b0;
  endtask

  task automatic load_c3(int id, int ci, int co, int n);
    load_layer(id, (co / 2) * (ci / 2));
    load_layer(id + 1, (co / 2) * (ci / 2));
    for (int i = 0; i < n; i++) begin
      load_layer(id + 2 + 2 * i, (co / 2) * (co / 2));
      load_layer(id + 3 + 2 * i, (co / 2) * (co / 2) * 9);
    end
    load_layer(id + 2 + 2 * n, (co / 2) * (co / 2));
  endtask

  task automatic run_image(bit with_stalls);
    @(negedge clk);
    stalls = with_stalls; ip = 0;
    for (int h = 0; h < 3; h++) got[h].delete();
    running = 1'b1;
    while (!(got[0].size() >= expv[0].size() && got[1].size() >= expv[1].size() &&
             got[2].size() >= expv[2].size())) @(negedge clk);
    running = 1'b0;
    for (int h = 0; h < 3; h++)
      for (int i = 0; i < expv[h].size(); i++) begin
        checks++;
        if (got[h][i] !== expv[h][i]) begin
          failures++;
          if (failures < 10) $display("head %0d word %0d: got %0d expected %0d", h, i, got[h][i], expv[h][i]);
        end
      end
  endtask

  task automatic mech(string what, int n);
    checks++;
    if (n == 0) begin
      failures++;
      $display("mechanism never exercised: %s", what);
    end else $display("%s: %0d", what, n);
  endtask

  initial begin
    arr_t x1, x2, x4, p3, p4, x9, x13, x17, x18, x20, x23;
    longint t0;
    img = rand_map(IMG * IMG * 3, -512, 512);
    // reference network
    x1  = cbs(cbs(img, IMG, IMG, 3, C1, 3, 2, 0), S1, S1, C1, C2, 3, 2, 1);
    x2  = c3(x1, S2, S2, C2, C2, N2, 1'b1, ID_L2);
    p3  = c3(cbs(x2, S2, S2, C2, C3W, 3, 2, ID_L3), S3, S3, C3W, C3W, N4, 1'b1, ID_L4);
    p4  = c3(cbs(p3, S3, S3, C3W, C4, 3, 2, ID_L5), S4, S4, C4, C4, N6, 1'b1, ID_L6);
    x9  = sppf(c3(cbs(p4, S4, S4, C4, C5, 3, 2, ID_L7), S5, S5, C5, C5, N8, 1'b1, ID_L8), S5, S5, C5, ID_L9);
    a   = cbs(x9, S5, S5, C5, C4, 1, 1, ID_L10);
    x13 = c3(cat2(upsample2(a, S5, S5, C4), p4, S4 * S4, C4), S4, S4, 2 * C4, C4, NH, 1'b0, ID_L13);
    b   = cbs(x13, S4, S4, C4, C3W, 1, 1, ID_L14);
    x17 = c3(cat2(upsample2(b, S4, S4, C3W), p3, S3 * S3, C3W), S3, S3, 2 * C3W, C3W, NH, 1'b0, ID_L17);
    expv[0] = conv(x17, S3, S3, C3W, NOH, 1, 1, 0, ID_H0, 0);
    x18 = cbs(x17, S3, S3, C3W, C3W, 3, 2, ID_L18);
    x20 = c3(cat2(x18, b, S4 * S4, C3W), S4, S4, 2 * C3W, C4, NH, 1'b0, ID_L20);
    expv[1] = conv(x20, S4, S4, C4, NOH, 1, 1, 0, ID_H1, 0);
    x23 = c3(cat2(cbs(x20, S4, S4, C4, C4, 3, 2, ID_L21), a, S5 * S5, C4), S5, S5, 2 * C4, C5, NH, 1'b0, ID_L23);
    expv[2] = conv(x23, S5, S5, C5, NOH, 1, 1, 0, ID_H2, 0);

    repeat (4) @(negedge clk);
    rst_n = 1'b1;
    // weights
    load_layer(0, C1 * 3 * 9);
    load_layer(1, C2 * C1 * 9);
    load_c3(ID_L2, C2, C2, N2);
    load_layer(ID_L3, C3W * C2 * 9);
    load_c3(ID_L4, C3W, C3W, N4);
    load_layer(ID_L5, C4 * C3W * 9);
    load_c3(ID_L6, C4, C4, N6);
    load_layer(ID_L7, C5 * C4 * 9);
    load_c3(ID_L8, C5, C5, N8);
    load_layer(ID_L9, C5 * C5 / 2);
    load_layer(ID_L9 + 1, 2 * C5 * C5);
    load_layer(ID_L10, C4 * C5);
    load_c3(ID_L13, 2 * C4, C4, NH);
    load_layer(ID_L14, C3W * C4);
    load_c3(ID_L17, 2 * C3W, C3W, NH);
    load_layer(ID_H0, NOH * C3W);
    load_layer(ID_L18, C3W * C3W * 9);
    load_c3(ID_L20, 2 * C3W, C4, NH);
    load_layer(ID_H1, NOH * C4);
    load_layer(ID_L21, C4 * C4 * 9);
    load_c3(ID_L23, 2 * C4, C5, NH);
    load_layer(ID_H2, NOH * C5);

    t0 = $time;
    run_image(1'b1);
    $display("image 1 (random stalls): %0d cycles", ($time - t0) / 10);
    mech("input stall cycles", n_in_stall);
    mech("head back-pressure cycles", n_head_stall);
    mech("cycles P3 held in on-chip skip FIFO", n_p3_held);
    mech("cycles P4 held in on-chip skip FIFO", n_p4_held);
    mech("words through off-chip FIFO 0", n_off[0]);
    mech("words through off-chip FIFO 1", n_off[1]);
    mech("chunks returned by off-chip FIFO 0", chunks[0]);
    mech("chunks returned by off-chip FIFO 1", chunks[1]);
    mech("resize replay cycles", n_replay);
    checks++;
    if (n_off[0] != S5 * S5 * C4 || n_off[1] != S4 * S4 * C3W) begin
      failures++; $display("off-chip word counts %0d %0d", n_off[0], n_off[1]);
    end
    // the diverted tensors themselves
    for (int i = 0; i < a.size() && i < off_got[0].size(); i++) begin
      checks++;
      if (off_got[0][i] != a[i]) begin
        failures++; $display("off-chip 0 word %0d: got %0d expected %0d", i, off_got[0][i], a[i]);
        break;
      end
    end
    for (int i = 0; i < b.size() && i < off_got[1].size(); i++) begin
      checks++;
      if (off_got[1][i] != b[i]) begin
        failures++; $display("off-chip 1 word %0d: got %0d expected %0d", i, off_got[1][i], b[i]);
        break;
      end
    end
    t0 = $time;
    run_image(1'b0);
    $display("image 2 (full rate): %0d cycles", ($time - t0) / 10);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired: heads %0d %0d %0d of %0d %0d %0d", got[0].size(), got[1].size(),
             got[2].size(), expv[0].size(), expv[1].size(), expv[2].size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
