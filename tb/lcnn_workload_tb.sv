// lcnn_workload_tb: runs whole layers of the evaluated networks through the
// default-size kernel (128 lanes), the way a layer scheduler would use it.
//
//   LeNet-5  conv1 (1->6, 5x5, 32x32 input), 2x2 max-pool, conv2 (6->16,
//            5x5), 2x2 max-pool, FC 400->120, FC 120->84, FC 84->10 (no
//            ReLU). Each output position of a conv layer is one pass whose
//            beats are the receptive field, ordered (channel, row, column);
//            each lane is one output channel. Each layer's outputs are the
//            next layer's inputs, as in the unified-layer loop.
//   VGG16 FC6 one 128-output group of the 25088-input layer, the longest
//            dot product of the evaluated networks.
//   Yolov2   one 128-output group of the 3x3x1280 layer after the reorg
//            concatenation, 11520 inputs.
//
// Max-pooling is not part of the kernel and is done here. Trained weights
// are not available, so weights and biases come from a fixed hash of
// (layer, lane, index); the input image from $urandom. Every used lane of
// every pass is compared with the real-number reference, and every pass
// must take exactly its beat count plus two cycles.
module lcnn_workload_tb;
  import lcnn_pkg::*;
  import lcnn_ref_pkg::*;

  localparam int NP = LANES;

  logic       clk = 0, rst_n = 0;
  logic       cfg_we = 0;
  layer_cfg_t cfg = '0;
  logic       in_valid = 0, in_first = 0, in_last = 0;
  act_t       act = '0;
  logw_t      wgt  [NP];
  bias_t      bias [NP];
  logic       out_valid, busy;
  act_t       act_o [NP];
  logic       clip_o [NP], zero_o [NP], sat_o [NP];

  int checks = 0, failures = 0;
  int res [NP];

  lcnn_core dut (
    .clk(clk), .rst_n(rst_n), .cfg_we_i(cfg_we), .cfg_i(cfg),
    .in_valid_i(in_valid), .in_first_i(in_first), .in_last_i(in_last),
    .act_i(act), .wgt_i(wgt), .bias_i(bias),
    .out_valid_o(out_valid), .act_o(act_o), .clipped_o(clip_o),
    .zero_o(zero_o), .sat_o(sat_o), .busy_o(busy));

  always #5 clk = ~clk;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] mix(input int layer, input int lane, input int idx);
    logic [31:0] x;
    x = 32'(layer * 1000003 + lane * 7919 + idx * 104729 + 12345);
    x = x ^ (x >> 13);
    x = x * 32'h5bd1e995;
    x = x ^ (x >> 15);
    return x;
  endfunction

  function automatic logw_t wcode(input int layer, input int lane, input int idx);
    return logw_t'(mix(layer, lane, idx) >> 7);
  endfunction

  function automatic bias_t bcode(input int layer, input int lane);
    return bias_t'($signed(16'(mix(layer, lane, -1))) >>> 3);
  endfunction

  // One pass: the activation vector acts, weights wcode(layer, lane, k),
  // biases bcode(layer, lane). Results of lanes < n_out land in res[] and
  // are checked against the reference.
  task automatic run_pass(input int layer, input layer_cfg_t c, input int n_out,
                          input int acts[$]);
    real sum [NP];
    int  t0, n;
    n = acts.size();
    @(posedge clk); #1;
    cfg = c; cfg_we = 1;
    @(posedge clk); #1;
    cfg_we = 0;
    foreach (sum[p]) begin
      bias[p] = bcode(layer, p);
      sum[p]  = real'(bias[p]) / 32768.0;
    end
    t0 = 0;
    for (int k = 0; k < n; k++) begin
      in_valid = 1; in_first = (k == 0); in_last = (k == n - 1);
      act = act_t'(acts[k]);
      foreach (wgt[p]) begin
        wgt[p] = wcode(layer, p, k);
        if (p < n_out) sum[p] += (real'(acts[k]) / 128.0) * wval(wgt[p].sign, wgt[p].exp);
      end
      @(posedge clk); #1;
      t0++;
    end
    in_valid = 0; in_first = 0; in_last = 0;
    while (!out_valid) begin
      @(posedge clk); #1;
      t0++;
    end
    checks++;
    if (t0 != n + 1) begin  // n beats, then out_valid after the second edge
      failures++;
      $display("FAIL layer %0d: pass of %0d beats took %0d cycles to its result", layer, n, t0 + 1);
    end
    for (int p = 0; p < n_out; p++) begin
      int e;
      e = q8(relu(sum[p], c.relu_en) * pow2(int'(c.scale_exp)));
      res[p] = int'(act_o[p]);
      checks++;
      if (res[p] != e) begin
        failures++;
        if (failures < 10) $display("FAIL layer %0d lane %0d got %0d expected %0d", layer, p, res[p], e);
      end
    end
  endtask

  function automatic layer_cfg_t mk(input logic r, input int s);
    layer_cfg_t c;
    c.relu_en = r;
    c.scale_exp = 5'(s);
    return c;
  endfunction

  // feature maps, [channel][row][column], as 8-bit codes
  int img [1][32][32];
  int c1  [6][28][28];
  int p1  [6][14][14];
  int c2  [16][10][10];
  int p2  [16][5][5];
  int f1  [120];
  int f2  [84];
  int f3  [10];
  int nz;

  initial begin
    int acts[$];
    foreach (wgt[p]) begin wgt[p] = '0; bias[p] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- LeNet-5
    foreach (img[c, y, x]) img[c][y][x] = int'($urandom_range(0, 254)) - 127;
    for (int y = 0; y < 28; y++)
      for (int x = 0; x < 28; x++) begin
        acts.delete();
        for (int ky = 0; ky < 5; ky++) for (int kx = 0; kx < 5; kx++) acts.push_back(img[0][y+ky][x+kx]);
        run_pass(1, mk(1, -1), 6, acts);
        for (int c = 0; c < 6; c++) c1[c][y][x] = res[c];
      end
    foreach (p1[c, y, x])
      p1[c][y][x] = max4(c1[c][2*y][2*x], c1[c][2*y][2*x+1], c1[c][2*y+1][2*x], c1[c][2*y+1][2*x+1]);
    for (int y = 0; y < 10; y++)
      for (int x = 0; x < 10; x++) begin
        acts.delete();
        for (int ci = 0; ci < 6; ci++)
          for (int ky = 0; ky < 5; ky++) for (int kx = 0; kx < 5; kx++) acts.push_back(p1[ci][y+ky][x+kx]);
        run_pass(2, mk(1, -2), 16, acts);
        for (int c = 0; c < 16; c++) c2[c][y][x] = res[c];
      end
    foreach (p2[c, y, x])
      p2[c][y][x] = max4(c2[c][2*y][2*x], c2[c][2*y][2*x+1], c2[c][2*y+1][2*x], c2[c][2*y+1][2*x+1]);
    acts.delete();
    foreach (p2[c, y, x]) acts.push_back(p2[c][y][x]);
    run_pass(3, mk(1, -3), 120, acts);
    foreach (f1[i]) f1[i] = res[i];
    acts.delete();
    foreach (f1[i]) acts.push_back(f1[i]);
    run_pass(4, mk(1, -2), 84, acts);
    foreach (f2[i]) f2[i] = res[i];
    acts.delete();
    foreach (f2[i]) acts.push_back(f2[i]);
    run_pass(5, mk(0, -2), 10, acts);
    foreach (f3[i]) f3[i] = res[i];
    nz = 0;
    foreach (f3[i]) if (f3[i] != 0) nz++;
    $write("LeNet-5 outputs:");
    foreach (f3[i]) $write(" %0d", f3[i]);
    $display(" (%0d nonzero)", nz);
    checks++;
    if (nz == 0) begin
      failures++;
      $display("FAIL LeNet-5 output is all zero, the layers did not propagate");
    end

    // ---- VGG16 FC6: 25088 inputs, one group of 128 outputs
    acts.delete();
    repeat (25088) acts.push_back(int'($urandom_range(0, 127)));
    run_pass(6, mk(1, -7), NP, acts);
    // ---- Yolov2 3x3x1280 layer: 11520 inputs
    acts.delete();
    repeat (11520) acts.push_back(int'($urandom_range(0, 127)));
    run_pass(7, mk(1, -6), NP, acts);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int max4(input int a, input int b, input int c, input int d);
    int m;
    m = a;
    if (b > m) m = b;
    if (c > m) m = c;
    if (d > m) m = d;
    return m;
  endfunction
endmodule
