// lcnn_core_tb: end-to-end test of the layer kernel at its default size
// (128 lanes). It runs a sequence of passes, each a dot product of random
// length over random 8-bit activations, 4-bit log weights and 16-bit biases,
// under a random layer configuration (ReLU on or off, scale exponent
// -6 .. +3). Every output lane is compared with the real-number reference
// Q8(g(sum(a*w) + b) * 2^i), including the clip, zero and saturation flags,
// and each result must arrive exactly two cycles after its last beat.
// It also counts the mechanisms of the design and fails if one never occurs:
// input pauses, back-to-back passes, one-beat passes, a configuration
// written during a pass, ReLU clipping, ReLU bypass with negative outputs,
// right and left scale shifts, flush to zero and saturation.
module lcnn_core_tb;
  import lcnn_pkg::*;
  import lcnn_ref_pkg::*;

  localparam int NP = LANES;
  localparam int PASSES = 60;

  typedef struct {
    int   q    [NP];
    logic clip [NP];
    logic zf   [NP];
    logic sf   [NP];
    int   cyc;
  } result_t;

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
  int ncyc = 0, got = 0;
  result_t expq[$];

  // mechanism counters
  int n_pause = 0, n_b2b = 0, n_single = 0, n_cfg_mid = 0;
  int n_clip = 0, n_bypass_neg = 0, n_right = 0, n_left = 0, n_zero = 0, n_sat = 0;

  lcnn_core dut (
    .clk(clk), .rst_n(rst_n), .cfg_we_i(cfg_we), .cfg_i(cfg),
    .in_valid_i(in_valid), .in_first_i(in_first), .in_last_i(in_last),
    .act_i(act), .wgt_i(wgt), .bias_i(bias),
    .out_valid_o(out_valid), .act_o(act_o), .clipped_o(clip_o),
    .zero_o(zero_o), .sat_o(sat_o), .busy_o(busy));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // monitor: sampled mid-cycle
  always @(negedge clk) begin
    ncyc++;
    if (out_valid) begin
      result_t r;
      checks++;
      if (expq.size() == 0) begin
        failures++;
        $display("FAIL unexpected out_valid at cycle %0d", ncyc);
      end else begin
        r = expq.pop_front();
        got++;
        if (r.cyc != ncyc) begin
          failures++;
          $display("FAIL result at cycle %0d, expected cycle %0d", ncyc, r.cyc);
        end
        foreach (act_o[p]) begin
          checks++;
          if (int'(act_o[p]) != r.q[p] || clip_o[p] != r.clip[p] ||
              zero_o[p] != r.zf[p] || sat_o[p] != r.sf[p]) begin
            failures++;
            if (failures < 10)
              $display("FAIL lane %0d got %0d (c%0d z%0d s%0d) expected %0d (c%0d z%0d s%0d)",
                       p, act_o[p], clip_o[p], zero_o[p], sat_o[p],
                       r.q[p], r.clip[p], r.zf[p], r.sf[p]);
          end
          if (r.clip[p]) n_clip++;
          if (r.zf[p])   n_zero++;
          if (r.sf[p])   n_sat++;
        end
      end
    end
  end

  function automatic layer_cfg_t random_cfg();
    layer_cfg_t c;
    c.relu_en   = ($urandom_range(0, 3) != 0);
    c.scale_exp = 5'($signed($urandom_range(0, 9)) - 6);
    return c;
  endfunction

  initial begin
    layer_cfg_t cur, nxt;
    real        sum [NP];
    int         len, cfg_beat;
    result_t    r;
    foreach (wgt[p]) begin wgt[p] = '0; bias[p] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    cur = random_cfg();
    @(posedge clk); #1;
    cfg = cur; cfg_we = 1;
    @(posedge clk); #1;
    cfg_we = 0;
    for (int pass = 0; pass < PASSES; pass++) begin
      len = (pass % 8 == 3) ? 1 : 1 + int'($urandom_range(0, 63));
      if (len == 1) n_single++;
      nxt = random_cfg();
      cfg_beat = int'($urandom_range(0, len - 1));
      foreach (bias[p]) begin
        bias[p] = 16'($urandom) >>> $urandom_range(0, 3);
        sum[p]  = real'(bias[p]) / 32768.0;
      end
      for (int b = 0; b < len; b++) begin
        if (b > 0 && $urandom_range(0, 9) == 0) begin
          in_valid = 0; in_first = 0; in_last = 0; cfg_we = 0;
          n_pause++;
          @(posedge clk); #1;
        end
        in_valid = 1;
        in_first = (b == 0);
        in_last  = (b == len - 1);
        act      = 8'($urandom);
        foreach (wgt[p]) begin
          wgt[p] = 4'($urandom);
          sum[p] += (real'(act) / 128.0) * wval(wgt[p].sign, wgt[p].exp);
        end
        // next layer's configuration is written while this pass runs
        cfg_we = (b == cfg_beat);
        cfg    = nxt;
        if (b == cfg_beat) n_cfg_mid++;
        if (b == len - 1) begin
          foreach (sum[p]) begin
            real g, x;
            g = relu(sum[p], cur.relu_en);
            x = g * pow2(int'(cur.scale_exp));
            r.q[p]    = q8(x);
            r.clip[p] = cur.relu_en && sum[p] < 0.0;
            r.zf[p]   = ((x < 0.0) ? -x : x) <= 1.0 / 256.0;
            r.sf[p]   = !r.zf[p] && $floor(((x < 0.0) ? -x : x) * 128.0 + 0.5) > 127.0;
            if (!cur.relu_en && r.q[p] < 0) n_bypass_neg++;
          end
          r.cyc = ncyc + 3;
          expq.push_back(r);
          if (cur.scale_exp < 0) n_right++;
          if (cur.scale_exp > 0) n_left++;
        end
        @(posedge clk); #1;
      end
      cur = nxt;
      cfg_we = 0;
      if ($urandom_range(0, 2) == 0) begin
        in_valid = 0; in_first = 0; in_last = 0;
        repeat ($urandom_range(1, 4)) @(posedge clk);
        #1;
      end else if (pass < PASSES - 1) n_b2b++;
    end
    in_valid = 0; in_first = 0; in_last = 0;
    repeat (6) @(posedge clk);

    checks++;
    if (got != PASSES) begin
      failures++;
      $display("FAIL %0d results for %0d passes", got, PASSES);
    end
    $display("mechanisms: pause=%0d back_to_back=%0d single_beat=%0d cfg_mid_pass=%0d",
             n_pause, n_b2b, n_single, n_cfg_mid);
    $display("            relu_clip=%0d bypass_neg=%0d right_shift=%0d left_shift=%0d zero=%0d sat=%0d",
             n_clip, n_bypass_neg, n_right, n_left, n_zero, n_sat);
    if (n_pause == 0 || n_b2b == 0 || n_single == 0 || n_cfg_mid == 0 || n_clip == 0 ||
        n_bypass_neg == 0 || n_right == 0 || n_left == 0 || n_zero == 0 || n_sat == 0) begin
      failures++;
      $display("FAIL a mechanism never occurred");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
