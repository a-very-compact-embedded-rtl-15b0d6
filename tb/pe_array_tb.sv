// pe_array_tb: the full 128-PE array. Each pass broadcasts one random
// activation stream and gives every PE its own random weights and bias; all
// 128 accumulators must match their real-number dot products one cycle after
// the last beat.
module pe_array_tb;
  import lcnn_pkg::*;
  import lcnn_ref_pkg::*;

  localparam int NP = LANES;

  logic  clk = 0, rst_n = 0;
  logic  en = 0, first = 0;
  act_t  act = '0;
  logw_t wgt  [NP];
  bias_t bias [NP];
  acc_t  acc  [NP];
  real   sum  [NP];
  int checks = 0, failures = 0;

  pe_array dut (.clk(clk), .rst_n(rst_n), .en_i(en), .first_i(first), .act_i(act),
                .wgt_i(wgt), .bias_i(bias), .acc_o(acc));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int len;
    foreach (wgt[p]) begin wgt[p] = '0; bias[p] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int pass = 0; pass < 20; pass++) begin
      len = 1 + int'($urandom_range(0, 200));
      foreach (bias[p]) begin
        bias[p] = 16'($urandom);
        sum[p]  = real'(bias[p]) / 32768.0;
      end
      for (int b = 0; b < len; b++) begin
        en = 1; first = (b == 0);
        act = 8'($urandom);
        foreach (wgt[p]) begin
          wgt[p] = 4'($urandom);
          sum[p] += (real'(act) / 128.0) * wval(wgt[p].sign, wgt[p].exp);
        end
        @(posedge clk); #1;
      end
      en = 0; first = 0;
      foreach (acc[p]) begin
        checks++;
        if (real'(acc[p]) / 32768.0 != sum[p]) begin
          failures++;
          if (failures < 10) $display("FAIL pass %0d pe %0d got %f expected %f",
                                      pass, p, real'(acc[p]) / 32768.0, sum[p]);
        end
      end
      @(posedge clk); #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
