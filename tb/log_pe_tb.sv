// log_pe_tb: random passes of 1 .. 300 beats with random pauses. After the
// last beat's clock edge the accumulator, read with 15 fraction bits, must
// equal bias + sum(a * w) computed in real numbers (one cycle of latency), and
// it must hold that value through idle cycles. Back-to-back passes check
// that the first beat restarts from the bias.
module log_pe_tb;
  import lcnn_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  logic en = 0, first = 0;
  logic signed [7:0]  act = '0;
  logic               ws = 0;
  logic [2:0]         we = '0;
  logic signed [15:0] bias = '0;
  logic signed [31:0] acc;
  int checks = 0, failures = 0, pauses = 0, back_to_back = 0;

  log_pe dut (.clk(clk), .rst_n(rst_n), .en_i(en), .first_i(first), .act_i(act),
              .wsign_i(ws), .wexp_i(we), .bias_i(bias), .acc_o(acc));

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_acc(input real expect_v, input string what);
    checks++;
    if (real'(acc) / 32768.0 != expect_v) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %f expected %f", what, real'(acc) / 32768.0, expect_v);
    end
  endtask

  initial begin
    real sum;
    int  len;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < 200; p++) begin
      len  = (p % 10 == 0) ? 1 : 1 + int'($urandom_range(0, 299));
      bias = 16'($urandom);
      sum  = real'(bias) / 32768.0;
      for (int b = 0; b < len; b++) begin
        if ($urandom_range(0, 7) == 0 && b > 0) begin
          en = 0; pauses++;
          @(posedge clk); #1;
        end
        en    = 1;
        first = (b == 0);
        act   = 8'($urandom);
        ws    = 1'($urandom);
        we    = 3'($urandom);
        sum  += (real'(act) / 128.0) * wval(ws, we);
        @(posedge clk); #1;
      end
      // result is visible right after the last beat's edge
      check_acc(sum, "pass result");
      if ($urandom_range(0, 1) == 0) begin
        en = 0; first = 0;
        repeat (2) @(posedge clk);
        #1;
        check_acc(sum, "held while idle");
      end else back_to_back++;
    end
    if (pauses == 0 || back_to_back == 0) begin
      failures++;
      $display("FAIL pauses=%0d back_to_back=%0d", pauses, back_to_back);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
