// log_mult_tb: exhaustive check of the shift-based product. Every 8-bit
// activation is combined with every 4-bit log weight and the result, read
// with 14 fraction bits, must equal (a / 128) * (-1)^s * 2^-e exactly.
module log_mult_tb;
  import lcnn_ref_pkg::*;

  logic signed [7:0]  act;
  logic               ws;
  logic [2:0]         we;
  logic signed [15:0] prod;
  int checks = 0, failures = 0;

  log_mult dut (.act_i(act), .wsign_i(ws), .wexp_i(we), .prod_o(prod));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real expect_v, got_v;
    for (int a = -128; a < 128; a++)
      for (int w = 0; w < 16; w++) begin
        act = 8'(a);
        ws  = w[3];
        we  = w[2:0];
        #1;
        expect_v = (real'(a) / 128.0) * wval(ws, we);
        got_v    = real'(prod) / 16384.0;
        checks++;
        if (got_v != expect_v) begin
          failures++;
          if (failures < 10)
            $display("FAIL a=%0d s=%0d e=%0d got %f expected %f", a, ws, we, got_v, expect_v);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
