// scale_unit_tb: every scale exponent -16 .. 15 on edge and random inputs.
// The output read with 31 fraction bits must equal (x / 2^15) * 2^i exactly.
module scale_unit_tb;
  import lcnn_ref_pkg::*;

  logic signed [31:0] x;
  logic signed [4:0]  e;
  logic signed [63:0] y;
  int checks = 0, failures = 0;

  scale_unit #(.IW(32), .SW(5)) dut (.x_i(x), .exp_i(e), .y_o(y));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input int v, input int i);
    real expect_v, got_v;
    x = v; e = 5'(i);
    #1;
    expect_v = (real'(v) / 32768.0) * pow2(i);
    got_v    = real'(y) / 2147483648.0;
    checks++;
    if (got_v != expect_v) begin
      failures++;
      if (failures < 10) $display("FAIL x=%0d i=%0d got %e expected %e", v, i, got_v, expect_v);
    end
  endtask

  initial begin
    int edges[7] = '{0, 1, -1, 32'h7fffffff, 32'h80000000, 32768, -98765};
    for (int i = -16; i < 16; i++) begin
      foreach (edges[k]) check(edges[k], i);
      repeat (50) check(int'($urandom), i);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
