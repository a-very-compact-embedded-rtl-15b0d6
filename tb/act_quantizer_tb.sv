// act_quantizer_tb: Q_Fixed8 on a 64-bit input with 31 fraction bits.
// Edge cases around the flush-to-zero limit 2^-8, rounding halves and the
// saturation level are checked explicitly, then random values of every
// magnitude. Code and flags are compared with the real-number reference.
module act_quantizer_tb;
  import lcnn_ref_pkg::*;

  logic signed [63:0] x;
  logic signed [7:0]  q;
  logic               zf, sf;
  int checks = 0, failures = 0;
  int n_zero = 0, n_sat = 0;

  act_quantizer #(.IW(64), .IF(31), .K(8)) dut (.x_i(x), .q_o(q), .zero_o(zf), .sat_o(sf));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input longint v);
    real xv, ax;
    int  eq;
    logic ez, es;
    x = v;
    #1;
    xv = real'(v) / 2147483648.0;
    ax = (xv < 0.0) ? -xv : xv;
    eq = q8(xv);
    ez = (ax <= 1.0 / 256.0);
    es = !ez && ($floor(ax * 128.0 + 0.5) > 127.0);
    checks++;
    if (q !== 8'(eq) || zf !== ez || sf !== es) begin
      failures++;
      if (failures < 10) $display("FAIL x=%0d got q=%0d z=%0d s=%0d expected q=%0d z=%0d s=%0d",
                                  v, q, zf, sf, eq, ez, es);
    end
    n_zero += int'(zf);
    n_sat  += int'(sf);
  endtask

  initial begin
    longint one = 64'sd1 << 31;
    longint lsb = 64'sd1 << 24;   // 2^-7
    longint edges[$] = '{0, 1, -1,
                         one >> 8, (one >> 8) + 1, -(one >> 8), -(one >> 8) - 1,
                         lsb / 2, lsb / 2 + 1, lsb + lsb / 2, lsb + lsb / 2 - 1,
                         -(lsb + lsb / 2), 127 * lsb, 127 * lsb + lsb / 2 - 1,
                         127 * lsb + lsb / 2, one, -one, 5 * one,
                         64'sh7fffffffffffffff, 64'sh8000000000000000};
    foreach (edges[k]) check(edges[k]);
    for (int sh = 0; sh < 40; sh++)
      repeat (100) check(longint'($signed({$urandom, $urandom})) >>> (24 + sh));
    if (n_zero == 0 || n_sat == 0) begin
      failures++;
      $display("FAIL flush (%0d) or saturation (%0d) never seen", n_zero, n_sat);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
