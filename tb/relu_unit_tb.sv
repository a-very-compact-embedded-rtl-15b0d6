// relu_unit_tb: ReLU and bypass on edge and random 32-bit values, checking
// the output and the clipped flag against max(0, x) / x.
module relu_unit_tb;
  logic               en;
  logic signed [31:0] x, y;
  logic               clip;
  int checks = 0, failures = 0;

  relu_unit #(.W(32)) dut (.en_i(en), .x_i(x), .y_o(y), .clipped_o(clip));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic e, input int v);
    int exp_y;
    logic exp_c;
    en = e; x = v;
    #1;
    exp_y = (e && v < 0) ? 0 : v;
    exp_c = e && v < 0;
    checks++;
    if (y !== exp_y || clip !== exp_c) begin
      failures++;
      $display("FAIL en=%0d x=%0d got y=%0d clip=%0d", e, v, y, clip);
    end
  endtask

  initial begin
    int edges[6] = '{0, 1, -1, 32'h7fffffff, 32'h80000000, 12345};
    foreach (edges[k]) begin
      check(1'b1, edges[k]);
      check(1'b0, edges[k]);
    end
    repeat (2000) check(1'($urandom), int'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
