// pe_array: the reusable convolution kernel, LANES processing elements.
//
// All PEs see the same activation each beat and each has its own weight and
// bias, so one pass of N beats produces LANES dot products of length N in
// parallel: the LANES output channels of one output position (or of one
// fully-connected output group). The paper states 128 PEs for its chip; the
// activation broadcast with one weight per PE per beat is this design's
// choice, since the paper does not describe the dataflow.
// Timing as for log_pe: one beat per cycle, results one cycle after the last.
module pe_array
  import lcnn_pkg::*;
#(
  parameter int unsigned N_PE = LANES
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  en_i,
  input  logic  first_i,
  input  act_t  act_i,
  input  logw_t wgt_i  [N_PE],
  input  bias_t bias_i [N_PE],
  output acc_t  acc_o  [N_PE]
);
  for (genvar p = 0; p < N_PE; p++) begin : g_pe
    log_pe u_pe (
      .clk    (clk),
      .rst_n  (rst_n),
      .en_i   (en_i),
      .first_i(first_i),
      .act_i  (act_i),
      .wsign_i(wgt_i[p].sign),
      .wexp_i (wgt_i[p].exp),
      .bias_i (bias_i[p]),
      .acc_o  (acc_o[p])
    );
  end
endmodule
