// lcnn_core: unified layer kernel of the logarithmic-computing CNN processor.
//
// Every convolutional or fully-connected layer l is computed by the same
// hardware as  A^[l] = Q8( g( W^[l] * A^[l-1] + b^[l] ) * 2^i ):
//   pe_array   LANES shift-and-add PEs, one output channel each, fed one
//              activation (broadcast) and LANES 4-bit log weights per beat;
//              the 16-bit biases seed the accumulators on the first beat;
//   relu_unit  g(), ReLU or identity per layer;
//   scale_unit the layer scale f = 2^i, one exact shift;
//   act_quantizer  Q_Fixed8 back to 8-bit activations in [-1, 1].
// The four steps and all number formats follow the paper (Fig. 2 and 3,
// Eq. 7, 8, 16); the stream interface, the configuration register and the
// timing are this design's choices.
//
// Interface
//   cfg_we_i/cfg_i  write the layer configuration (ReLU on/off, scale
//                   exponent). Each pass uses the configuration present at
//                   its first beat, so the next layer's configuration may be
//                   written while a pass is still running.
//   in_valid_i      a beat: act_i and wgt_i (one weight per lane). in_first_i
//                   marks the first beat of a pass (bias_i is sampled then),
//                   in_last_i its last; both may be set on one beat. in_valid_i
//                   may drop between beats for any number of cycles. A new
//                   pass may start on the cycle after the last beat.
//   out_valid_o     one-cycle pulse two cycles after the last beat; act_o
//                   holds the LANES results until the next pulse, with
//                   per-lane flags for ReLU clipping, flush to zero and
//                   saturation.
// Throughput is one beat (LANES shift-and-adds) per cycle, with no gap
// between passes.
// Lint reports rst_n as used both asynchronously and synchronously: the
// synchronous use is only the "disable iff" of the protocol assertions below,
// which are not hardware.
module lcnn_core
  import lcnn_pkg::*;
#(
  parameter int unsigned N_PE = LANES
) (
  input  logic       clk,
  input  logic       rst_n,
  // layer configuration
  input  logic       cfg_we_i,
  input  layer_cfg_t cfg_i,
  // input stream
  input  logic       in_valid_i,
  input  logic       in_first_i,
  input  logic       in_last_i,
  input  act_t       act_i,
  input  logw_t      wgt_i  [N_PE],
  input  bias_t      bias_i [N_PE],
  // results
  output logic       out_valid_o,
  output act_t       act_o     [N_PE],
  output logic       clipped_o [N_PE],
  output logic       zero_o    [N_PE],
  output logic       sat_o     [N_PE],
  output logic       busy_o     // inside a pass
);
  layer_cfg_t cfg_q;     // written by cfg_we_i
  layer_cfg_t pass_cfg;  // configuration of the pass being accumulated
  logic       in_pass;
  logic       done_q;    // accumulators hold a finished pass

  acc_t pe_acc [N_PE];

  // ---------------------------------------------------------------- control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg_q    <= '0;
      pass_cfg <= '0;
      in_pass  <= 1'b0;
      done_q   <= 1'b0;
    end else begin
      if (cfg_we_i) cfg_q <= cfg_i;
      if (in_valid_i && in_first_i) pass_cfg <= cfg_q;
      if (in_valid_i) in_pass <= !in_last_i;
      done_q <= in_valid_i && in_last_i;
    end
  end

  assign busy_o = in_pass;

  // ---------------------------------------------------------------- kernel
  pe_array #(.N_PE(N_PE)) u_array (
    .clk    (clk),
    .rst_n  (rst_n),
    .en_i   (in_valid_i),
    .first_i(in_first_i),
    .act_i  (act_i),
    .wgt_i  (wgt_i),
    .bias_i (bias_i),
    .acc_o  (pe_acc)
  );

  // ---------------------------------------------- activation, scale, requant
  for (genvar p = 0; p < N_PE; p++) begin : g_lane
    acc_t                    relu_y;
    logic signed [SC_W-1:0]  scaled;
    act_t                    q;
    logic                    clip, zf, sf;

    relu_unit #(.W(ACC_W)) u_relu (
      .en_i     (pass_cfg.relu_en),
      .x_i      (pe_acc[p]),
      .y_o      (relu_y),
      .clipped_o(clip)
    );

    scale_unit #(.IW(ACC_W), .SW(SCALE_W)) u_scale (
      .x_i  (relu_y),
      .exp_i(pass_cfg.scale_exp),
      .y_o  (scaled)
    );

    act_quantizer #(.IW(SC_W), .IF(SC_FRAC), .K(A_BITS)) u_quant (
      .x_i   (scaled),
      .q_o   (q),
      .zero_o(zf),
      .sat_o (sf)
    );

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        act_o[p]     <= '0;
        clipped_o[p] <= 1'b0;
        zero_o[p]    <= 1'b0;
        sat_o[p]     <= 1'b0;
      end else if (done_q) begin
        act_o[p]     <= q;
        clipped_o[p] <= clip;
        zero_o[p]    <= zf;
        sat_o[p]     <= sf;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid_o <= 1'b0;
    else        out_valid_o <= done_q;
  end

  // ---------------------------------------------------------------- protocol
  // A pass opens with a first beat, and a first beat may only open one.
  a_first_opens: assert property (@(posedge clk) disable iff (!rst_n)
      in_valid_i && !in_pass |-> in_first_i)
    else $error("lcnn_core: beat outside a pass without in_first_i");
  a_no_nested: assert property (@(posedge clk) disable iff (!rst_n)
      in_valid_i && in_pass |-> !in_first_i)
    else $error("lcnn_core: in_first_i inside a pass");

endmodule
