// log_pe: one processing element of the logarithmic convolution kernel.
//
// It computes one output value Z = sum(W * A) + b of a layer (paper Eq. 7)
// as a stream of shift-and-add steps. On each accepted beat (en_i) it shifts
// the broadcast activation by its own log weight (log_mult) and adds the
// result to its accumulator. On the first beat of a pass (first_i) the
// accumulator restarts from the 16-bit bias instead of its old value, so the
// bias is added once per output with no extra cycle. acc_o is registered and
// holds the sum one cycle after the last beat; it keeps its value while en_i
// is low, so the input stream may pause at any cycle.
// The paper gives the function (shift-and-add, bias in double width); the
// one-beat-per-cycle output-stationary accumulation and the 32-bit
// accumulator with 15 fraction bits are choices of this design. The
// accumulator wraps; with the default width a pass of up to 65535 beats
// cannot reach that.
module log_pe
  import lcnn_pkg::*;
#(
  parameter int unsigned AW   = A_BITS,
  parameter int unsigned EW   = E_BITS,
  parameter int unsigned BW   = B_BITS,
  parameter int unsigned ACCW = ACC_W,
  parameter int unsigned ACCF = ACC_FRAC
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   en_i,     // a beat is present
  input  logic                   first_i,  // first beat of a pass
  input  logic signed [AW-1:0]   act_i,
  input  logic                   wsign_i,
  input  logic [EW-1:0]          wexp_i,
  input  logic signed [BW-1:0]   bias_i,   // BW-1 fraction bits, used on first_i
  output logic signed [ACCW-1:0] acc_o     // ACCF fraction bits
);
  localparam int unsigned PW    = AW + (1 << EW);
  localparam int unsigned PFRAC = AW - 1 + (1 << EW) - 1;
  localparam int unsigned BFRAC = BW - 1;

  logic signed [PW-1:0]   prod;
  logic signed [ACCW-1:0] prod_al, bias_al, base;

  log_mult #(.AW(AW), .EW(EW)) u_mult (
    .act_i  (act_i),
    .wsign_i(wsign_i),
    .wexp_i (wexp_i),
    .prod_o (prod)
  );

  always_comb begin
    prod_al = ACCW'(prod) <<< (ACCF - PFRAC);
    bias_al = ACCW'(bias_i) <<< (ACCF - BFRAC);
    base    = first_i ? bias_al : acc_o;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    acc_o <= '0;
    else if (en_i) acc_o <= base + prod_al;
  end

  initial begin
    assert (ACCF >= PFRAC && ACCF >= BFRAC)
      else $error("log_pe: accumulator needs at least %0d fraction bits", PFRAC);
  end
endmodule
