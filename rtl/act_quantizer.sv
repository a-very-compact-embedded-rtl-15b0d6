// act_quantizer: Q_Fixed_k, the activation quantizer of the paper (Eq. 15-16).
//
// The input is a signed fixed-point value with IF fraction bits. The output is
// a k-bit activation with k-1 fraction bits:
//   |x| <= 2^-k           -> 0                      (zero_o)
//   otherwise round |x| to the nearest multiple of 2^-(k-1), halves away
//   from zero; a magnitude above (2^(k-1)-1)/2^(k-1) is saturated to it
//   (sat_o), and the sign of x is restored.
// The paper writes the saturation level as 1 - 2^-(k+1), which 7 fraction
// bits cannot hold; the nearest level the format holds, 1 - 2^-(k-1)
// (127/128 for k = 8), is used instead. The range is symmetric, so -128 never
// occurs. Purely combinational.
module act_quantizer #(
  parameter int unsigned IW = 64,  // input bits
  parameter int unsigned IF = 31,  // input fraction bits, at least K
  parameter int unsigned K  = 8    // output bits
) (
  input  logic signed [IW-1:0] x_i,
  output logic signed [K-1:0]  q_o,
  output logic                 zero_o,  // flushed to zero
  output logic                 sat_o    // saturated
);
  localparam int unsigned DROP = IF - (K - 1);  // fraction bits removed
  localparam logic [IW:0] ZERO_LIM = (IW + 1)'(1) << (IF - K);      // 2^-k
  localparam logic [IW:0] HALF     = (IW + 1)'(1) << (DROP - 1);
  localparam logic [IW:0] QMAX     = (IW + 1)'((1 << (K - 1)) - 1);

  logic        neg;
  logic [IW:0] mag, rnd;
  logic [K-1:0] m;

  always_comb begin
    neg    = x_i[IW-1];
    mag    = neg ? (IW + 1)'(-{x_i[IW-1], x_i}) : (IW + 1)'(x_i);
    rnd    = (mag + HALF) >> DROP;
    zero_o = (mag <= ZERO_LIM);
    sat_o  = !zero_o && (rnd > QMAX);
    if (zero_o)     m = '0;
    else if (sat_o) m = QMAX[K-1:0];
    else            m = rnd[K-1:0];
    q_o = neg ? -m : m;
  end
endmodule
