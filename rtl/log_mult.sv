// log_mult: multiplier-free product of an activation and a logarithmic weight.
//
// The weight is (-1)^sign * 2^-e, so the product a * w is the activation
// shifted right by e and negated when the sign bit is set. To lose no bits the
// shift is done as a left shift by (E_MAX - e) into a result with
// A_FRAC + E_MAX fraction bits (Q2.14 for the default 8-bit activation and
// 3-bit exponent). The shift-and-negate replaces a multiplier, as the paper
// proposes; the exact output format is this design's choice.
// Purely combinational.
module log_mult
  import lcnn_pkg::*;
#(
  parameter int unsigned AW = A_BITS,  // activation bits
  parameter int unsigned EW = E_BITS,  // weight exponent bits
  parameter int unsigned PW = AW + (1 << EW)  // product bits = AW + E_MAX + 1
) (
  input  logic signed [AW-1:0] act_i,
  input  logic                 wsign_i,
  input  logic [EW-1:0]        wexp_i,
  output logic signed [PW-1:0] prod_o   // AW-1 + E_MAX fraction bits
);
  localparam int unsigned EMAX = (1 << EW) - 1;

  logic signed [PW-1:0] shifted;

  always_comb begin
    shifted = PW'(act_i) <<< (EW'(EMAX) - wexp_i);
    prod_o  = wsign_i ? -shifted : shifted;
  end
endmodule
