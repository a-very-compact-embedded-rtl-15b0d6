// relu_unit: the layer activation function g() of the kernel.
//
// With en_i set it is ReLU, max(0, x); with en_i clear it is the identity,
// for layers such as a final fully-connected layer that have no activation.
// Both are homogeneous of degree 1, which is what allows the paper to apply
// the layer scale after g() as a single shift. ReLU follows the paper; the
// per-layer bypass is this design's choice. Purely combinational.
module relu_unit #(
  parameter int unsigned W = 32
) (
  input  logic                en_i,
  input  logic signed [W-1:0] x_i,
  output logic signed [W-1:0] y_o,
  output logic                clipped_o  // a negative value was set to zero
);
  always_comb begin
    clipped_o = en_i && x_i[W-1];
    y_o       = clipped_o ? '0 : x_i;
  end
endmodule
