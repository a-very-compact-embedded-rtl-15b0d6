// scale_unit: multiplies the layer output by the layer scale f = 2^i.
//
// The paper restricts f to a power of two so that scaling is one shift. The
// exponent i is signed (SW bits, -2^(SW-1) .. 2^(SW-1)-1) and the shift is
// exact: the output carries 2^(SW-1) more fraction bits and 2^(SW-1) more
// integer bits than the input, so a right shift drops nothing and a left
// shift cannot overflow. The output is x_i << (i + 2^(SW-1)), read with
// IN_FRAC + 2^(SW-1) fraction bits. Rounding happens once, afterwards, in
// act_quantizer. Purely combinational.
module scale_unit #(
  parameter int unsigned IW = 32,
  parameter int unsigned SW = 5,
  parameter int unsigned OW = IW + (1 << SW)
) (
  input  logic signed [IW-1:0] x_i,
  input  logic signed [SW-1:0] exp_i,
  output logic signed [OW-1:0] y_o
);
  logic [SW-1:0] amount;  // exp_i + 2^(SW-1), 0 .. 2^SW-1

  always_comb begin
    amount = {~exp_i[SW-1], exp_i[SW-2:0]};
    y_o    = OW'(x_i) <<< amount;
  end
endmodule
