// twoc_to_sm: two's complement to sign-magnitude ("2CtoSM").
//
// W-bit in, W-bit out: MSB = sign, rest = magnitude. The most negative input
// has no sign-magnitude form; the likelihood unit never produces it, since its
// sum is bounded by n * (2^(Q-1) - 1). Combinational. The top bit of the
// internal magnitude is therefore never needed and is left unused.
module twoc_to_sm #(
  parameter int unsigned W = 12
) (
  input  logic signed [W-1:0] x_2c,
  output logic        [W-1:0] x_sm
);

  logic [W-1:0] mag;

  always_comb begin
    mag  = x_2c[W-1] ? W'(-x_2c) : W'(x_2c);
    x_sm = {x_2c[W-1], mag[W-2:0]};
  end

endmodule
