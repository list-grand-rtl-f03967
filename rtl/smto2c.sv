// smto2c: sign-magnitude channel value to two's complement, with sign flip.
//
// Computes (-1)^c * y for a Q-bit sign-magnitude y (MSB = sign, 1 = negative)
// and returns it as a Q-bit two's complement number. This is the "SMto2C"
// element of the likelihood unit; folding the codeword bit c into the sign is
// how the term (-1)^c_i * y_i is formed. Combinational.
module smto2c #(
  parameter int unsigned Q = 5
) (
  input  logic [Q-1:0]        y_sm,
  input  logic                c,
  output logic signed [Q-1:0] y_2c
);

  logic         neg;
  logic [Q-2:0] mag;

  always_comb begin
    neg  = y_sm[Q-1] ^ c;
    mag  = y_sm[Q-2:0];
    y_2c = neg ? -$signed({1'b0, mag}) : $signed({1'b0, mag});
  end

endmodule
