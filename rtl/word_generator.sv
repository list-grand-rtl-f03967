// word_generator: candidate codeword c_hat = yhat XOR e.
//
// The test error pattern e has a 1 at each enabled channel position from the
// index multiplexers; XORing it into the hard decision flips those bits.
// Combinational. The paper gives the function ("converts ... to their
// appropriate bit-flip locations"); the decoder registers the result.
module word_generator #(
  parameter int unsigned N  = 128,
  parameter int unsigned P  = 8,
  parameter int unsigned IW = $clog2(N)
) (
  input  logic [N-1:0]  y_hard,
  input  logic [IW-1:0] pos    [P],
  input  logic [P-1:0]  pos_en,
  output logic [N-1:0]  e,
  output logic [N-1:0]  c_hat
);

  always_comb begin
    e = '0;
    for (int p = 0; p < int'(P); p++)
      if (pos_en[p]) e[pos[p]] = 1'b1;
    c_hat = y_hard ^ e;
  end

endmodule
