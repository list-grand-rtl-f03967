// syndrome_unit: syndrome of the hard-decided received word, s_c = H * yhat^T.
//
// The hard decision of each channel value is its sign bit (a negative LLR
// decides 1). The syndrome is the XOR of the columns of H at the positions
// where the hard decision is 1. Purely combinational. The paper gives the
// function (the "H * yhat^T" block of the ORBGRAND architecture); the
// XOR-of-columns form is the direct implementation.
module syndrome_unit #(
  parameter int unsigned N  = 128,
  parameter int unsigned NK = 32
) (
  input  logic [NK-1:0] h_cols [N],   // column i of H
  input  logic [N-1:0]  y_hard,       // yhat
  output logic [NK-1:0] s_c,          // H * yhat^T
  output logic          zero          // s_c == 0: yhat is a codeword
);

  always_comb begin
    s_c = '0;
    for (int i = 0; i < N; i++)
      if (y_hard[i]) s_c ^= h_cols[i];
    zero = (s_c == '0);
  end

endmodule
