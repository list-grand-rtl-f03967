// mlcu: Maximum Likelihood Computation Unit.
//
// Computes the likelihood metric of a candidate codeword c_hat,
//   M = sum_{i=1..n} (-1)^{c_i} * y_i,
// which is largest for the candidate that agrees best with the channel values
// (for the hard decision itself it is sum |y_i|; every flipped bit i costs
// 2|y_i|). Structure as in the paper: one SMto2C converter per channel value,
// an adder tree of log2(n) stages whose word width grows by one bit per stage
// (Q+1, Q+2, ..., Q+ceil(log2 n)), and a final 2CtoSM so that the decoder can
// compare metrics in sign-magnitude form. n not a power of two is padded with
// zero terms. Output width Q + ceil(log2 n).
//
// Combinational; the result is 0 when en is low (the paper draws an enable
// input without saying what it does).
module mlcu #(
  parameter int unsigned N  = 128,
  parameter int unsigned Q  = 5,
  parameter int unsigned L  = (N > 1) ? $clog2(N) : 1,   // adder tree stages
  parameter int unsigned MW = Q + L                      // metric width
) (
  input  logic [N-1:0] c_hat,
  input  logic [Q-1:0] y    [N],     // sign-magnitude channel values
  input  logic         en,
  output logic [MW-1:0] metric       // sign-magnitude M
);

  localparam int unsigned M2 = 1 << L;

  logic signed [Q-1:0] term [M2];

  for (genvar i = 0; i < int'(M2); i++) begin : g_conv
    if (i < int'(N)) begin : g_real
      smto2c #(.Q(Q)) u_conv (.y_sm(y[i]), .c(c_hat[i]), .y_2c(term[i]));
    end else begin : g_pad
      assign term[i] = '0;
    end
  end

  // Adder tree: stage l holds M2 >> l sums of width Q + l.
  for (genvar l = 0; l <= int'(L); l++) begin : g_lvl
    logic signed [Q+l-1:0] s [M2 >> l];
    if (l == 0) begin : g_leaf
      for (genvar i = 0; i < int'(M2); i++) begin : g_i
        assign s[i] = term[i];
      end
    end else begin : g_add
      for (genvar i = 0; i < int'(M2 >> l); i++) begin : g_i
        assign s[i] = (Q+l)'(g_lvl[l-1].s[2*i]) + (Q+l)'(g_lvl[l-1].s[2*i+1]);
      end
    end
  end

  logic signed [MW-1:0] sum_2c;
  logic        [MW-1:0] sum_sm;

  assign sum_2c = en ? MW'(g_lvl[L].s[0]) : '0;

  twoc_to_sm #(.W(MW)) u_sm (.x_2c(sum_2c), .x_sm(sum_sm));

  assign metric = sum_sm;

endmodule
