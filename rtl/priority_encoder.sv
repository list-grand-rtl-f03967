// priority_encoder: index of the lowest-numbered asserted request.
//
// This is the "n : log2(n) encoder" that follows the NOR-reduced syndromes in
// the one-bit check network: among all test error patterns that satisfy the
// parity checks in a cycle, it picks the first in schedule order. Lowest index
// has priority (the paper gives the function, not the priority direction).
// Combinational; idx is 0 when no request is set.
module priority_encoder #(
  parameter int unsigned WIDTH = 48,
  parameter int unsigned IW    = (WIDTH > 1) ? $clog2(WIDTH) : 1
) (
  input  logic [WIDTH-1:0] req,
  output logic [IW-1:0]    idx,
  output logic             valid
);

  always_comb begin
    idx   = '0;
    valid = 1'b0;
    for (int i = WIDTH - 1; i >= 0; i--) begin
      if (req[i]) begin
        idx   = IW'(i);
        valid = 1'b1;
      end
    end
  end

endmodule
