// h_memory: parity check matrix store.
//
// Holds the (n-k) x n parity check matrix H in flip-flops. The whole matrix is
// written in one cycle when h_load is high (the paper's H port is the full
// (n-k) x n bits wide), so a new code or rate can be loaded between frames.
// Rows are written as given; the read side presents H column by column, since
// column i of H is the syndrome s_i = H * 1_i of a single flipped bit i, which
// is what the rest of the decoder uses. Codes with fewer than NK parity checks
// are loaded with the unused rows all zero; such rows never affect a syndrome.
//
// Timing: write on the rising clock edge; read is combinational from the
// stored state. Reset clears the matrix. Port widths follow the paper; the
// one-cycle parallel load and the column view are this design's choices.
module h_memory #(
  parameter int unsigned N  = 128,   // code length n
  parameter int unsigned NK = 32     // maximum number of parity checks n-k
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          h_load,
  input  logic [N-1:0]  h_rows_in [NK],   // row j of H, bit i = H[j][i]
  output logic [NK-1:0] h_cols    [N]     // column i of H, bit j = H[j][i]
);

  logic [N-1:0] rows_q [NK];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < NK; j++) rows_q[j] <= '0;
    end else if (h_load) begin
      for (int j = 0; j < NK; j++) rows_q[j] <= h_rows_in[j];
    end
  end

  // transpose as pure wiring
  for (genvar i = 0; i < N; i++) begin : g_col
    for (genvar j = 0; j < NK; j++) begin : g_bit
      assign h_cols[i][j] = rows_q[j][i];
    end
  end

endmodule
