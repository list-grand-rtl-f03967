// index_mux: sorted positions -> channel bit positions.
//
// The schedule names the flipped bits by their rank in reliability order
// (1 = least reliable). P multiplexers, each n:1 over the permutation Ind from
// the sorter, turn those ranks into the channel positions to flip, as in the
// paper's "n:1 Mux" bank. Combinational. Disabled slots give position 0 and
// pos_en = 0.
module index_mux #(
  parameter int unsigned N  = 128,
  parameter int unsigned P  = 8,                 // HW_max
  parameter int unsigned IW = $clog2(N),
  parameter int unsigned PW = $clog2(N + 1)
) (
  input  logic [IW-1:0] ind      [N],   // channel index at sorted position j (0-based)
  input  logic [PW-1:0] flip_pos [P],   // 1-based sorted positions
  input  logic [P-1:0]  flip_en,
  output logic [IW-1:0] pos      [P],   // 0-based channel positions
  output logic [P-1:0]  pos_en
);

  always_comb begin
    for (int p = 0; p < int'(P); p++) begin
      pos[p] = '0;
      if (flip_en[p] && flip_pos[p] != '0 && int'(flip_pos[p]) <= int'(N))
        pos[p] = ind[int'(flip_pos[p]) - 1];
    end
    pos_en = flip_en;
  end

endmodule
