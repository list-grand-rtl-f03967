// decoding_core: parallel codebook-membership test of one group of TEPs.
//
// Built on the one-bit check network of the paper: every test syndrome is the
// XOR of stored one-bit syndromes s_i (columns of H, here in reliability order)
// with a common word s_comp, followed by a NOR reduction (1 = all parity checks
// satisfied) and a priority encoder. By linearity, H*(yhat ^ e) is the XOR of
// s_c and the s_i of the flipped positions, so s_comp = s_c ^ (syndromes of
// the parts already fixed by the controller).
//
// One group is all test error patterns whose integer partition has the same
// smaller parts (the "prefix", largest part lo) and the same remaining sum r:
//   lane 0      : the single part r (only when the prefix is empty)
//   lane j>=1   : the two parts a = lo + j and b = r - a, valid if a < b <= n
// All lanes belong to the same logistic weight, so testing them together keeps
// the logistic-weight order of ORBGRAND. Lanes already reported in this group
// are masked so that a second hit in the same group is reported next cycle.
// The grouping, the lane order and the masking are this design's choices; the
// paper describes the XOR/NOR/encoder principle and refers elsewhere for the
// rest. Where the paper uses shift registers to line up s_a and s_b, this
// design selects them by index.
//
// Combinational. n_valid counts the lanes that form a real TEP (for the query
// count). Part values are 1-based sorted positions as in the paper.
module decoding_core #(
  parameter int unsigned N   = 128,
  parameter int unsigned NK  = 32,
  parameter int unsigned W   = 47,                 // pair lanes, (LW_MAX-1)/2
  parameter int unsigned LWW = 14,                 // logistic weight width
  parameter int unsigned PW  = $clog2(N + 1),      // part value width
  parameter int unsigned LI  = $clog2(W + 1)       // lane index width
) (
  input  logic [NK-1:0]  s_sorted [N],
  input  logic [NK-1:0]  s_comp,
  input  logic [LWW-1:0] r,          // sum still to be split
  input  logic [PW-1:0]  lo,         // largest prefix part (0 if no prefix)
  input  logic           single_en,  // test lane 0
  input  logic           pair_en,    // test lanes 1..W
  input  logic [W:0]     lane_mask,  // lanes already reported
  output logic           hit,
  output logic [LI-1:0]  lane,
  output logic           is_single,
  output logic [PW-1:0]  part_a,     // single part, or the smaller pair part
  output logic [PW-1:0]  part_b,     // larger pair part
  output logic [LI:0]    n_valid     // number of real TEPs in the group
);

  logic [W:0] valid;
  logic [W:0] ok;     // NOR-reduced test syndromes
  logic       pe_valid;

  always_comb begin
    int a, b, rr;
    logic [NK-1:0] syn;
    rr = int'(r);
    n_valid = '0;
    // lane 0: single flipped bit
    valid[0] = single_en && (rr >= 1) && (rr <= int'(N));
    syn      = s_comp ^ (valid[0] ? s_sorted[rr - 1] : '0);
    ok[0]    = valid[0] && (syn == '0);
    // lanes 1..W: pairs
    for (int j = 1; j <= int'(W); j++) begin
      a = int'(lo) + j;
      b = rr - a;
      valid[j] = pair_en && (a < b) && (b <= int'(N));
      syn      = s_comp;
      if (valid[j]) syn = syn ^ s_sorted[a - 1] ^ s_sorted[b - 1];
      ok[j]    = valid[j] && (syn == '0);
    end
    for (int j = 0; j <= int'(W); j++) n_valid += (LI+1)'(valid[j]);
  end

  priority_encoder #(.WIDTH(W + 1), .IW(LI)) u_pe (
    .req  (ok & ~lane_mask),
    .idx  (lane),
    .valid(pe_valid)
  );

  always_comb begin
    hit       = pe_valid;
    is_single = (lane == '0);
    if (lane == '0) begin
      part_a = PW'(r);
      part_b = '0;
    end else begin
      part_a = PW'(int'(lo) + int'(lane));
      part_b = PW'(int'(r) - (int'(lo) + int'(lane)));
    end
  end

endmodule
