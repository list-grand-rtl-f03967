// bitonic_sorter: sorts the channel reliabilities in ascending order.
//
// ORBGRAND flips bits in order of increasing reliability |y_i|, so the decoder
// first sorts the n magnitudes (Q-1 bits each, the sign is dropped). The sorter
// is a combinational bitonic network of log2(M)*(log2(M)+1)/2 compare-exchange
// stages, M = n rounded up to a power of two; padding entries carry a key above
// every real one and end up past position n-1. Each element carries its
// channel index and its column of H, so the outputs are the permutation Ind
// (sorted position -> channel position) and the one-bit syndromes s in sorted
// order, as in the paper's block diagram. Equal magnitudes are ordered by
// channel index, which makes the order deterministic (the paper does not say
// how ties are broken).
//
// The paper names the bitonic sorter and its outputs; the network is the
// textbook one. It is combinational here; the decoder registers its outputs
// in a single sorting cycle (the paper does not give the sorter's latency).
module bitonic_sorter #(
  parameter int unsigned N  = 128,
  parameter int unsigned NK = 32,
  parameter int unsigned MW = 4,                  // magnitude width, Q-1
  parameter int unsigned IW = $clog2(N)
) (
  input  logic [MW-1:0] mag      [N],   // |y_i|
  input  logic [NK-1:0] cols     [N],   // s_i, column i of H
  output logic [IW-1:0] ind      [N],   // channel index at sorted position j
  output logic [MW-1:0] mag_sorted [N], // magnitudes, ascending
  output logic [NK-1:0] s_sorted [N]    // s_{ind[j]}
);

  localparam int unsigned LM = (N > 1) ? $clog2(N) : 1;
  localparam int unsigned M  = 1 << LM;
  localparam int unsigned XW = (M > 1) ? $clog2(M) : 1;
  localparam int unsigned NS = LM * (LM + 1) / 2;      // compare-exchange stages

  typedef struct packed {
    logic          pad;   // 1 for the filler entries beyond N
    logic [MW-1:0] mag;
    logic [XW-1:0] idx;
    logic [NK-1:0] col;
  } elem_t;

  // stage 0 = inputs, stage NS = sorted
  elem_t st [NS+1][M] /*verilator split_var*/;

  for (genvar i = 0; i < int'(M); i++) begin : g_in
    if (i < int'(N)) begin : g_real
      assign st[0][i] = '{pad: 1'b0, mag: mag[i], idx: XW'(i), col: cols[i]};
    end else begin : g_pad
      assign st[0][i] = '{pad: 1'b1, mag: '1, idx: XW'(i), col: '0};
    end
  end

  // Bitonic merge network: block size 2^lk, compare distance 2^lj. The stage
  // number counts all (lk, lj) pairs before this one. Direction alternates
  // with bit lk of the position (0: ascending).
  for (genvar lk = 1; lk <= int'(LM); lk++) begin : g_k
    for (genvar lj = lk - 1; lj >= 0; lj--) begin : g_j
      localparam int S = (lk - 1) * lk / 2 + (lk - 1 - lj);
      for (genvar i = 0; i < int'(M); i++) begin : g_i
        localparam int L = i ^ (1 << lj);
        if (L > i) begin : g_cx
          logic gt, sw;
          assign gt = {st[S][i].pad, st[S][i].mag, st[S][i].idx} >
                      {st[S][L].pad, st[S][L].mag, st[S][L].idx};
          // keys are unique (idx), so "not greater" means "smaller"
          assign sw = ((i & (1 << lk)) == 0) ? gt : !gt;
          assign st[S+1][i] = sw ? st[S][L] : st[S][i];
          assign st[S+1][L] = sw ? st[S][i] : st[S][L];
        end
      end
    end
  end

  for (genvar i = 0; i < int'(N); i++) begin : g_out
    assign ind[i]        = IW'(st[NS][i].idx);
    assign mag_sorted[i] = st[NS][i].mag;
    assign s_sorted[i]   = st[NS][i].col;
  end

endmodule
