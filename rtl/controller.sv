// controller: LGRAND test-error-pattern schedule and decoder sequencing.
//
// Walks the logistic weights m = 1, 2, ... up to Lambda. Within a logistic
// weight it enumerates, for prefix sizes k = 0, 1, ..., Delta-2, every prefix
// of k distinct parts p1 < ... < pk (lexicographic order) such that the rest
// r = m - sum(p) can still be split into two larger distinct parts. Each
// (m, prefix) is one schedule step: the decoding core tests, in one cycle, the
// single-part TEP {m} (when k = 0) and all TEPs {prefix, a, r-a}. The test
// syndrome base s_comp = s_c ^ s_p1 ^ ... ^ s_pk is formed here, from the
// sorted one-bit syndromes. Every distinct integer partition of m with at most
// Delta parts, all parts <= n, is thus tested exactly once, in logistic-weight
// order (within one logistic weight the order is this design's own).
//
// LGRAND rule (paper, Algorithm 2): when the first codeword is found at
// logistic weight i with a TEP of Hamming weight h, the search limit becomes
// Lambda = min(i + delta, LW_max) and the Hamming weight limit Delta = h. The
// search then continues and every further hit is a new list candidate. A group
// with several hits is re-evaluated with the reported lanes masked, one hit
// per cycle. Without any hit the search ends at LW_max (decoding failure).
//
// Sequence: IDLE -> (start, s_c != 0) SORT -> SEARCH ... -> DRAIN -> DONE.
// A frame whose hard decision already has s_c == 0 goes IDLE -> DONE, one
// cycle. lw_max, hw_max and delta are run-time inputs bounded by the
// parameters (the paper quotes the design as LW<=96, HW<=8, delta<=30).
// The step structure and the feasibility rule below are this design's own.
// Reset is asynchronous and active low. The assertion at the end also reads
// rst_n (disable iff), so lint reports rst_n as used both asynchronously and
// synchronously; the assertion is not logic, so this is harmless.
module controller
  import lgrand_pkg::*;
#(
  parameter int unsigned N      = 128,
  parameter int unsigned NK     = 32,
  parameter int unsigned LW_MAX = 96,
  parameter int unsigned HW_MAX = 8,
  parameter int unsigned DW     = 5,                       // delta width (delta <= 30)
  parameter int unsigned W      = (LW_MAX - 1) / 2,        // pair lanes of the core
  parameter int unsigned LWW    = $clog2(N * (N + 1) / 2 + 1),
  parameter int unsigned PW     = $clog2(N + 1),
  parameter int unsigned HWW    = $clog2(HW_MAX + 1),
  parameter int unsigned LI     = $clog2(W + 1),
  parameter int unsigned KMAX   = (HW_MAX > 2) ? HW_MAX - 2 : 1   // prefix slots
) (
  input  logic           clk,
  input  logic           rst_n,
  // frame control
  input  logic           start,
  input  logic           syn_zero,        // s_c == 0 for the frame at start
  input  logic [NK-1:0]  s_c,             // syndrome of the frame at start
  input  logic [NK-1:0]  s_sorted [N],    // one-bit syndromes in sorted order (valid from SEARCH)
  input  logic [LWW-1:0] cfg_lw_max,
  input  logic [HWW-1:0] cfg_hw_max,
  input  logic [DW-1:0]  cfg_delta,
  // decoding core, this cycle
  input  logic           core_hit,
  input  logic [LI-1:0]  core_lane,
  input  logic           core_is_single,
  input  logic [PW-1:0]  core_part_a,
  input  logic [PW-1:0]  core_part_b,
  input  logic [LI:0]    core_n_valid,
  // to the decoding core
  output logic [NK-1:0]  s_comp,
  output logic [LWW-1:0] r,
  output logic [PW-1:0]  lo,
  output logic           single_en,
  output logic           pair_en,
  output logic [W:0]     lane_mask,
  // accepted candidate: its flipped sorted positions (1-based)
  output logic           cand,
  output logic [PW-1:0]  flip_pos [HW_MAX],
  output logic [HW_MAX-1:0] flip_en,
  // status
  output phase_e         phase,
  output logic           found,           // at least one candidate so far
  output logic [LWW-1:0] lambda,          // current LW limit
  output logic [HWW-1:0] delta_hw,        // current HW limit
  output logic [LWW-1:0] m_cur,           // current logistic weight
  output logic [31:0]    queries          // TEPs tested in this frame
);

  localparam int unsigned KW = $clog2(KMAX + 1);

  phase_e         phase_q;
  logic [LWW-1:0] m_q, lambda_q;
  logic [HWW-1:0] hwlim_q;
  logic [KW-1:0]  k_q;
  logic [PW-1:0]  pref_q [KMAX];
  logic           found_q;
  logic [W:0]     mask_q;
  logic [NK-1:0]  sc_q;
  logic [31:0]    queries_q;

  // ---------------------------------------------------------------- step view
  int unsigned psum;
  always_comb begin
    psum   = 0;
    s_comp = sc_q;
    lo     = '0;
    for (int i = 0; i < int'(KMAX); i++) begin
      if (i < int'(k_q)) begin
        psum   += int'(pref_q[i]);
        s_comp ^= s_sorted[int'(pref_q[i]) - 1];
        lo      = pref_q[i];
      end
    end
    r         = LWW'(int'(m_q) - int'(psum));
    single_en = (phase_q == PH_SEARCH) && (k_q == '0) && (hwlim_q >= HWW'(1));
    pair_en   = (phase_q == PH_SEARCH) && (int'(k_q) + 2 <= int'(hwlim_q));
    lane_mask = mask_q;
  end

  // ---------------------------------------------------- accepted hit, TEP list
  logic [HWW-1:0] hit_hw;
  always_comb begin
    cand    = (phase_q == PH_SEARCH) && core_hit;
    hit_hw  = core_is_single ? HWW'(1) : HWW'(int'(k_q) + 2);
    flip_en = '0;
    for (int i = 0; i < int'(HW_MAX); i++) flip_pos[i] = '0;
    for (int i = 0; i < int'(KMAX); i++) begin
      if (i < int'(k_q) && i < int'(HW_MAX)) begin
        flip_pos[i] = pref_q[i];
        flip_en[i]  = 1'b1;
      end
    end
    if (core_is_single) begin
      flip_pos[0] = core_part_a;
      flip_en[0]  = 1'b1;
    end else begin
      flip_pos[int'(k_q)]     = core_part_a;
      flip_en[int'(k_q)]      = 1'b1;
      flip_pos[int'(k_q) + 1] = core_part_b;
      flip_en[int'(k_q) + 1]  = 1'b1;
    end
  end

  // ------------------------------------------------------- next schedule step
  // Next prefix of the same size: the largest slot j that can be incremented,
  // with the slots after it reset to consecutive values, such that the rest
  // r' = m - sum' still fits two distinct parts above the new top part.
  logic          np_ok;
  logic [PW-1:0] np_pref [KMAX];
  logic          nk_ok;          // prefix size k+1 starting at 1..k+1 fits
  always_comb begin
    int s_before, s_new, top, kk, base;
    np_ok = 1'b0;
    kk    = int'(k_q);
    base  = 0;
    s_new = 0;
    top   = 0;
    for (int i = 0; i < int'(KMAX); i++) np_pref[i] = pref_q[i];
    s_before = 0;
    for (int j = 0; j < int'(KMAX); j++) begin
      if (j < kk) begin
        base  = int'(pref_q[j]) + 1;
        s_new = s_before + (kk - j) * base + ((kk - j - 1) * (kk - j)) / 2;
        top   = base + (kk - 1 - j);
        if (int'(m_q) - s_new >= 2 * top + 3) begin
          // later (larger) j overrides: lexicographic successor
          np_ok = 1'b1;
          for (int i = 0; i < int'(KMAX); i++)
            if (i < j)        np_pref[i] = pref_q[i];
            else if (i < kk)  np_pref[i] = PW'(base + (i - j));
        end
        s_before += int'(pref_q[j]);
      end
    end
    // only meaningful while TEPs of size k+2 are allowed
    np_ok = np_ok && (kk + 2 <= int'(hwlim_q));
    nk_ok = (kk + 1 <= int'(KMAX)) && (kk + 3 <= int'(hwlim_q)) &&
            (int'(m_q) - ((kk + 1) * (kk + 2)) / 2 >= 2 * (kk + 1) + 3);
  end

  // ------------------------------------------------------------------- state
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase_q   <= PH_IDLE;
      m_q       <= '0;
      lambda_q  <= '0;
      hwlim_q   <= '0;
      k_q       <= '0;
      for (int i = 0; i < int'(KMAX); i++) pref_q[i] <= '0;
      found_q   <= 1'b0;
      mask_q    <= '0;
      sc_q      <= '0;
      queries_q <= '0;
    end else begin
      case (phase_q)
        PH_IDLE: begin
          if (start) begin
            sc_q      <= s_c;
            m_q       <= LWW'(1);
            lambda_q  <= (cfg_lw_max > LWW'(LW_MAX)) ? LWW'(LW_MAX) : cfg_lw_max;
            hwlim_q   <= (cfg_hw_max > HWW'(HW_MAX)) ? HWW'(HW_MAX) : cfg_hw_max;
            k_q       <= '0;
            found_q   <= 1'b0;
            mask_q    <= '0;
            queries_q <= '0;
            phase_q   <= syn_zero ? PH_DONE : PH_SORT;
          end
        end
        PH_SORT: begin
          phase_q <= (lambda_q == '0 || hwlim_q == '0) ? PH_DRAIN : PH_SEARCH;
        end
        PH_SEARCH: begin
          if (mask_q == '0) queries_q <= queries_q + 32'(core_n_valid);
          if (core_hit) begin
            mask_q <= mask_q | ((W+1)'(1) << core_lane);
            if (!found_q) begin
              found_q  <= 1'b1;
              lambda_q <= (int'(m_q) + int'(cfg_delta) < int'(lambda_q)) ?
                          LWW'(int'(m_q) + int'(cfg_delta)) : lambda_q;
              hwlim_q  <= hit_hw;
            end
          end else begin
            mask_q <= '0;
            if (np_ok) begin
              for (int i = 0; i < int'(KMAX); i++) pref_q[i] <= np_pref[i];
            end else if (nk_ok) begin
              k_q <= k_q + KW'(1);
              for (int i = 0; i < int'(KMAX); i++) pref_q[i] <= PW'(i + 1);
            end else if (m_q < lambda_q) begin
              m_q <= m_q + LWW'(1);
              k_q <= '0;
            end else begin
              phase_q <= PH_DRAIN;
            end
          end
        end
        PH_DRAIN: phase_q <= PH_DONE;
        PH_DONE:  phase_q <= PH_IDLE;
        default:  phase_q <= PH_IDLE;
      endcase
    end
  end

  assign phase    = phase_q;
  assign found    = found_q;
  assign lambda   = lambda_q;
  assign delta_hw = hwlim_q;
  assign m_cur    = m_q;
  assign queries  = queries_q;

  // A candidate is only accepted while searching, and its TEP never exceeds
  // the current Hamming weight limit.
  a_hw_limit: assert property (@(posedge clk) disable iff (!rst_n)
                               cand |-> (hit_hw <= hwlim_q));

endmodule
