// orbgrand_decoder: ORBGRAND decoder core extended to produce a list.
//
// Contains the blocks of the ORBGRAND architecture: the H memory, the
// syndrome unit H*yhat^T, the bitonic sorter, the controller, the decoding
// core, the bank of n:1 index multiplexers and the word generator. For
// List-GRAND it does not stop at the first codeword: every candidate c_hat is
// put in the register cand_q, whose likelihood metric M comes back from the
// likelihood unit (MLCU) in the next cycle. The candidate is kept when it is
// the first one or when its M is strictly larger than that of the kept one
// (sign-magnitude comparison), so no list memory is needed.
//
// Frame protocol (this design's choice): pulse start with y valid while idle;
// y is captured. If the hard decision is a codeword, done pulses on the next
// cycle. Otherwise one sorting cycle follows, then one schedule step per cycle
// (one more cycle for each extra hit in the same step), one drain cycle, and
// done. c_final / u_hat / success / queries / list_size hold from done until
// the next start. u_hat is the kept codeword itself (n bits, as drawn in the
// paper); mapping it to the k message bits with G^-1 is left to the user,
// which for a systematic code is a bit selection.
//
// Channel values are Q-bit sign-magnitude (MSB = sign, 1 = negative = hard
// decision 1). The paper gives Q = 5 with 3 fractional bits; the binary point
// does not matter to the decoder.
//
// Some sub-block outputs are left open here on purpose: the controller's
// status (found, lambda, m_cur, delta_hw), the sorter's sorted magnitudes and
// the word generator's error pattern e. They serve observation and the
// block testbenches; lint lists them as unused. rst_n is an asynchronous
// active-low reset (the controller's assertion also reads it).
module orbgrand_decoder
  import lgrand_pkg::*;
#(
  parameter int unsigned N      = 128,
  parameter int unsigned NK     = 32,
  parameter int unsigned Q      = 5,
  parameter int unsigned LW_MAX = 96,
  parameter int unsigned HW_MAX = 8,
  parameter int unsigned DW     = 5,
  parameter int unsigned LWW    = $clog2(N * (N + 1) / 2 + 1),
  parameter int unsigned HWW    = $clog2(HW_MAX + 1),
  parameter int unsigned MW     = Q + $clog2(N)
) (
  input  logic           clk,
  input  logic           rst_n,
  // parity check matrix load
  input  logic           h_load,
  input  logic [N-1:0]   h_rows_in [NK],
  // configuration, sampled at start
  input  logic [LWW-1:0] cfg_lw_max,
  input  logic [HWW-1:0] cfg_hw_max,
  input  logic [DW-1:0]  cfg_delta,
  // frame in
  input  logic           start,
  input  logic [Q-1:0]   y [N],
  output logic           busy,
  // candidate to the likelihood unit, and its metric back
  output logic [Q-1:0]   y_frame [N],
  output logic [N-1:0]   cand_q,
  output logic           cand_v_q,
  input  logic [MW-1:0]  metric,
  // result
  output logic           done,
  output logic           success,
  output logic [N-1:0]   c_final,
  output logic [N-1:0]   u_hat,
  output logic [31:0]    queries,
  output logic [15:0]    list_size
);

  localparam int unsigned IW = $clog2(N);
  localparam int unsigned PW = $clog2(N + 1);
  localparam int unsigned W  = (LW_MAX - 1) / 2;
  localparam int unsigned LI = $clog2(W + 1);

  // ------------------------------------------------------------------ inputs
  logic [NK-1:0] h_cols [N];
  h_memory #(.N(N), .NK(NK)) u_hmem (
    .clk, .rst_n, .h_load, .h_rows_in, .h_cols
  );

  logic [N-1:0]  y_hard_in;
  logic [NK-1:0] s_c;
  logic          syn_zero;
  always_comb for (int i = 0; i < int'(N); i++) y_hard_in[i] = y[i][Q-1];

  syndrome_unit #(.N(N), .NK(NK)) u_syn (
    .h_cols, .y_hard(y_hard_in), .s_c, .zero(syn_zero)
  );

  phase_e phase;
  logic [Q-1:0]  y_q [N];
  logic [N-1:0]  yh_q;
  logic          start_ok;
  assign start_ok = start && (phase == PH_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(N); i++) y_q[i] <= '0;
      yh_q <= '0;
    end else if (start_ok) begin
      for (int i = 0; i < int'(N); i++) y_q[i] <= y[i];
      yh_q <= y_hard_in;
    end
  end
  assign y_frame = y_q;

  // ------------------------------------------------------------------ sorter
  logic [Q-2:0]  mag_q [N];
  logic [IW-1:0] ind_c [N], ind_q [N];
  logic [Q-2:0]  mag_sorted [N];
  logic [NK-1:0] s_sorted_c [N], s_sorted_q [N];
  always_comb for (int i = 0; i < int'(N); i++) mag_q[i] = y_q[i][Q-2:0];

  bitonic_sorter #(.N(N), .NK(NK), .MW(Q-1)) u_sort (
    .mag(mag_q), .cols(h_cols), .ind(ind_c), .mag_sorted, .s_sorted(s_sorted_c)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(N); i++) begin
        ind_q[i]      <= '0;
        s_sorted_q[i] <= '0;
      end
    end else if (phase == PH_SORT) begin
      ind_q      <= ind_c;
      s_sorted_q <= s_sorted_c;
    end
  end

  // ------------------------------------------------- controller and TEP core
  logic [NK-1:0]  s_comp;
  logic [LWW-1:0] r;
  logic [PW-1:0]  lo;
  logic           single_en, pair_en;
  logic [W:0]     lane_mask;
  logic           core_hit, core_is_single;
  logic [LI-1:0]  core_lane;
  logic [PW-1:0]  core_part_a, core_part_b;
  logic [LI:0]    core_n_valid;
  logic           cand;
  logic [PW-1:0]  flip_pos [HW_MAX];
  logic [HW_MAX-1:0] flip_en;
  logic           found;
  logic [LWW-1:0] lambda, m_cur;
  logic [HWW-1:0] delta_hw;

  controller #(.N(N), .NK(NK), .LW_MAX(LW_MAX), .HW_MAX(HW_MAX), .DW(DW), .W(W),
               .LWW(LWW), .PW(PW), .HWW(HWW), .LI(LI)) u_ctrl (
    .clk, .rst_n,
    .start(start_ok), .syn_zero, .s_c, .s_sorted(s_sorted_q),
    .cfg_lw_max, .cfg_hw_max, .cfg_delta,
    .core_hit, .core_lane, .core_is_single, .core_part_a, .core_part_b, .core_n_valid,
    .s_comp, .r, .lo, .single_en, .pair_en, .lane_mask,
    .cand, .flip_pos, .flip_en,
    .phase, .found, .lambda, .delta_hw, .m_cur, .queries
  );

  decoding_core #(.N(N), .NK(NK), .W(W), .LWW(LWW), .PW(PW), .LI(LI)) u_core (
    .s_sorted(s_sorted_q), .s_comp, .r, .lo, .single_en, .pair_en, .lane_mask,
    .hit(core_hit), .lane(core_lane), .is_single(core_is_single),
    .part_a(core_part_a), .part_b(core_part_b), .n_valid(core_n_valid)
  );

  // ------------------------------------------------------- candidate codeword
  logic [IW-1:0]     pos [HW_MAX];
  logic [HW_MAX-1:0] pos_en;
  logic [N-1:0]      e_pat, c_hat;

  index_mux #(.N(N), .P(HW_MAX), .IW(IW), .PW(PW)) u_imux (
    .ind(ind_q), .flip_pos, .flip_en, .pos, .pos_en
  );

  word_generator #(.N(N), .P(HW_MAX), .IW(IW)) u_wgen (
    .y_hard(yh_q), .pos, .pos_en, .e(e_pat), .c_hat
  );

  // --------------------------------------------- list: keep the most likely
  logic [N-1:0]  best_c;
  logic [MW-1:0] best_m;
  logic          have_best;
  logic          zero_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cand_q    <= '0;
      cand_v_q  <= 1'b0;
      best_c    <= '0;
      best_m    <= '0;
      have_best <= 1'b0;
      zero_q    <= 1'b0;
      list_size <= '0;
    end else begin
      cand_v_q <= cand;
      if (cand) cand_q <= c_hat;
      if (start_ok) begin
        have_best <= 1'b0;
        zero_q    <= syn_zero;
        list_size <= '0;
      end else if (cand_v_q) begin
        list_size <= list_size + 16'd1;
        if (!have_best || sm_gt(32'(metric), 32'(best_m), MW)) begin
          best_c    <= cand_q;
          best_m    <= metric;
          have_best <= 1'b1;
        end
      end
    end
  end

  assign busy    = (phase != PH_IDLE);
  assign done    = (phase == PH_DONE);
  assign success = zero_q || have_best;
  assign c_final = have_best ? best_c : yh_q;
  assign u_hat   = c_final;

endmodule
