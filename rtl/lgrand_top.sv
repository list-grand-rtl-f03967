// lgrand_top: List-GRAND (LGRAND) soft-input decoder for (n,k) linear codes.
//
// The ORBGRAND decoder tests error patterns in logistic-weight order but,
// unlike ORBGRAND, keeps searching after the first codeword, up to delta
// logistic weights further and only with patterns no heavier than the first
// hit. Each codeword found goes, through the candidate register, to the
// Maximum Likelihood Computation Unit, whose metric M returns to the decoder
// one cycle later; the decoder keeps the candidate with the largest M. This
// is the top level of the paper's LGRAND architecture.
//
// Defaults are the paper's implementation: n = 128, Q = 5, rate >= 0.75
// (n-k <= 32), LW <= 96, HW <= 8, delta <= 30 (5-bit delta input). See
// orbgrand_decoder for the frame protocol. All ports are plain signals.
module lgrand_top #(
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
  input  logic           h_load,
  input  logic [N-1:0]   h_rows_in [NK],
  input  logic [LWW-1:0] cfg_lw_max,
  input  logic [HWW-1:0] cfg_hw_max,
  input  logic [DW-1:0]  cfg_delta,
  input  logic           start,
  input  logic [Q-1:0]   y [N],
  output logic           busy,
  output logic           done,
  output logic           success,
  output logic [N-1:0]   c_final,
  output logic [N-1:0]   u_hat,
  output logic [31:0]    queries,
  output logic [15:0]    list_size
);

  logic [Q-1:0]  y_frame [N];
  logic [N-1:0]  cand_q;
  logic          cand_v_q;
  logic [MW-1:0] metric;

  orbgrand_decoder #(.N(N), .NK(NK), .Q(Q), .LW_MAX(LW_MAX), .HW_MAX(HW_MAX),
                     .DW(DW), .LWW(LWW), .HWW(HWW), .MW(MW)) u_orb (
    .clk, .rst_n, .h_load, .h_rows_in, .cfg_lw_max, .cfg_hw_max, .cfg_delta,
    .start, .y, .busy, .y_frame, .cand_q, .cand_v_q, .metric,
    .done, .success, .c_final, .u_hat, .queries, .list_size
  );

  mlcu #(.N(N), .Q(Q)) u_mlcu (
    .c_hat(cand_q), .y(y_frame), .en(cand_v_q), .metric
  );

endmodule
