// tb_controller: the test-error-pattern schedule at n = 12.
//
// The decoding core is replaced by this testbench. In every search cycle the
// group of TEPs that the controller asks for is expanded from its outputs
// (prefix from flip_pos/flip_en, remaining sum r, top part lo, enables) and
// recorded. Checks:
//  1. exhaustive run (no hit): every distinct partition with LW <= L, HW <= H
//     and parts <= n is asked for exactly once, in non-decreasing LW, and the
//     query counter equals that number (69 for the paper's n = 12, LW 12,
//     HW 4 example; also LW 40, HW 6);
//  2. the paper's LGRAND example (n = 12, LW 12, HW 4, delta 2) with a hit on
//     TEP {3,5} (LW 8, HW 2): Lambda becomes 10, Delta 2, the hit is reported
//     with its flip positions, later groups hold only HW <= 2 TEPs, and the
//     query count is 32 (the number of TEPs the paper's figure shows);
//  3. two hits in one group: the group is repeated with the first lane masked;
//  4. a frame whose hard decision is a codeword finishes in one cycle.
module tb_controller;
  import lgrand_pkg::*;
  localparam int N = 12, NK = 4, LW_MAX = 40, HW_MAX = 6, DW = 5;
  localparam int W = (LW_MAX - 1) / 2, LWW = 7, PW = 4, HWW = 3, LI = 5;

  logic clk = 0, rst_n = 0;
  logic start = 0, syn_zero = 0;
  logic [NK-1:0]  s_c = 4'h5;
  logic [NK-1:0]  s_sorted [N];
  logic [LWW-1:0] cfg_lw_max;
  logic [HWW-1:0] cfg_hw_max;
  logic [DW-1:0]  cfg_delta;
  logic           core_hit = 0, core_is_single = 0;
  logic [LI-1:0]  core_lane = '0;
  logic [PW-1:0]  core_part_a = '0, core_part_b = '0;
  logic [LI:0]    core_n_valid;
  logic [NK-1:0]  s_comp;
  logic [LWW-1:0] r;
  logic [PW-1:0]  lo;
  logic           single_en, pair_en;
  logic [W:0]     lane_mask;
  logic           cand;
  logic [PW-1:0]  flip_pos [HW_MAX];
  logic [HW_MAX-1:0] flip_en;
  phase_e         phase;
  logic           found;
  logic [LWW-1:0] lambda, m_cur;
  logic [HWW-1:0] delta_hw;
  logic [31:0]    queries;

  controller #(.N(N), .NK(NK), .LW_MAX(LW_MAX), .HW_MAX(HW_MAX), .DW(DW), .W(W),
               .LWW(LWW), .PW(PW), .HWW(HWW), .LI(LI)) dut (.*);

  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // ---- group expansion (combinational model of what the core would test)
  int seen [4096];
  int grp_prefix_mask, grp_k, grp_m;
  int grp_list [$];
  always_comb begin
    int pm, k, rr;
    pm = 0; k = 0;
    for (int i = 0; i < HW_MAX; i++) if (flip_en[i]) k++;
    k = k - 2;                       // core_is_single = 0: last two slots are a, b
    if (k < 0) k = 0;
    for (int i = 0; i < k; i++) pm |= 1 << (int'(flip_pos[i]) - 1);
    rr = int'(r);
    grp_prefix_mask = pm;
    grp_k = k;
    grp_m = rr;
    for (int i = 0; i < k; i++) grp_m += int'(flip_pos[i]);
    grp_list.delete();
    if (single_en && rr >= 1 && rr <= N) grp_list.push_back(1 << (rr - 1));
    if (pair_en)
      for (int j = 1; j <= W; j++) begin
        int a, b;
        a = int'(lo) + j; b = rr - a;
        if (a < b && b <= N) grp_list.push_back(pm | (1 << (a - 1)) | (1 << (b - 1)));
      end
    core_n_valid = (LI+1)'(grp_list.size());
  end

  int last_m, total_groups;
  int max_hw_after_hit;
  bit after_hit;
  always @(posedge clk) begin
    if (phase == PH_SEARCH && lane_mask == '0) begin
      total_groups++;
      if (grp_m < last_m) begin failures++; $display("FAIL: LW order %0d after %0d", grp_m, last_m); end
      last_m = grp_m;
      foreach (grp_list[i]) begin
        seen[grp_list[i]]++;
        if (after_hit && $countones(grp_list[i]) > max_hw_after_hit) max_hw_after_hit = $countones(grp_list[i]);
      end
    end
  end

  function automatic int count_parts(input int lw, input int hw);
    int c = 0;
    for (int s = 1; s < 4096; s++) begin
      int sum = 0;
      for (int i = 0; i < N; i++) if (s[i]) sum += i + 1;
      if (sum <= lw && $countones(s) <= hw) c++;
    end
    return c;
  endfunction

  task automatic clear_seen();
    foreach (seen[i]) seen[i] = 0;
    last_m = 0; total_groups = 0; after_hit = 0; max_hw_after_hit = 0;
  endtask

  task automatic run_exhaustive(input int lw, input int hw, input int expect_count);
    int dup = 0, miss = 0, extra = 0;
    clear_seen();
    cfg_lw_max = LWW'(lw); cfg_hw_max = HWW'(hw); cfg_delta = 2;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (phase != PH_DONE) @(negedge clk);
    for (int s = 1; s < 4096; s++) begin
      int sum = 0;
      bit want;
      for (int i = 0; i < N; i++) if (s[i]) sum += i + 1;
      want = (sum <= lw) && ($countones(s) <= hw);
      if (want && seen[s] == 0) begin miss++; if (miss < 6) $display("missing %b sum %0d", s[11:0], sum); end
      if (seen[s] > 1) dup++;
      if (!want && seen[s] != 0) extra++;
    end
    chk(miss == 0 && dup == 0 && extra == 0,
        $sformatf("LW %0d HW %0d: missing %0d, repeated %0d, extra %0d", lw, hw, miss, dup, extra));
    chk(int'(queries) == expect_count, $sformatf("LW %0d HW %0d: queries %0d exp %0d", lw, hw, queries, expect_count));
    chk(!found, "no hit expected");
    $display("exhaustive LW<=%0d HW<=%0d: %0d TEPs in %0d groups", lw, hw, queries, total_groups);
  endtask

  initial begin
    for (int i = 0; i < N; i++) s_sorted[i] = NK'(i + 1);
    cfg_lw_max = 12; cfg_hw_max = 4; cfg_delta = 2;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // 1. exhaustive schedules
    run_exhaustive(12, 4, 69);
    chk(count_parts(12, 4) == 69, "reference count for the paper's n=12 example");
    run_exhaustive(40, 6, count_parts(40, 6));

    // 2. paper example: hit on {3,5} at LW 8, delta = 2
    clear_seen();
    cfg_lw_max = 12; cfg_hw_max = 4; cfg_delta = 2;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!(phase == PH_SEARCH && grp_m == 8 && grp_k == 0)) @(negedge clk);
    core_hit = 1; core_lane = 3; core_part_a = 3; core_part_b = 5; core_is_single = 0;
    #1;
    chk(cand && flip_en == 6'b000011 && flip_pos[0] == 3 && flip_pos[1] == 5, "hit flip positions {3,5}");
    @(negedge clk);
    core_hit = 0; core_lane = 0; core_part_a = 0; core_part_b = 0;
    chk(found && lambda == 10 && delta_hw == 2, $sformatf("Lambda %0d Delta %0d after hit", lambda, delta_hw));
    chk(lane_mask == (W+1)'(1) << 3, "hit lane masked");
    after_hit = 1;
    while (phase != PH_DONE) @(negedge clk);
    chk(max_hw_after_hit <= 2, $sformatf("HW after hit %0d", max_hw_after_hit));
    chk(last_m == 10, $sformatf("search ends at LW %0d", last_m));
    chk(int'(queries) == 32, $sformatf("paper example queries %0d, exp 32", queries));

    // 3. two hits in the same group
    clear_seen();
    cfg_lw_max = 12; cfg_hw_max = 4; cfg_delta = 0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!(phase == PH_SEARCH && grp_m == 9 && grp_k == 0)) @(negedge clk);
    core_hit = 1; core_lane = 1; core_part_a = 1; core_part_b = 8;
    @(negedge clk);
    chk(phase == PH_SEARCH && grp_m == 9 && lane_mask == (W+1)'(2), "group repeated with lane 1 masked");
    core_hit = 1; core_lane = 2; core_part_a = 2; core_part_b = 7;
    @(negedge clk);
    chk(lane_mask == (W+1)'(6), "both lanes masked");
    core_hit = 0;
    while (phase != PH_DONE) @(negedge clk);
    chk(last_m == 9 && lambda == 9, "delta 0 ends the search at the hit's LW");

    // 4. hard decision is a codeword
    @(negedge clk); syn_zero = 1; start = 1; @(negedge clk); start = 0; syn_zero = 0;
    chk(phase == PH_DONE, "zero syndrome: done one cycle after start");
    @(negedge clk);
    chk(phase == PH_IDLE, "back to idle");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
