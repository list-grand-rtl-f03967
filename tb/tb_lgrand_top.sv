// tb_lgrand_top: end-to-end test of the LGRAND decoder against the reference
// model, at n = 16, n-k = 6 (a small code, so that lists with several
// codewords are common), LW_MAX = 40, HW_MAX = 6.
//
// Frames are random codewords of a random systematic code, sent as BPSK with
// amplitude 8 (3 fractional bits) plus noise, quantized to 5-bit
// sign-magnitude. LW limit, HW limit and delta are varied per frame. For every
// frame: success flag, list size, likelihood of the decoded word (it must be a
// codeword with the reference's best metric), and the hard decision returned
// on failure. Frames whose hard decision is a codeword must finish one cycle
// after start (the paper's 1-cycle best case). The mechanisms of the design
// are counted and each must occur: syndrome-zero bypass, LGRAND limit update
// after the first hit, lists of more than one codeword, replacement of the
// kept codeword by a more likely later one, several hits in one TEP group,
// decoding failure, and reloading H.
module tb_lgrand_top;
  import lgrand_ref_pkg::*;
  localparam int N = 16, NK = 6, Q = 5, LW_MAX = 40, HW_MAX = 6, DW = 5;
  localparam int LWW = $clog2(N * (N + 1) / 2 + 1), HWW = $clog2(HW_MAX + 1);
  localparam int FRAMES = 400;

  logic clk = 0, rst_n = 0;
  logic h_load = 0;
  logic [N-1:0]   h_rows_in [NK];
  logic [LWW-1:0] cfg_lw_max;
  logic [HWW-1:0] cfg_hw_max;
  logic [DW-1:0]  cfg_delta;
  logic start = 0;
  logic [Q-1:0]   y [N];
  logic busy, done, success;
  logic [N-1:0]   c_final, u_hat;
  logic [31:0]    queries;
  logic [15:0]    list_size;

  lgrand_top #(.N(N), .NK(NK), .Q(Q), .LW_MAX(LW_MAX), .HW_MAX(HW_MAX), .DW(DW)) dut (.*);

  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  // mechanism counters (observed on the design's internal signals)
  int n_bypass, n_update, n_list, n_replace, n_multi, n_fail, n_reload;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_orb.cand_v_q && dut.u_orb.have_best &&
        lgrand_pkg::sm_gt(32'(dut.metric), 32'(dut.u_orb.best_m), Q + 4)) n_replace++;
    if (dut.u_orb.cand && dut.u_orb.lane_mask != '0) n_multi++;
    if (dut.u_orb.cand && !dut.u_orb.found) n_update++;
  end

  function automatic int gauss(int sd);
    int s = 0;
    for (int i = 0; i < 4; i++) s += $urandom_range(0, 2 * sd) - sd;
    return s;   // roughly normal, std ~ 1.15 * sd
  endfunction

  lgrand_ref rm;
  logic [N-1:0] H [NK];

  task automatic load_code();
    // H = [A | I], A random
    for (int j = 0; j < NK; j++) begin
      H[j] = N'($urandom);
      for (int i = N - NK; i < N; i++) H[j][i] = (i - (N - NK) == j);
    end
    h_rows_in = H;
    @(negedge clk); h_load = 1; @(negedge clk); h_load = 0;
    for (int i = 0; i < N; i++) begin
      rm.col[i] = '0;
      for (int j = 0; j < NK; j++) rm.col[i][j] = H[j][i];
    end
    n_reload++;
  endtask

  initial begin
    rm = new(N);
    for (int j = 0; j < NK; j++) h_rows_in[j] = '0;
    for (int i = 0; i < N; i++) y[i] = '0;
    cfg_lw_max = 0; cfg_hw_max = 0; cfg_delta = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_code();

    for (int f = 0; f < FRAMES; f++) begin
      logic [N-1:0] cw;
      int sd, lw, hw, dl, cyc;
      bit cf [];
      if (f % 100 == 99) load_code();
      // random codeword
      cw = N'($urandom);
      for (int j = 0; j < NK; j++) cw[N-NK+j] = ^(H[j][N-NK-1:0] & cw[N-NK-1:0]);
      sd = (f % 5 == 0) ? 1 : $urandom_range(3, 7);
      for (int i = 0; i < N; i++) begin
        int v;
        v = (cw[i] ? -8 : 8) + gauss(sd);
        if (v > 15) v = 15;
        if (v < -15) v = -15;
        rm.yv[i] = v;
        y[i] = (v < 0) ? {1'b1, 4'(-v)} : {1'b0, 4'(v)};
      end
      case (f % 4)
        0: lw = 40;
        1: lw = $urandom_range(3, 12);
        2: lw = $urandom_range(10, 30);
        default: lw = $urandom_range(1, 40);
      endcase
      hw = $urandom_range(1, 6);
      if (f % 3 == 0) hw = 6;
      dl = $urandom_range(0, 12);
      cfg_lw_max = LWW'(lw); cfg_hw_max = HWW'(hw); cfg_delta = DW'(dl);
      rm.decode(lw, hw, dl);

      @(negedge clk); start = 1; @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end

      cf = new[N];
      for (int i = 0; i < N; i++) cf[i] = c_final[i];
      chk(success == rm.success, $sformatf("frame %0d success %0b exp %0b", f, success, rm.success));
      chk(u_hat == c_final, "u_hat is the decoded word");
      if (rm.zero_syndrome) begin
        n_bypass++;
        chk(cyc == 1, $sformatf("frame %0d: codeword input took %0d cycles", f, cyc));
        chk(list_size == 0, "no list for a codeword input");
      end else if (rm.success) begin
        chk(rm.is_codeword(cf), $sformatf("frame %0d: result not a codeword", f));
        chk(rm.metric_of(cf) == rm.best_metric,
            $sformatf("frame %0d: metric %0d exp %0d", f, rm.metric_of(cf), rm.best_metric));
        chk(int'(list_size) == rm.list_count,
            $sformatf("frame %0d: list %0d exp %0d", f, list_size, rm.list_count));
        if (rm.list_count > 1) n_list++;
      end else begin
        n_fail++;
        for (int i = 0; i < N; i++) chk(cf[i] == rm.yh[i], "failure returns the hard decision");
      end
      @(negedge clk);
    end

    $display("mechanisms: bypass=%0d limit_update=%0d list>1=%0d replace=%0d multi_hit=%0d fail=%0d reload=%0d",
             n_bypass, n_update, n_list, n_replace, n_multi, n_fail, n_reload);
    chk(n_bypass > 0,  "syndrome-zero bypass exercised");
    chk(n_update > 0,  "LGRAND limit update exercised");
    chk(n_list > 0,    "list of several codewords exercised");
    chk(n_replace > 0, "replacement by a more likely candidate exercised");
    chk(n_multi > 0,   "several hits in one group exercised");
    chk(n_fail > 0,    "decoding failure exercised");
    chk(n_reload > 1,  "H reload exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
