// tb_lgrand_full: the decoder at its default size (n = 128, n-k <= 32, Q = 5,
// LW <= 96, HW <= 8, delta <= 30), no parameter overrides.
//
// A random systematic (128,104) code (24 parity checks, the upper 8 rows of
// the H memory left zero) is loaded. Frames are noisy BPSK codewords with a
// few weakly received bits flipped, decoded with LW_max = 96, HW_max = 8 and
// delta = 24 or 25 (the values the paper uses for its (128,112) and (127,113)
// latency results), and compared with the reference model: success, list
// size, likelihood of the decoded codeword. One noiseless frame checks the
// one-cycle decode of a received codeword. Frames 7..10 carry more noise and
// 3 to 5 weak errors. The code is given the weight-3 codeword {0,1,2}, and
// frame 11 is built so that two codewords are found (list of two). Frame 12
// has 16 strong errors, so no codeword is in reach: it runs the full search
// and checks the worst case of this design's schedule, 3,107,281 TEPs in
// 468,097 cycles (the paper's design needs 93,415 cycles; see the README).
// Decode cycles are reported for every frame.
module tb_lgrand_full;
  import lgrand_ref_pkg::*;
  localparam int N = 128, NK = 32, PAR = 24, Q = 5;
  localparam int NF = 13;   // frames 7.. are the harder ones

  logic clk = 0, rst_n = 0;
  logic h_load = 0;
  logic [N-1:0] h_rows_in [NK];
  logic [13:0]  cfg_lw_max;
  logic [3:0]   cfg_hw_max;
  logic [4:0]   cfg_delta;
  logic start = 0;
  logic [Q-1:0] y [N];
  logic busy, done, success;
  logic [N-1:0] c_final, u_hat;
  logic [31:0]  queries;
  logic [15:0]  list_size;

  lgrand_top dut (.*);

  int checks = 0, failures = 0;
  int n_list = 0, n_fail = 0;
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  lgrand_ref rm;
  logic [N-1:0] H [NK];

  initial begin
    rm = new(N);
    for (int j = 0; j < NK; j++) begin
      H[j] = '0;
      if (j < PAR) begin
        H[j] = {$urandom, $urandom, $urandom, $urandom};
        for (int i = N - PAR; i < N; i++) H[j][i] = (i - (N - PAR) == j);
      end
    end
    // columns 0, 1 and 2 XOR to zero: {0,1,2} is a weight-3 codeword
    for (int j = 0; j < PAR; j++) H[j][0] = H[j][1] ^ H[j][2];
    h_rows_in = H;
    for (int i = 0; i < N; i++) begin
      y[i] = '0;
      rm.col[i] = '0;
      for (int j = 0; j < NK; j++) rm.col[i][j] = H[j][i];
    end
    cfg_lw_max = 96; cfg_hw_max = 8; cfg_delta = 24;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk); h_load = 1; @(negedge clk); h_load = 0;

    for (int f = 0; f < NF; f++) begin
      logic [N-1:0] cw;
      int cyc, nflip;
      bit cf [];
      cw = {$urandom, $urandom, $urandom, $urandom};
      for (int j = 0; j < PAR; j++) cw[N-PAR+j] = ^(H[j][N-PAR-1:0] & cw[N-PAR-1:0]);
      for (int i = 0; i < N; i++) begin
        int v;
        v = (cw[i] ? -8 : 8);
        if (f >= 7 && f != 11) v += $urandom_range(0, 12) - 6;
        else if (f > 0) v += $urandom_range(0, 8) - 4;
        rm.yv[i] = v;
      end
      // weakly received wrong bits
      nflip = (f == 0 || f == 11) ? 0 : (f == 12) ? 16 : (f >= 7) ? 3 + (f % 3) : 1 + (f % 3);
      for (int t = 0; t < nflip; t++) begin
        int p;
        p = $urandom_range(0, N - 1);
        if (f == 12) rm.yv[p] = cw[p] ? 8 : -8;   // strong errors: no codeword in reach
        else rm.yv[p] = cw[p] ? $urandom_range(1, 3) : -$urandom_range(1, 3);
      end
      if (f == 11) begin
        // bits 0 and 1 wrong (ranks 1, 2), bit 64 correct (rank 3), bit 2
        // correct (rank 4): {1,2} hits at LW 3 with HW 2, then {4} gives
        // the codeword cw ^ {0,1,2} at LW 4 with HW 1: a list of two
        rm.yv[0]  = cw[0]  ? 1 : -1;
        rm.yv[1]  = cw[1]  ? 1 : -1;
        rm.yv[64] = cw[64] ? -2 : 2;
        rm.yv[2]  = cw[2]  ? -3 : 3;
      end
      for (int i = 0; i < N; i++)
        y[i] = (rm.yv[i] < 0) ? {1'b1, 4'(-rm.yv[i])} : {1'b0, 4'(rm.yv[i])};
      cfg_delta = (f % 2 != 0) ? 5'd25 : 5'd24;
      rm.decode(96, 8, int'(cfg_delta));

      @(negedge clk); start = 1; @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      cf = new[N];
      for (int i = 0; i < N; i++) cf[i] = c_final[i];
      $display("frame %0d: %0d cycles, %0d TEPs, list %0d, first LW %0d", f, cyc, queries, list_size, rm.first_lw);
      chk(success == rm.success, $sformatf("frame %0d success", f));
      if (rm.zero_syndrome) chk(cyc == 1, "codeword input decoded in one cycle");
      if (rm.success) begin
        chk(rm.is_codeword(cf), $sformatf("frame %0d codeword", f));
        chk(rm.metric_of(cf) == rm.best_metric, $sformatf("frame %0d metric %0d exp %0d", f, rm.metric_of(cf), rm.best_metric));
        chk(int'(list_size) == rm.list_count, $sformatf("frame %0d list %0d exp %0d", f, list_size, rm.list_count));
      end
      if (list_size > 1) n_list++;
      if (!success) begin
        // every distinct partition with LW <= 96, at most 8 parts, tested:
        // 3,107,281 TEPs in 468,094 groups, plus start, sort and drain cycles
        n_fail++;
        chk(queries == 32'd3107281, $sformatf("worst-case TEPs %0d", queries));
        chk(cyc == 468097, $sformatf("worst-case cycles %0d", cyc));
      end
      @(negedge clk);
    end
    $display("list>1 frames %0d, failed frames %0d", n_list, n_fail);
    chk(n_list > 0, "a list of several codewords occurred");
    chk(n_fail > 0, "a full search without codeword occurred");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
