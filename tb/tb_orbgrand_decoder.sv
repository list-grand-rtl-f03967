// tb_orbgrand_decoder: directed tests of the decoder on the paper's small
// examples, with the likelihood unit modelled here (metric of cand_q).
//
//  (a) n = 6, LW <= 21: all 63 TEPs are tested before the only solution,
//      e = 111111, is found (the paper's 63 TEPs for n = 6, LW_max = 21);
//  (b) n = 6, LW <= 6: 13 TEPs and decoding failure (the paper's 13 TEPs);
//  (c) n = 12, LW <= 12, HW <= 4, delta = 2, solution {3,5} (LW 8, HW 2): the
//      search goes on to LW 10 with HW <= 2, 32 TEPs in all (the paper's
//      LGRAND example);
//  (d) n = 12 without a solution in range: all 69 TEPs are tested;
//  (e) n = 12, two codewords in one TEP group, {1,4} then {2,3}: both are
//      listed and the more likely {2,3} replaces {1,4};
//  (f) a codeword input is returned one cycle after start.
// H = identity for (a)-(d), so the only codeword is 0 and the solution is
// e = yhat. Channel magnitudes grow with the index, so sorted order is
// channel order.
module tb_orbgrand_decoder;
  localparam int Q = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

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

  // ---------------------------------------------------------------- n = 6
  localparam int N6 = 6;
  logic           a_load = 0, a_start = 0;
  logic [N6-1:0]  a_rows [6];
  logic [4:0]     a_lw;
  logic [2:0]     a_hw;
  logic [4:0]     a_dl;
  logic [Q-1:0]   a_y [N6], a_yf [N6];
  logic [N6-1:0]  a_cand, a_cf, a_u;
  logic           a_cv, a_busy, a_done, a_succ;
  logic [Q+2:0]   a_met;
  logic [31:0]    a_q;
  logic [15:0]    a_ls;

  orbgrand_decoder #(.N(N6), .NK(6), .Q(Q), .LW_MAX(21), .HW_MAX(6), .DW(5)) dut6 (
    .clk, .rst_n, .h_load(a_load), .h_rows_in(a_rows), .cfg_lw_max(a_lw), .cfg_hw_max(a_hw),
    .cfg_delta(a_dl), .start(a_start), .y(a_y), .busy(a_busy), .y_frame(a_yf),
    .cand_q(a_cand), .cand_v_q(a_cv), .metric(a_met), .done(a_done), .success(a_succ),
    .c_final(a_cf), .u_hat(a_u), .queries(a_q), .list_size(a_ls));

  // ---------------------------------------------------------------- n = 12
  localparam int N12 = 12;
  logic           b_load = 0, b_start = 0;
  logic [N12-1:0] b_rows [12];
  logic [6:0]     b_lw;
  logic [2:0]     b_hw;
  logic [4:0]     b_dl;
  logic [Q-1:0]   b_y [N12], b_yf [N12];
  logic [N12-1:0] b_cand, b_cf, b_u;
  logic           b_cv, b_busy, b_done, b_succ;
  logic [Q+3:0]   b_met;
  logic [31:0]    b_q;
  logic [15:0]    b_ls;

  orbgrand_decoder #(.N(N12), .NK(12), .Q(Q), .LW_MAX(12), .HW_MAX(4), .DW(5)) dut12 (
    .clk, .rst_n, .h_load(b_load), .h_rows_in(b_rows), .cfg_lw_max(b_lw), .cfg_hw_max(b_hw),
    .cfg_delta(b_dl), .start(b_start), .y(b_y), .busy(b_busy), .y_frame(b_yf),
    .cand_q(b_cand), .cand_v_q(b_cv), .metric(b_met), .done(b_done), .success(b_succ),
    .c_final(b_cf), .u_hat(b_u), .queries(b_q), .list_size(b_ls));

  // likelihood model: sum (-1)^c_i y_i in sign-magnitude
  function automatic int metric_int(input int n, input logic [15:0] c, input int yv []);
    int s = 0;
    for (int i = 0; i < n; i++) s += c[i] ? -yv[i] : yv[i];
    return s;
  endfunction
  int a_yv [], b_yv [];
  always_comb begin
    int s;
    s = (a_yv.size() == N6) ? metric_int(N6, 16'(a_cand), a_yv) : 0;
    a_met = (s < 0) ? {1'b1, 7'(-s)} : {1'b0, 7'(s)};
    s = (b_yv.size() == N12) ? metric_int(N12, 16'(b_cand), b_yv) : 0;
    b_met = (s < 0) ? {1'b1, 8'(-s)} : {1'b0, 8'(s)};
  end

  function automatic logic [Q-1:0] sm(input int v);
    return (v < 0) ? {1'b1, 4'(-v)} : {1'b0, 4'(v)};
  endfunction

  // channel value i: magnitude i+1 (so sorted order = channel order), sign
  // negative where neg[i]
  task automatic set_y6(input logic [N6-1:0] neg);
    a_yv = new[N6];
    for (int i = 0; i < N6; i++) begin a_yv[i] = neg[i] ? -(i + 1) : (i + 1); a_y[i] = sm(a_yv[i]); end
  endtask
  task automatic set_y12(input logic [N12-1:0] neg, input int mags [N12]);
    b_yv = new[N12];
    for (int i = 0; i < N12; i++) begin b_yv[i] = neg[i] ? -mags[i] : mags[i]; b_y[i] = sm(b_yv[i]); end
  endtask

  task automatic run6(output int cyc);
    @(negedge clk); a_start = 1; @(negedge clk); a_start = 0;
    cyc = 1;
    while (!a_done) begin @(negedge clk); cyc++; end
  endtask
  task automatic run12(output int cyc);
    @(negedge clk); b_start = 1; @(negedge clk); b_start = 0;
    cyc = 1;
    while (!b_done) begin @(negedge clk); cyc++; end
  endtask

  initial begin
    int cyc;
    int mags [N12];
    for (int j = 0; j < 6; j++)  a_rows[j] = N6'(1) << j;      // H = I6
    for (int j = 0; j < 12; j++) b_rows[j] = N12'(1) << j;     // H = I12
    for (int i = 0; i < N12; i++) mags[i] = i + 1;
    set_y6('0); set_y12('0, mags);
    a_lw = 21; a_hw = 6; a_dl = 0; b_lw = 12; b_hw = 4; b_dl = 2;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk); a_load = 1; b_load = 1; @(negedge clk); a_load = 0; b_load = 0;

    // (a)
    set_y6(6'b111111); a_lw = 21; a_hw = 6;
    run6(cyc);
    chk(a_succ && a_cf == '0 && a_ls == 1, "(a) solution 111111 found");
    chk(a_q == 63, $sformatf("(a) %0d TEPs, paper: 63", a_q));
    // (b)
    a_lw = 6;
    run6(cyc);
    chk(!a_succ && a_cf == 6'b111111 && a_ls == 0, "(b) failure returns the hard decision");
    chk(a_q == 13, $sformatf("(b) %0d TEPs, paper: 13", a_q));
    // (c) solution at sorted positions 3 and 5
    set_y12(12'b0000_0001_0100, mags); b_lw = 12; b_hw = 4; b_dl = 2;
    run12(cyc);
    chk(b_succ && b_cf == '0 && b_ls == 1, "(c) solution {3,5} found");
    chk(b_q == 32, $sformatf("(c) %0d TEPs, paper: 32", b_q));
    // (d) weight-5 hard decision: no solution with HW <= 4
    set_y12(12'b0000_0001_1111, mags);
    run12(cyc);
    chk(!b_succ && b_ls == 0 && b_cf == 12'b0000_0001_1111, "(d) failure");
    chk(b_q == 69, $sformatf("(d) %0d TEPs, paper: 69", b_q));
    // (e) two codewords in the LW-5 pair group
    b_rows[0] = 12'b1010_1010_1001;   // columns: s1=0001 s2=0100 s3=0111 s4=0010
    b_rows[1] = 12'b1100_1100_1100;   //          s5=1000 s6..s12 = 1001..1111
    b_rows[2] = 12'b1111_0000_0110;
    b_rows[3] = 12'b1111_1111_0000;
    for (int j = 4; j < 12; j++) b_rows[j] = '0;
    @(negedge clk); b_load = 1; @(negedge clk); b_load = 0;
    mags = '{1, 1, 1, 9, 9, 10, 11, 12, 13, 14, 15, 15};
    set_y12(12'b0000_0000_1001, mags); b_lw = 12; b_hw = 4; b_dl = 0;
    run12(cyc);
    chk(b_succ && b_ls == 2, $sformatf("(e) list of 2, got %0d", b_ls));
    chk(b_cf == 12'b0000_0000_1111, $sformatf("(e) more likely codeword kept, got %b", b_cf));
    // (f) codeword input
    set_y12(12'b0000_0000_1111, mags);
    run12(cyc);
    chk(cyc == 1 && b_succ && b_cf == 12'b0000_0000_1111, $sformatf("(f) codeword input, %0d cycles", cyc));
    chk(b_u == b_cf, "u_hat is the decoded word");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
