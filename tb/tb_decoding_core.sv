// tb_decoding_core: random one-bit syndromes, remaining sums r, prefix tops lo,
// enables and lane masks at n = 16. The expected result is found by listing
// the TEPs of the group ({r} alone, then pairs (a, r-a) with lo < a < r-a <= n
// in increasing a), testing each against s_comp and taking the first unmasked
// one. s_comp is often planted to match one or two TEPs so hits are frequent.
module tb_decoding_core;
  localparam int N = 16, NK = 8, W = 9, LWW = 8, PW = 5, LI = 4;
  logic [NK-1:0]  s_sorted [N];
  logic [NK-1:0]  s_comp;
  logic [LWW-1:0] r;
  logic [PW-1:0]  lo;
  logic           single_en, pair_en;
  logic [W:0]     lane_mask;
  logic           hit, is_single;
  logic [LI-1:0]  lane;
  logic [PW-1:0]  part_a, part_b;
  logic [LI:0]    n_valid;
  int checks = 0, failures = 0;
  int hits = 0;

  decoding_core #(.N(N), .NK(NK), .W(W), .LWW(LWW), .PW(PW), .LI(LI)) dut (.*);

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 3000; t++) begin
      int exp_lane, exp_a, exp_b, nv, rr, l;
      for (int i = 0; i < N; i++) s_sorted[i] = NK'($urandom);
      rr = $urandom_range(1, 20);
      l  = $urandom_range(0, 3);
      r  = LWW'(rr);
      lo = PW'(l);
      single_en = ($urandom_range(0, 3) != 0);
      pair_en   = ($urandom_range(0, 3) != 0);
      lane_mask = (t % 4 == 0) ? (W+1)'($urandom) : '0;
      s_comp    = NK'($urandom);
      case ($urandom_range(0, 2))
        0: if (rr <= N) s_comp = s_sorted[rr-1];
        1: begin
             int a;
             a = l + $urandom_range(1, 6);
             if (a < rr - a && rr - a <= N) s_comp = s_sorted[a-1] ^ s_sorted[rr-a-1];
           end
        default: ;
      endcase
      #1;
      exp_lane = -1; exp_a = 0; exp_b = 0; nv = 0;
      if (single_en && rr <= N) begin
        nv++;
        if ((s_comp ^ s_sorted[rr-1]) == '0 && !lane_mask[0]) begin exp_lane = 0; exp_a = rr; end
      end
      if (pair_en)
        for (int a = l + 1; a <= l + W; a++) begin
          int b;
          b = rr - a;
          if (a < b && b <= N) begin
            nv++;
            if (exp_lane < 0 && (s_comp ^ s_sorted[a-1] ^ s_sorted[b-1]) == '0 && !lane_mask[a-l]) begin
              exp_lane = a - l; exp_a = a; exp_b = b;
            end
          end
        end
      checks++;
      if (hit !== (exp_lane >= 0)) begin failures++; $display("t=%0d hit %0b exp lane %0d", t, hit, exp_lane); end
      checks++;
      if (int'(n_valid) != nv) begin failures++; $display("t=%0d n_valid %0d exp %0d", t, n_valid, nv); end
      if (exp_lane >= 0) begin
        hits++;
        checks++;
        if (int'(lane) != exp_lane || int'(part_a) != exp_a ||
            (exp_lane > 0 && int'(part_b) != exp_b) || is_single != (exp_lane == 0)) begin
          failures++;
          $display("t=%0d lane %0d/%0d a %0d/%0d b %0d/%0d", t, lane, exp_lane, part_a, exp_a, part_b, exp_b);
        end
      end
    end
    checks++;
    if (hits < 100) begin failures++; $display("too few hits exercised: %0d", hits); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
