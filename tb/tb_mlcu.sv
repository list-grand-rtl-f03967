// tb_mlcu: likelihood metric at n = 128, Q = 5. Random sign-magnitude channel
// values and candidates, including the extremes (all magnitudes 15, every bit
// agreeing or every bit disagreeing). The expected value is the integer sum of
// (-1)^c_i * y_i, written in sign-magnitude on Q + 7 bits; en low gives 0.
module tb_mlcu;
  localparam int N = 128, Q = 5, MW = 12;
  logic [N-1:0]  c_hat;
  logic [Q-1:0]  y [N];
  logic          en;
  logic [MW-1:0] metric;
  int checks = 0, failures = 0;

  mlcu #(.N(N), .Q(Q)) dut (.c_hat, .y, .en, .metric);

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 300; t++) begin
      int sum;
      logic [MW-1:0] exp_m;
      en = (t % 10 != 9);
      for (int i = 0; i < N; i++) begin
        y[i] = Q'($urandom);
        if (t < 2) y[i][Q-2:0] = '1;
      end
      c_hat = {$urandom, $urandom, $urandom, $urandom};
      if (t == 0) for (int i = 0; i < N; i++) c_hat[i] = y[i][Q-1];    // all agree
      if (t == 1) for (int i = 0; i < N; i++) c_hat[i] = ~y[i][Q-1];   // all disagree
      #1;
      sum = 0;
      for (int i = 0; i < N; i++) begin
        int v;
        v = int'(y[i][Q-2:0]);
        if (y[i][Q-1] ^ c_hat[i]) v = -v;
        sum += v;
      end
      if (!en) sum = 0;
      exp_m = (sum < 0) ? {1'b1, (MW-1)'(-sum)} : {1'b0, (MW-1)'(sum)};
      checks++;
      if (metric !== exp_m) begin failures++; $display("t=%0d metric %h exp %h (sum %0d)", t, metric, exp_m, sum); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
