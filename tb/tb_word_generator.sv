// tb_word_generator: random hard decisions and up to 8 distinct flip positions
// at n = 128; c_hat must differ from yhat exactly at the enabled positions.
module tb_word_generator;
  localparam int N = 128, P = 8, IW = 7;
  logic [N-1:0]  y_hard;
  logic [IW-1:0] pos [P];
  logic [P-1:0]  pos_en;
  logic [N-1:0]  e, c_hat;
  int checks = 0, failures = 0;

  word_generator #(.N(N), .P(P), .IW(IW)) dut (.*);

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 300; t++) begin
      int perm [N];
      logic [N-1:0] exp_c;
      for (int i = 0; i < N; i++) perm[i] = i;
      perm.shuffle();
      y_hard = {$urandom, $urandom, $urandom, $urandom};
      pos_en = P'($urandom);
      exp_c  = y_hard;
      for (int p = 0; p < P; p++) begin
        pos[p] = IW'(perm[p]);
        if (pos_en[p]) exp_c[perm[p]] = ~exp_c[perm[p]];
      end
      #1;
      checks++;
      if (c_hat !== exp_c) begin failures++; $display("t=%0d c_hat wrong", t); end
      checks++;
      if (e !== (exp_c ^ y_hard)) begin failures++; $display("t=%0d e wrong", t); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
