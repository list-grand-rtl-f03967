// tb_syndrome_unit: compares s_c = H * yhat^T with a row-by-row parity
// computation (parity of H row AND yhat) for random H and yhat, plus the zero
// flag on codewords built from the null space of a systematic H.
module tb_syndrome_unit;
  localparam int N = 128, NK = 32;
  logic [NK-1:0] cols [N];
  logic [N-1:0]  rows [NK];
  logic [N-1:0]  yh;
  logic [NK-1:0] s_c;
  logic          zero;
  int checks = 0, failures = 0;

  syndrome_unit #(.N(N), .NK(NK)) dut (.h_cols(cols), .y_hard(yh), .s_c, .zero);

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [NK-1:0] exp_s;
    for (int t = 0; t < 200; t++) begin
      for (int j = 0; j < NK; j++) rows[j] = {$urandom, $urandom, $urandom, $urandom};
      // systematic form H = [A | I]: identity on the last NK columns
      if (t % 2 == 1)
        for (int j = 0; j < NK; j++)
          for (int i = N - NK; i < N; i++) rows[j][i] = (i - (N - NK) == j);
      for (int i = 0; i < N; i++) for (int j = 0; j < NK; j++) cols[i][j] = rows[j][i];
      yh = {$urandom, $urandom, $urandom, $urandom};
      if (t % 2 == 1) begin
        // make yhat a codeword: parity bits = A * info bits
        for (int j = 0; j < NK; j++) yh[N-NK+j] = ^(rows[j][N-NK-1:0] & yh[N-NK-1:0]);
      end
      #1;
      for (int j = 0; j < NK; j++) exp_s[j] = ^(rows[j] & yh);
      checks++;
      if (s_c !== exp_s) begin failures++; $display("syndrome mismatch t=%0d", t); end
      checks++;
      if (zero !== (exp_s == '0)) begin failures++; $display("zero flag mismatch t=%0d", t); end
      if (t % 2 == 1) begin
        checks++;
        if (!zero) begin failures++; $display("codeword not recognised t=%0d", t); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
