// tb_index_mux: random permutation Ind at n = 128; each enabled 1-based sorted
// position p must come out as Ind[p-1], disabled slots as 0 with pos_en low.
module tb_index_mux;
  localparam int N = 128, P = 8, IW = 7, PW = 8;
  logic [IW-1:0] ind [N];
  logic [PW-1:0] flip_pos [P];
  logic [P-1:0]  flip_en;
  logic [IW-1:0] pos [P];
  logic [P-1:0]  pos_en;
  int checks = 0, failures = 0;

  index_mux #(.N(N), .P(P), .IW(IW), .PW(PW)) dut (.*);

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int perm [N];
    for (int t = 0; t < 200; t++) begin
      for (int i = 0; i < N; i++) perm[i] = i;
      perm.shuffle();
      for (int i = 0; i < N; i++) ind[i] = IW'(perm[i]);
      for (int p = 0; p < P; p++) flip_pos[p] = PW'($urandom_range(1, N));
      flip_en = P'($urandom);
      #1;
      checks++;
      if (pos_en !== flip_en) begin failures++; $display("pos_en wrong"); end
      for (int p = 0; p < P; p++) begin
        checks++;
        if (flip_en[p] ? (int'(pos[p]) != perm[flip_pos[p]-1]) : (pos[p] != '0)) begin
          failures++; $display("t=%0d slot %0d pos %0d", t, p, pos[p]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
