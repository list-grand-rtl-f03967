// tb_priority_encoder: random and one-hot request vectors; the index must be
// that of the lowest set bit, valid must be set iff any bit is set.
module tb_priority_encoder;
  localparam int WIDTH = 48, IW = 6;
  logic [WIDTH-1:0] req;
  logic [IW-1:0]    idx;
  logic             valid;
  int checks = 0, failures = 0;

  priority_encoder #(.WIDTH(WIDTH), .IW(IW)) dut (.req, .idx, .valid);

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp_i;
    for (int t = 0; t < 600; t++) begin
      if (t < WIDTH) req = WIDTH'(1) << t;
      else if (t == WIDTH) req = '0;
      else begin
        req = {$urandom, $urandom};
        if (t % 3 == 0) req &= {$urandom, $urandom};  // sparser vectors
        if (t % 7 == 0) req = '0;
      end
      #1;
      exp_i = -1;
      for (int i = 0; i < WIDTH; i++) if (req[i] && exp_i < 0) exp_i = i;
      checks++;
      if (valid !== (exp_i >= 0)) begin failures++; $display("valid wrong %h", req); end
      if (exp_i >= 0) begin
        checks++;
        if (int'(idx) != exp_i) begin failures++; $display("idx %0d exp %0d", idx, exp_i); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
