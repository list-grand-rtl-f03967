// tb_h_memory: checks that the parity check matrix store presents column i of
// the loaded matrix as h_cols[i], keeps its content while h_load is low, and
// clears on reset. Paper sizes (n = 128, n-k = 32).
module tb_h_memory;
  localparam int N = 128, NK = 32;
  logic clk = 0, rst_n = 0, h_load = 0;
  logic [N-1:0]  rows [NK];
  logic [NK-1:0] cols [N];
  int checks = 0, failures = 0;

  h_memory #(.N(N), .NK(NK)) dut (.clk, .rst_n, .h_load, .h_rows_in(rows), .h_cols(cols));

  always #5 clk = ~clk;
  initial begin : watchdog
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_against(input logic [N-1:0] ref_rows [NK]);
    for (int i = 0; i < N; i++)
      for (int j = 0; j < NK; j++) begin
        checks++;
        if (cols[i][j] !== ref_rows[j][i]) begin
          failures++;
          if (failures < 5) $display("mismatch col %0d row %0d", i, j);
        end
      end
  endtask

  logic [N-1:0] saved [NK];
  logic [N-1:0] zeros [NK];
  initial begin
    for (int j = 0; j < NK; j++) begin rows[j] = '0; zeros[j] = '0; end
    repeat (2) @(posedge clk);
    #1 check_against(zeros);
    rst_n = 1;
    for (int t = 0; t < 4; t++) begin
      for (int j = 0; j < NK; j++) rows[j] = {$urandom, $urandom, $urandom, $urandom};
      h_load = 1;
      @(posedge clk); #1;
      h_load = 0;
      saved = rows;
      check_against(saved);
      for (int j = 0; j < NK; j++) rows[j] = ~rows[j];   // must be ignored
      @(posedge clk); #1;
      check_against(saved);
    end
    rst_n = 0; #1;
    check_against(zeros);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
