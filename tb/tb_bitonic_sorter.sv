// tb_bitonic_sorter: random magnitudes (many ties) at n = 128 and at n = 12
// (padded network). Checks: magnitudes ascending, equal magnitudes in channel
// index order, Ind a permutation, and the carried syndrome columns equal to
// the input column of the index they belong to.
module tb_bitonic_sorter;
  localparam int NK = 32, MW = 4;
  int checks = 0, failures = 0;

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // full size
  logic [MW-1:0] mag_a [128];
  logic [NK-1:0] col_a [128];
  logic [6:0]    ind_a [128];
  logic [MW-1:0] ms_a  [128];
  logic [NK-1:0] ss_a  [128];
  bitonic_sorter #(.N(128), .NK(NK), .MW(MW)) dut_a (
    .mag(mag_a), .cols(col_a), .ind(ind_a), .mag_sorted(ms_a), .s_sorted(ss_a));

  // non power of two
  logic [MW-1:0] mag_b [12];
  logic [NK-1:0] col_b [12];
  logic [3:0]    ind_b [12];
  logic [MW-1:0] ms_b  [12];
  logic [NK-1:0] ss_b  [12];
  bitonic_sorter #(.N(12), .NK(NK), .MW(MW)) dut_b (
    .mag(mag_b), .cols(col_b), .ind(ind_b), .mag_sorted(ms_b), .s_sorted(ss_b));

  task automatic check(input int n, input int ind[], input int mg[], input int ms[],
                       input logic [NK-1:0] cin[], input logic [NK-1:0] sout[]);
    bit seen [];
    seen = new[n];
    for (int j = 0; j < n; j++) begin
      checks++;
      if (ind[j] < 0 || ind[j] >= n || seen[ind[j]]) begin
        failures++; $display("n=%0d: Ind not a permutation at %0d", n, j);
      end else seen[ind[j]] = 1;
      checks++;
      if (ind[j] >= 0 && ind[j] < n && (ms[j] != mg[ind[j]] || sout[j] !== cin[ind[j]])) begin
        failures++; $display("n=%0d: payload wrong at %0d", n, j);
      end
      if (j > 0) begin
        checks++;
        if (ms[j-1] > ms[j] || (ms[j-1] == ms[j] && ind[j-1] > ind[j])) begin
          failures++; $display("n=%0d: order wrong at %0d", n, j);
        end
      end
    end
  endtask

  initial begin
    int ia[], ma[], sa[], ib[], mb[], sb[];
    logic [NK-1:0] ca[], cb[], oa[], ob[];
    ia = new[128]; ma = new[128]; sa = new[128]; ca = new[128]; oa = new[128];
    ib = new[12];  mb = new[12];  sb = new[12];  cb = new[12];  ob = new[12];
    for (int t = 0; t < 50; t++) begin
      for (int i = 0; i < 128; i++) begin
        mag_a[i] = (t % 2) ? MW'($urandom_range(0, 3)) : MW'($urandom);
        col_a[i] = $urandom;
      end
      for (int i = 0; i < 12; i++) begin
        mag_b[i] = MW'($urandom);
        col_b[i] = $urandom;
      end
      #1;
      for (int i = 0; i < 128; i++) begin
        ia[i] = ind_a[i]; ma[i] = mag_a[i]; sa[i] = ms_a[i]; ca[i] = col_a[i]; oa[i] = ss_a[i];
      end
      for (int i = 0; i < 12; i++) begin
        ib[i] = ind_b[i]; mb[i] = mag_b[i]; sb[i] = ms_b[i]; cb[i] = col_b[i]; ob[i] = ss_b[i];
      end
      check(128, ia, ma, sa, ca, oa);
      check(12, ib, mb, sb, cb, ob);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
