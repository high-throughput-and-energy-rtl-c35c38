// tb_sorter_displacement: how far the segmented sorter moves bits from their
// true reliability rank.
//
// Four llr_sorter instances of length 128 with 2, 4, 8 and 16 segments sort the
// same random magnitudes.  The magnitudes are 15-bit random values, so ties are
// rare and the result depends only on the rank statistics of independent inputs.
// For each output position the testbench compares the position with the true rank
// of the bit found there, and accumulates |position - true rank|.  After TRIALS
// words the share of bits within a displacement of 0, 1, 2, 3, 5, 10, 20 and 30
// positions must match the published measurement of the segmented sorter to
// within TOL percentage points.  Each sorter's output must also be a permutation,
// and each segment must come out sorted.
`timescale 1ns/1ps
module tb_sorter_displacement;
  localparam int N = 128, Q = 16, NMK = 1, IW = 7;
  localparam int TRIALS = 300;
  localparam real TOL = 1.5;
  localparam int NS = 4;
  localparam int SEGS [NS] = '{2, 4, 8, 16};
  localparam int DIST [8] = '{0, 1, 2, 3, 5, 10, 20, 30};
  // published shares in percent, rows = segments 2, 4, 8, 16
  localparam real PUB [NS][8] = '{
    '{10.31, 29.40, 45.50, 58.76, 77.84, 96.89, 99.99, 100.0},
    '{ 5.98, 17.42, 28.18, 38.05, 54.62, 81.64, 98.34, 99.94},
    '{ 3.87, 11.40, 18.67, 25.67, 38.65, 63.82, 90.09, 98.10},
    '{ 2.59,  7.67, 12.65, 17.50, 26.85, 47.68, 75.95, 90.58}};

  logic clk = 0;
  always #5 clk = ~clk;

  logic [Q-2:0]   y_mag  [N];
  logic [NMK-1:0] h_cols [N];
  logic [IW-1:0]  ind    [NS][N];
  logic [NMK-1:0] s_out  [NS][N];

  for (genvar g = 0; g < NS; g++) begin : g_dut
    llr_sorter #(.N(N), .NMK(NMK), .Q(Q), .SEGMENTS(SEGS[g])) dut (
      .clk, .y_mag, .h_cols, .ind(ind[g]), .s_sorted(s_out[g]));
  end

  int checks = 0, failures = 0;
  int hist [NS][N];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    for (int g = 0; g < NS; g++) for (int d = 0; d < N; d++) hist[g][d] = 0;
    for (int i = 0; i < N; i++) begin y_mag[i] = '0; h_cols[i] = '0; end
    for (int t = 0; t < TRIALS; t++) begin
      int rank [N];
      @(negedge clk);
      for (int i = 0; i < N; i++) y_mag[i] = (Q-1)'($urandom);
      // true rank of every position: count smaller keys (ties by position)
      for (int i = 0; i < N; i++) begin
        rank[i] = 0;
        for (int j = 0; j < N; j++)
          if (y_mag[j] < y_mag[i] || (y_mag[j] === y_mag[i] && j < i)) rank[i]++;
      end
      repeat (IW + 1) @(negedge clk);
      for (int g = 0; g < NS; g++) begin
        bit seen [N];
        bit perm_ok, seg_ok;
        int sl;
        sl = N / SEGS[g];
        perm_ok = 1; seg_ok = 1;
        for (int i = 0; i < N; i++) seen[i] = 0;
        for (int p = 0; p < N; p++) begin
          int d;
          if (seen[ind[g][p]]) perm_ok = 0;
          seen[ind[g][p]] = 1;
          d = p - rank[ind[g][p]];
          hist[g][(d < 0) ? -d : d]++;
          // consecutive outputs of one segment are S positions apart
          if (p >= SEGS[g] && y_mag[ind[g][p]] < y_mag[ind[g][p - SEGS[g]]]) seg_ok = 0;
          // every output of segment s comes from input slice s
          if (int'(ind[g][p]) / sl !== p % SEGS[g]) seg_ok = 0;
        end
        check(perm_ok, $sformatf("S=%0d: output is not a permutation", SEGS[g]));
        check(seg_ok, $sformatf("S=%0d: segment order or interleave wrong", SEGS[g]));
      end
    end
    for (int g = 0; g < NS; g++) begin
      string line;
      int cum;
      line = $sformatf("S=%2d:", SEGS[g]);
      for (int k = 0; k < 8; k++) begin
        real share;
        cum = 0;
        for (int d = 0; d <= DIST[k]; d++) cum += hist[g][d];
        share = 100.0 * cum / (TRIALS * N);
        line = {line, $sformatf("  <=%0d: %6.2f%% (%6.2f%%)", DIST[k], share, PUB[g][k])};
        check(share > PUB[g][k] - TOL && share < PUB[g][k] + TOL,
              $sformatf("S=%0d displacement <= %0d: %.2f%%, published %.2f%%", SEGS[g], DIST[k], share, PUB[g][k]));
      end
      $display("%s", line);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (TRIALS * (IW + 3) + 100) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
