// tb_llr_sorter: checks the reliability sorter, unsegmented and in 2 segments.
// Random magnitudes (with many ties) and H columns are applied and held; after
// log2(N/S) cycles Ind must equal the order of the reference model (ascending
// magnitude, ties to the lower position, segment outputs interleaved) and every
// s_sorted[j] must be the H column of Ind[j].
`timescale 1ns/1ps
module tb_llr_sorter;
  import orbgrand_ref_pkg::*;
  localparam int N = 16, NMK = 6, Q = 5, IW = 4;

  logic clk = 0;
  always #5 clk = ~clk;

  logic [Q-2:0]   y_mag [N];
  logic [NMK-1:0] h_cols [N];
  logic [IW-1:0]  ind [2][N];
  logic [NMK-1:0] s_sorted [2][N];

  llr_sorter #(.N(N), .NMK(NMK), .Q(Q), .SEGMENTS(1)) dut0 (.clk, .y_mag, .h_cols, .ind(ind[0]), .s_sorted(s_sorted[0]));
  llr_sorter #(.N(N), .NMK(NMK), .Q(Q), .SEGMENTS(2)) dut1 (.clk, .y_mag, .h_cols, .ind(ind[1]), .s_sorted(s_sorted[1]));

  int checks = 0, failures = 0;

  initial begin
    for (int trial = 0; trial < 50; trial++) begin
      int mag [MAXN];
      int exp_ind [2][MAXN];
      @(negedge clk);
      for (int i = 0; i < MAXN; i++) mag[i] = 0;
      for (int i = 0; i < N; i++) begin
        mag[i]    = $urandom_range(0, 7);
        y_mag[i]  = 4'(mag[i]);
        h_cols[i] = NMK'($urandom);
      end
      sort_order(N, 1, mag, exp_ind[0]);
      sort_order(N, 2, mag, exp_ind[1]);
      for (int d = 0; d < 2; d++) begin
        int lat;
        lat = (d == 0) ? 4 : 3;
        repeat (lat) @(posedge clk);
        #1;
        for (int j = 0; j < N; j++) begin
          checks++;
          if (int'(ind[d][j]) !== exp_ind[d][j] || s_sorted[d][j] !== h_cols[exp_ind[d][j]]) begin
            failures++;
            if (failures < 10) $display("FAIL S=%0d rank %0d: ind %0d exp %0d", d + 1, j, ind[d][j], exp_ind[d][j]);
          end
        end
      end
      repeat (2) @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
