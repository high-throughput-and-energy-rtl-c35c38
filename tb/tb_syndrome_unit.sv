// tb_syndrome_unit: random H and y_hat; each syndrome bit r must equal the parity
// of (row r of H) AND y_hat, computed row-wise here (the block works column-wise).
// Two fixed cases must give a zero syndrome: y_hat = 0, and a y_hat that selects
// two equal columns.
`timescale 1ns/1ps
module tb_syndrome_unit;
  localparam int N = 24, NMK = 7;
  logic [NMK-1:0] h_cols [N];
  logic [N-1:0]   y_hat;
  logic [NMK-1:0] s_c;

  syndrome_unit #(.N(N), .NMK(NMK)) dut (.h_cols, .y_hat, .s_c);

  int checks = 0, failures = 0;
  initial begin
    for (int k = 0; k < 300; k++) begin
      logic [NMK-1:0] e;
      for (int i = 0; i < N; i++) h_cols[i] = NMK'($urandom);
      y_hat = N'($urandom);
      if (k == 0) y_hat = '0;
      if (k == 1) begin
        h_cols[5] = h_cols[9];
        y_hat = '0; y_hat[5] = 1; y_hat[9] = 1;
      end
      #1;
      for (int r = 0; r < NMK; r++) begin
        logic [N-1:0] row;
        for (int i = 0; i < N; i++) row[i] = h_cols[i][r];
        e[r] = ^(row & y_hat);
      end
      checks++;
      if (s_c !== e) begin
        failures++;
        if (failures < 10) $display("FAIL k=%0d: s_c %h exp %h", k, s_c, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
