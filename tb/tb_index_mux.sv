// tb_index_mux: random permutations Ind and random ranks lambda (0 = unused);
// every multiplexer must return Ind[lambda - 1] and flag unused ones invalid.
`timescale 1ns/1ps
module tb_index_mux;
  localparam int N = 32, PMAX = 8, IW = 5, LAMW = 6;
  logic [IW-1:0]   ind [N];
  logic [LAMW-1:0] lam [PMAX];
  logic [IW-1:0]   pos [PMAX];
  logic [PMAX-1:0] pos_valid;

  index_mux #(.N(N), .PMAX(PMAX)) dut (.ind, .lam, .pos, .pos_valid);

  int checks = 0, failures = 0;
  initial begin
    for (int k = 0; k < 200; k++) begin
      int perm [N];
      for (int i = 0; i < N; i++) perm[i] = i;
      perm.shuffle();
      for (int i = 0; i < N; i++) ind[i] = IW'(perm[i]);
      for (int j = 0; j < PMAX; j++) lam[j] = ($urandom_range(0, 3) == 0) ? '0 : LAMW'($urandom_range(1, N));
      #1;
      for (int j = 0; j < PMAX; j++) begin
        checks++;
        if (lam[j] === 0) begin
          if (pos_valid[j]) begin failures++; $display("FAIL unused mux %0d valid", j); end
        end else if (!pos_valid[j] || int'(pos[j]) != perm[lam[j] - 1]) begin
          failures++;
          if (failures < 10) $display("FAIL mux %0d: lam %0d pos %0d exp %0d", j, lam[j], pos[j], perm[lam[j] - 1]);
        end
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
