// tb_decoder_core: checks the shift-register/XOR network of one time step.
//
// Random sorted syndromes (with some repeated values, so that several candidates
// can hit at once) and random step windows are applied: Hamming-weight-1 steps,
// P = 2/3 steps for m = 3 .. LW and P > 3 steps with a residual weight mr and a
// lambda_3 lower bound lo.  s_comp is either random or made to match a chosen
// candidate.  After the loading edge the reported hit and its ranks lambda_1..3
// must equal the first hit of a direct search in the decoder's priority order:
// single bits by rank; else the P = 2 pairs by lambda_2, then the triples by
// lambda_3 and lambda_2.
`timescale 1ns/1ps
module tb_decoder_core;
  import orbgrand_pkg::*;
  localparam int N = 32, NMK = 10, LW = 24, MW = 5, LAMW = 6;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic [NMK-1:0]  s_sorted [N];
  logic            load;
  step_mode_e      nxt_mode;
  logic [MW-1:0]   nxt_mr;
  logic [LAMW-1:0] nxt_lo;
  logic [NMK-1:0]  s_comp;
  logic            hit;
  logic [1:0]      hit_np;
  logic [LAMW-1:0] hit_l1, hit_l2, hit_l3;

  decoder_core #(.N(N), .NMK(NMK), .LW(LW)) dut (
    .clk, .rst, .s_sorted, .load, .nxt_mode, .nxt_mr, .nxt_lo, .s_comp,
    .hit, .hit_np, .hit_l1, .hit_l2, .hit_l3);

  int checks = 0, failures = 0;
  int n_hit [4];

  function automatic logic [NMK-1:0] sy(input int l);
    return s_sorted[l-1];
  endfunction

  initial begin
    load = 0; nxt_mode = MODE_HW1; nxt_mr = '0; nxt_lo = '0; s_comp = '0;
    for (int i = 0; i < N; i++) s_sorted[i] = '0;
    for (int i = 0; i < 4; i++) n_hit[i] = 0;
    @(negedge clk); rst = 0;
    for (int k = 0; k < 3000; k++) begin
      int mode, mr, lo;
      bit e_hit; int e_np, e1, e2, e3;
      @(negedge clk);
      for (int i = 0; i < N; i++) s_sorted[i] = NMK'($urandom);
      if (k % 3 == 0) s_sorted[$urandom_range(0, N-1)] = s_sorted[$urandom_range(0, N-1)];
      mode = $urandom_range(0, 2);
      if (mode == 0) begin mr = 1; lo = 1; end
      else if (mode == 1) begin mr = $urandom_range(3, LW); lo = 1; end
      else begin lo = $urandom_range(2, 6); mr = $urandom_range(3 * lo + 3, LW); end
      // s_comp: random, or the syndrome of a chosen candidate
      s_comp = NMK'($urandom);
      if ($urandom_range(0, 1)) begin
        if (mode == 0) s_comp = sy($urandom_range(1, N));
        else begin
          int a, b, c;
          c = $urandom_range(lo, (mr - 3) / 3);
          b = $urandom_range(c + 1, c + 1 + (mr - 3 * c - 3) / 2);
          a = mr - b - c;
          if (a > b) s_comp = sy(a) ^ sy(b) ^ sy(c);
          if (mode == 1 && $urandom_range(0, 1)) begin
            b = $urandom_range(1, (mr - 1) / 2);
            if (mr - b > b) s_comp = sy(mr - b) ^ sy(b);
          end
        end
      end
      load = 1;
      nxt_mode = step_mode_e'(mode);
      nxt_mr = MW'(mr);
      nxt_lo = LAMW'(lo);
      // reference search
      e_hit = 0; e_np = 0; e1 = 0; e2 = 0; e3 = 0;
      if (mode == 0) begin
        for (int l = 1; l <= N && !e_hit; l++)
          if (sy(l) == s_comp) begin e_hit = 1; e_np = 1; e1 = l; end
      end else begin
        if (mode == 1)
          for (int b = 1; 2 * b < mr && !e_hit; b++)
            if ((sy(mr - b) ^ sy(b)) == s_comp) begin e_hit = 1; e_np = 2; e1 = mr - b; e2 = b; end
        for (int c = lo; c <= N && !e_hit; c++)
          for (int b = c + 1; mr - b - c > b && !e_hit; b++)
            if ((sy(mr - b - c) ^ sy(b) ^ sy(c)) == s_comp) begin
              e_hit = 1; e_np = 3; e1 = mr - b - c; e2 = b; e3 = c;
            end
      end
      @(posedge clk);
      #1;
      load = 0;
      checks++;
      if (hit !== e_hit || (e_hit && (int'(hit_np) !== e_np || int'(hit_l1) !== e1 ||
          (e_np >= 2 && int'(hit_l2) !== e2) || (e_np == 3 && int'(hit_l3) !== e3)))) begin
        failures++;
        if (failures < 10)
          $display("FAIL k=%0d mode=%0d mr=%0d lo=%0d: hit %0d np %0d l=%0d,%0d,%0d exp %0d np %0d l=%0d,%0d,%0d",
                   k, mode, mr, lo, hit, hit_np, hit_l1, hit_l2, hit_l3, e_hit, e_np, e1, e2, e3);
      end
      if (e_hit) n_hit[e_np]++;
    end
    $display("hits: weight-1 %0d, P=2 %0d, P=3 %0d", n_hit[1], n_hit[2], n_hit[3]);
    for (int i = 1; i <= 3; i++) begin
      checks++;
      if (n_hit[i] == 0) begin failures++; $display("FAIL no hit of kind %0d", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
