// tb_bitonic_sorter: checks the pipelined bitonic network.
// Random distinct keys (random value with the position appended) are fed one set
// per clock.  Each output set, taken log2(L) cycles later, must be the input set in
// ascending order with every payload still attached to its key.
`timescale 1ns/1ps
module tb_bitonic_sorter;
  localparam int L = 16, KW = 8, DW = 8, LOG = 4, SETS = 40;

  logic clk = 0;
  always #5 clk = ~clk;

  logic [KW-1:0] key_in [L], key_out [L];
  logic [DW-1:0] data_in [L], data_out [L];

  bitonic_sorter #(.L(L), .KW(KW), .DW(DW)) dut (.clk, .key_in, .data_in, .key_out, .data_out);

  int checks = 0, failures = 0;
  logic [KW-1:0] hist [SETS][L];

  function automatic logic [DW-1:0] tag(input logic [KW-1:0] k);
    return DW'(k * 37 + 11);
  endfunction

  initial begin
    for (int s = 0; s < SETS + LOG; s++) begin
      @(negedge clk);
      if (s < SETS) begin
        for (int i = 0; i < L; i++) begin
          hist[s][i]  = {4'($urandom), 4'(i)};
          key_in[i]   = hist[s][i];
          data_in[i]  = tag(hist[s][i]);
        end
      end
      if (s >= LOG) begin
        // output of set s-LOG: sorted copy of its input
        logic [KW-1:0] e [L];
        e = hist[s-LOG];
        e.sort();
        for (int i = 0; i < L; i++) begin
          checks++;
          if (key_out[i] !== e[i] || data_out[i] !== tag(e[i])) begin
            failures++;
            if (failures < 10) $display("FAIL set %0d pos %0d: key %h exp %h", s - LOG, i, key_out[i], e[i]);
          end
        end
      end
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
