// tb_word_generator: random y_hat and bit-flip positions; after an edge with load
// = 1, c_hat must be y_hat with exactly the valid positions inverted; with load = 0
// c_hat must hold its value.
`timescale 1ns/1ps
module tb_word_generator;
  localparam int N = 32, PMAX = 8, IW = 5;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic            load;
  logic [N-1:0]    y_hat, c_hat, held;
  logic [IW-1:0]   pos [PMAX];
  logic [PMAX-1:0] pos_valid;

  word_generator #(.N(N), .PMAX(PMAX)) dut (.clk, .rst, .load, .y_hat, .pos, .pos_valid, .c_hat);

  int checks = 0, failures = 0;
  initial begin
    load = 0; y_hat = '0; pos_valid = '0;
    for (int j = 0; j < PMAX; j++) pos[j] = '0;
    @(negedge clk); rst = 0;
    for (int k = 0; k < 200; k++) begin
      logic [N-1:0] e;
      int perm [N];
      for (int i = 0; i < N; i++) perm[i] = i;
      perm.shuffle();
      @(negedge clk);
      held  = c_hat;
      load  = 1'($urandom_range(0, 3) != 0);
      y_hat = N'($urandom);
      e = '0;
      for (int j = 0; j < PMAX; j++) begin
        pos[j] = IW'(perm[j]);
        pos_valid[j] = 1'($urandom);
        if (pos_valid[j]) e[perm[j]] = 1'b1;
      end
      @(negedge clk);
      checks++;
      if (c_hat !== (load ? (y_hat ^ e) : held)) begin
        failures++;
        if (failures < 10) $display("FAIL k=%0d load=%0d: c_hat %h exp %h", k, load, c_hat, load ? (y_hat ^ e) : held);
      end
      load = 0;
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
