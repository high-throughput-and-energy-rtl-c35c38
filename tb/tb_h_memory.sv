// tb_h_memory: writes random columns at random addresses, mirrors them in a
// testbench copy and compares all N columns after every write; then checks that
// reset clears the memory and that a write with h_we = 0 changes nothing.
`timescale 1ns/1ps
module tb_h_memory;
  localparam int N = 16, NMK = 8, AW = 4;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic h_we;
  logic [AW-1:0] h_addr;
  logic [NMK-1:0] h_wdata;
  logic [NMK-1:0] h_cols [N];
  logic [NMK-1:0] model [N];

  h_memory #(.N(N), .NMK(NMK)) dut (.clk, .rst, .h_we, .h_addr, .h_wdata, .h_cols);

  int checks = 0, failures = 0;
  task automatic compare(input string what);
    for (int i = 0; i < N; i++) begin
      checks++;
      if (h_cols[i] !== model[i]) begin
        failures++;
        if (failures < 10) $display("FAIL %s col %0d: %h exp %h", what, i, h_cols[i], model[i]);
      end
    end
  endtask

  initial begin
    h_we = 0; h_addr = '0; h_wdata = '0;
    for (int i = 0; i < N; i++) model[i] = '0;
    @(negedge clk); @(negedge clk);
    rst = 0;
    compare("after reset");
    for (int k = 0; k < 100; k++) begin
      @(negedge clk);
      h_we = 1'($urandom_range(0, 3) != 0);
      h_addr = AW'($urandom);
      h_wdata = NMK'($urandom);
      @(negedge clk);
      if (h_we) model[h_addr] = h_wdata;
      h_we = 0;
      compare("write");
    end
    rst = 1;
    @(negedge clk);
    rst = 0;
    for (int i = 0; i < N; i++) model[i] = '0;
    compare("second reset");
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
