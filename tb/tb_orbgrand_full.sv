// tb_orbgrand_full: the ORBGRAND decoder at its default size (n = 128, n-k up to
// 32, LW <= 96, P <= 8, unsegmented sorter), end to end.
//
// A random systematic (128,96) code is loaded into the H memory.  Words with 0 to
// 8 low-reliability bit errors are decoded and compared with the reference model
// (codeword, found flag, Hamming weight, latency).  One word with many heavy errors
// runs the whole schedule without a hit: its latency must be the worst case of
// 93417 cycles, 7 sorting cycles + 1 single-bit step + 93409 weight steps.
`timescale 1ns/1ps
module tb_orbgrand_full;
  import orbgrand_ref_pkg::*;

  localparam int N = 128, NMK = 32, Q = 5, LW = 96, PMAX = 8;
  localparam int K = N - NMK;
  localparam int IW = $clog2(N), PW = $clog2(PMAX + 1);
  localparam int WORST = 93417;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic           h_we;
  logic [IW-1:0]  h_addr;
  logic [NMK-1:0] h_wdata;
  logic           in_valid, in_ready;
  logic [Q-1:0]   y [N];
  logic           out_valid, found;
  logic [N-1:0]   c_hat;
  logic [PW-1:0]  out_hw;

  orbgrand_top dut (
    .clk, .rst, .h_we, .h_addr, .h_wdata, .in_valid, .in_ready, .y,
    .out_valid, .c_hat, .found, .out_hw);

  int checks = 0, failures = 0;
  syn_t hcol [MAXN];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  task automatic load_code();
    for (int i = 0; i < MAXN; i++) hcol[i] = '0;
    for (int i = 0; i < K; i++) hcol[i] = syn_t'($urandom);
    for (int r = 0; r < NMK; r++) hcol[K + r] = syn_t'(1) << r;
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      h_we = 1; h_addr = IW'(i); h_wdata = hcol[i][NMK-1:0];
    end
    @(negedge clk);
    h_we = 0;
  endtask

  task automatic run_frame(input int w, input bit heavy, output int latency, output bit fnd);
    bit [N-1:0] cw, flip;
    bit [MAXN-1:0] yh;
    int mag [MAXN];
    syn_t par;
    ref_result_t r;
    int lat;
    par = '0;
    cw  = '0;
    for (int i = 0; i < K; i++) begin
      cw[i] = 1'($urandom);
      if (cw[i]) par ^= hcol[i];
    end
    for (int j = 0; j < NMK; j++) cw[K + j] = par[j];
    flip = '0;
    for (int c = 0; c < w; ) begin
      int p;
      p = $urandom_range(0, N - 1);
      if (!flip[p]) begin flip[p] = 1; c++; end
    end
    yh = '0;
    for (int i = 0; i < MAXN; i++) mag[i] = 0;
    for (int i = 0; i < N; i++) begin
      yh[i]  = cw[i] ^ flip[i];
      mag[i] = flip[i] ? (heavy ? 15 : $urandom_range(0, 2)) : $urandom_range(2, 15);
    end
    r = decode(N, LW, PMAX, 1, hcol, yh, mag);
    @(negedge clk);
    in_valid = 1;
    for (int i = 0; i < N; i++) y[i] = {yh[i], 4'(mag[i])};
    @(posedge clk);
    check(in_ready, "decoder not ready");
    @(negedge clk);
    in_valid = 0;
    lat = 0;
    while (!out_valid) begin
      lat++;
      @(negedge clk);
    end
    check(c_hat === r.c_hat[N-1:0], $sformatf("c_hat %h exp %h (w=%0d)", c_hat, r.c_hat[N-1:0], w));
    check(found === r.found, $sformatf("found %0d exp %0d", found, r.found));
    check(int'(out_hw) === r.hw, $sformatf("hw %0d exp %0d", out_hw, r.hw));
    check(lat === r.latency, $sformatf("latency %0d exp %0d", lat, r.latency));
    if (r.found && w <= PMAX) check(r.c_hat[N-1:0] === cw || r.hw <= w, "guess heavier than the true noise");
    $display("w=%0d heavy=%0d: found=%0d hw=%0d latency=%0d", w, heavy, found, out_hw, lat);
    latency = lat;
    fnd     = found;
  endtask

  initial begin
    int lat;
    bit f;
    h_we = 0; h_addr = '0; h_wdata = '0; in_valid = 0;
    for (int i = 0; i < N; i++) y[i] = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    load_code();
    for (int w = 0; w <= PMAX; w++) run_frame(w, 0, lat, f);
    run_frame(16, 1, lat, f);
    check(!f && lat === WORST, $sformatf("worst case: found=%0d latency %0d, expected %0d", f, lat, WORST));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
