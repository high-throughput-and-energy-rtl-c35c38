// tb_orbgrand_workloads: the decoder on the code shapes it is meant for.
//
// Two decoders run side by side on the same inputs: one at the default size
// (LW <= 96, P <= 8) and one set to the smaller schedule LW <= 64, P <= 6.  Three
// random systematic codes of the lengths and dimensions of common short codes are
// loaded in turn: (128,105) with 23 parity rows, (128,104) with 24, and a length-127
// code with 21 parity rows (127,106) that is padded to 128 positions by a column of
// zeros whose bit is sent as a certain 0 (largest magnitude, sign 0).  Codes with
// fewer than 32 parity rows leave the upper rows of H at zero.  For each code, words
// with 0 to 8 low-reliability errors are decoded by both decoders and compared with
// the reference model; one word per code carries heavy errors.  Every word that the
// reference cannot decode must exhaust the schedule in the worst-case time of its
// configuration, 93417 or 4226 cycles, and this must happen at least once for each.
`timescale 1ns/1ps
module tb_orbgrand_workloads;
  import orbgrand_ref_pkg::*;

  localparam int N = 128, NMK = 32, Q = 5;
  localparam int IW = $clog2(N);
  localparam int LWA = 96, PA = 8, LWB = 64, PB = 6;
  localparam int WORST_A = 93417, WORST_B = 4226;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic           h_we;
  logic [IW-1:0]  h_addr;
  logic [NMK-1:0] h_wdata;
  logic           in_valid, rdy_a, rdy_b;
  logic [Q-1:0]   y [N];
  logic           ov_a, ov_b, f_a, f_b;
  logic [N-1:0]   c_a, c_b;
  logic [3:0]     hw_a;
  logic [2:0]     hw_b;

  orbgrand_top dut_a (
    .clk, .rst, .h_we, .h_addr, .h_wdata, .in_valid, .in_ready(rdy_a), .y,
    .out_valid(ov_a), .c_hat(c_a), .found(f_a), .out_hw(hw_a));
  orbgrand_top #(.LW(LWB), .PMAX(PB)) dut_b (
    .clk, .rst, .h_we, .h_addr, .h_wdata, .in_valid, .in_ready(rdy_b), .y,
    .out_valid(ov_b), .c_hat(c_b), .found(f_b), .out_hw(hw_b));

  int checks = 0, failures = 0;
  syn_t hcol [MAXN];
  int n_code, k_code;
  int n_worst_a = 0, n_worst_b = 0;
  localparam int WL [3][2] = '{'{128, 105}, '{128, 104}, '{127, 106}};

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  task automatic load_code(input int n, input int k);
    n_code = n; k_code = k;
    for (int i = 0; i < MAXN; i++) hcol[i] = '0;
    for (int i = 0; i < k; i++) hcol[i] = syn_t'($urandom) & ((syn_t'(1) << (n - k)) - 1);
    for (int r = 0; r < n - k; r++) hcol[k + r] = syn_t'(1) << r;
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      h_we = 1; h_addr = IW'(i); h_wdata = hcol[i][NMK-1:0];
    end
    @(negedge clk);
    h_we = 0;
  endtask

  task automatic wait_out(input bit b, output int lat);
    lat = 0;
    while (!(b ? ov_b : ov_a)) begin
      lat++;
      @(negedge clk);
    end
  endtask

  task automatic run_frame(input int w, input bit heavy);
    bit [N-1:0] cw, flip;
    bit [MAXN-1:0] yh;
    int mag [MAXN];
    syn_t par;
    ref_result_t ra, rb;
    int la, lb;
    par = '0;
    cw  = '0;
    for (int i = 0; i < k_code; i++) begin
      cw[i] = 1'($urandom);
      if (cw[i]) par ^= hcol[i];
    end
    for (int j = 0; j < n_code - k_code; j++) cw[k_code + j] = par[j];
    flip = '0;
    for (int c = 0; c < w; ) begin
      int p;
      p = $urandom_range(0, n_code - 1);
      if (!flip[p]) begin flip[p] = 1; c++; end
    end
    yh = '0;
    for (int i = 0; i < MAXN; i++) mag[i] = 0;
    for (int i = 0; i < N; i++) begin
      yh[i]  = cw[i] ^ flip[i];
      mag[i] = flip[i] ? (heavy ? 15 : $urandom_range(0, 2)) : $urandom_range(2, 15);
      if (i >= n_code) mag[i] = 15;   // padding position: a certain 0
    end
    ra = decode(N, LWA, PA, 1, hcol, yh, mag);
    rb = decode(N, LWB, PB, 1, hcol, yh, mag);
    @(negedge clk);
    in_valid = 1;
    for (int i = 0; i < N; i++) y[i] = {yh[i], 4'(mag[i])};
    @(posedge clk);
    check(rdy_a && rdy_b, "decoders not ready");
    @(negedge clk);
    in_valid = 0;
    fork
      wait_out(0, la);
      wait_out(1, lb);
    join
    check(c_a === ra.c_hat[N-1:0] && f_a === ra.found && int'(hw_a) === ra.hw && la === ra.latency,
          $sformatf("LW96: c %h f %0d hw %0d lat %0d, exp %h %0d %0d %0d", c_a, f_a, hw_a, la,
                    ra.c_hat[N-1:0], ra.found, ra.hw, ra.latency));
    check(c_b === rb.c_hat[N-1:0] && f_b === rb.found && int'(hw_b) === rb.hw && lb === rb.latency,
          $sformatf("LW64: c %h f %0d hw %0d lat %0d, exp %h %0d %0d %0d", c_b, f_b, hw_b, lb,
                    rb.c_hat[N-1:0], rb.found, rb.hw, rb.latency));
    if (n_code < N) check(c_a[N-1] === 1'b0 && c_b[N-1] === 1'b0, "padding bit flipped");
    // a word that the reference cannot decode must take the worst-case time
    if (!ra.found) begin
      check(la === WORST_A, $sformatf("LW96 worst case %0d, expected %0d", la, WORST_A));
      n_worst_a++;
    end
    if (!rb.found) begin
      check(lb === WORST_B, $sformatf("LW64 worst case %0d, expected %0d", lb, WORST_B));
      n_worst_b++;
    end
    $display("(%0d,%0d) w=%0d heavy=%0d: LW96 found=%0d hw=%0d lat=%0d | LW64 found=%0d hw=%0d lat=%0d",
             n_code, k_code, w, heavy, f_a, hw_a, la, f_b, hw_b, lb);
  endtask

  initial begin
    h_we = 0; h_addr = '0; h_wdata = '0; in_valid = 0;
    for (int i = 0; i < N; i++) y[i] = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    foreach (WL[c]) begin
      load_code(WL[c][0], WL[c][1]);
      for (int w = 0; w <= 8; w++) run_frame(w, 0);
      run_frame(16, 1);
    end
    $display("worst-case runs: LW96 %0d, LW64 %0d", n_worst_a, n_worst_b);
    check(n_worst_a > 0 && n_worst_b > 0, "a worst-case run never happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
