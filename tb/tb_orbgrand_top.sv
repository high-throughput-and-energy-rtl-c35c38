// tb_orbgrand_top: end-to-end test of the ORBGRAND decoder at reduced size.
//
// Three decoders (full sorter, and sorter in 2 and in 4 segments) decode the same random
// words of random systematic codes; every result (codeword, found flag, Hamming
// weight of the guess) and every latency in cycles is compared with the reference
// model in orbgrand_ref_pkg.  Words are made by flipping up to PMAX+2 bits of a
// codeword and giving the flipped bits low reliability, so that every kind of
// outcome occurs: codeword at once, single-bit step, 2-, 3-, 4-, 5- and 6-bit
// guesses, abandonment after LW, and decoding after the H memory is reloaded with a
// different code.  Each of these is counted and one that never happens is a failure.
`timescale 1ns/1ps
module tb_orbgrand_top;
  import orbgrand_ref_pkg::*;

  localparam int N = 32, NMK = 12, Q = 5, LW = 24, PMAX = 6;
  localparam int K = N - NMK;
  localparam int IW = $clog2(N), PW = $clog2(PMAX + 1);
  localparam int FRAMES = 400;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic           h_we;
  logic [IW-1:0]  h_addr;
  logic [NMK-1:0] h_wdata;
  logic           in_valid;
  logic [Q-1:0]   y [N];
  logic           rdy [3];
  logic           ov [3];
  logic [N-1:0]   ch [3];
  logic           fd [3];
  logic [PW-1:0]  hw [3];

  orbgrand_top #(.N(N), .NMK(NMK), .Q(Q), .LW(LW), .PMAX(PMAX), .SEGMENTS(1)) dut0 (
    .clk, .rst, .h_we, .h_addr, .h_wdata, .in_valid, .in_ready(rdy[0]), .y,
    .out_valid(ov[0]), .c_hat(ch[0]), .found(fd[0]), .out_hw(hw[0]));
  orbgrand_top #(.N(N), .NMK(NMK), .Q(Q), .LW(LW), .PMAX(PMAX), .SEGMENTS(2)) dut1 (
    .clk, .rst, .h_we, .h_addr, .h_wdata, .in_valid, .in_ready(rdy[1]), .y,
    .out_valid(ov[1]), .c_hat(ch[1]), .found(fd[1]), .out_hw(hw[1]));
  orbgrand_top #(.N(N), .NMK(NMK), .Q(Q), .LW(LW), .PMAX(PMAX), .SEGMENTS(4)) dut2 (
    .clk, .rst, .h_we, .h_addr, .h_wdata, .in_valid, .in_ready(rdy[2]), .y,
    .out_valid(ov[2]), .c_hat(ch[2]), .found(fd[2]), .out_hw(hw[2]));

  int checks = 0, failures = 0;
  int cnt_hw [PMAX+1];
  int cnt_abandon = 0, cnt_reload = 0, cnt_seg_diff = 0, cnt_seg4_diff = 0;
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
    for (int i = 0; i < K; i++) hcol[i] = syn_t'($urandom_range(1, (1 << NMK) - 1));
    for (int r = 0; r < NMK; r++) hcol[K + r] = syn_t'(1) << r;
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      h_we = 1; h_addr = IW'(i); h_wdata = hcol[i][NMK-1:0];
    end
    @(negedge clk);
    h_we = 0;
  endtask

  task automatic run_frame(input int w);
    bit [N-1:0] info_c, flip;
    bit [MAXN-1:0] yh;
    int mag [MAXN];
    syn_t par;
    ref_result_t r [3];
    int lat [3];
    bit seen [3];
    // codeword
    par = '0;
    info_c = '0;
    for (int i = 0; i < K; i++) begin
      info_c[i] = 1'($urandom);
      if (info_c[i]) par ^= hcol[i];
    end
    for (int j = 0; j < NMK; j++) info_c[K + j] = par[j];
    // noise on w distinct positions, with low reliability
    flip = '0;
    for (int c = 0; c < w; ) begin
      int p;
      p = $urandom_range(0, N - 1);
      if (!flip[p]) begin flip[p] = 1; c++; end
    end
    yh = '0;
    for (int i = 0; i < MAXN; i++) mag[i] = 0;
    for (int i = 0; i < N; i++) begin
      yh[i]  = info_c[i] ^ flip[i];
      mag[i] = flip[i] ? $urandom_range(0, (w > PMAX) ? 15 : 5) : $urandom_range(3, 15);
    end
    r[0] = decode(N, LW, PMAX, 1, hcol, yh, mag);
    r[1] = decode(N, LW, PMAX, 2, hcol, yh, mag);
    r[2] = decode(N, LW, PMAX, 4, hcol, yh, mag);
    // apply
    @(negedge clk);
    in_valid = 1;
    for (int i = 0; i < N; i++) y[i] = {yh[i], 4'(mag[i])};
    @(posedge clk);
    check(rdy[0] && rdy[1] && rdy[2], "decoder not ready");
    @(negedge clk);
    in_valid = 0;
    lat = '{0, 0, 0};
    seen = '{0, 0, 0};
    while (!(seen[0] && seen[1] && seen[2])) begin
      for (int d = 0; d < 3; d++) begin
        if (!seen[d]) begin
          if (ov[d]) seen[d] = 1;
          else lat[d]++;
        end
      end
      if (!(seen[0] && seen[1] && seen[2])) @(negedge clk);
    end
    for (int d = 0; d < 3; d++) begin
      check(ch[d] === yh[N-1:0] ^ (r[d].c_hat[N-1:0] ^ yh[N-1:0]) && ch[d] === r[d].c_hat[N-1:0],
            $sformatf("dut%0d c_hat %h exp %h (w=%0d)", d, ch[d], r[d].c_hat[N-1:0], w));
      check(fd[d] === r[d].found, $sformatf("dut%0d found %0d exp %0d", d, fd[d], r[d].found));
      check(int'(hw[d]) === r[d].hw, $sformatf("dut%0d hw %0d exp %0d", d, hw[d], r[d].hw));
      check(lat[d] === r[d].latency, $sformatf("dut%0d latency %0d exp %0d", d, lat[d], r[d].latency));
      if (r[d].found) begin
        bit [N-1:0] cw;
        syn_t s;
        cw = r[d].c_hat[N-1:0];
        s = '0;
        for (int i = 0; i < N; i++) if (cw[i]) s ^= hcol[i];
        check(s === '0, "reference result is not a codeword");
      end
    end
    if (r[0].found) cnt_hw[r[0].hw]++;
    else cnt_abandon++;
    if (r[0].c_hat != r[1].c_hat || r[0].hw != r[1].hw) cnt_seg_diff++;
    if (r[0].c_hat != r[2].c_hat || r[0].hw != r[2].hw) cnt_seg4_diff++;
  endtask

  initial begin
    h_we = 0; h_addr = '0; h_wdata = '0; in_valid = 0;
    for (int i = 0; i < N; i++) y[i] = '0;
    for (int i = 0; i <= PMAX; i++) cnt_hw[i] = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int code = 0; code < 4; code++) begin
      load_code();
      if (code > 0) cnt_reload++;
      for (int f = 0; f < FRAMES / 4; f++) run_frame(f % (PMAX + 3));
    end
    for (int i = 0; i <= PMAX; i++) begin
      $display("guesses of Hamming weight %0d: %0d", i, cnt_hw[i]);
      check(cnt_hw[i] > 0, $sformatf("no decode ended with a %0d-bit guess", i));
    end
    $display("abandoned: %0d, H reloads: %0d, segmented sorter changed the result: %0d (S=2), %0d (S=4)",
             cnt_abandon, cnt_reload, cnt_seg_diff, cnt_seg4_diff);
    check(cnt_abandon > 0, "no abandonment");
    check(cnt_reload > 0, "no H reload");
    check(cnt_seg_diff > 0, "2-segment sorter never differed from the full sorter");
    check(cnt_seg4_diff > 0, "4-segment sorter never differed from the full sorter");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
