// tb_controller: checks the decode schedule and s_comp.
//
// The expected list of time steps is built with plain nested loops: one
// Hamming-weight-1 step, then for every m = 3 .. LW one P = 2/3 step followed by
// one step per (lambda_P, .., lambda_4) for P = 4 .. PMAX, each part bounded by
// floor((2R - i(i-1)) / 2i).  With the core never reporting a hit, every step the
// controller loads must match this list (mode, residual weight mr, lower bound lo),
// s_comp must be s_c XOR the syndromes of lambda_4 .. lambda_P, and the decode must
// end after exactly sort + all steps cycles with found = 0.  A zero s_c must end the
// decode in its first cycle.  Finally the core reports a hit at a random step: the
// decode must end in that cycle with the parts of that step in res_lam.
// The list itself is held against a worked example of the schedule: for m = 20
// there are three steps with four parts, three with five and none with six.
// Interface and timing: the controller runs at N = 32, LW = 24, PMAX = 6 with
// a 5-cycle sort; the testbench plays the decoder core.
`timescale 1ns/1ps
module tb_controller;
  import orbgrand_pkg::*;
  localparam int N = 32, NMK = 10, LW = 24, PMAX = 6, SORT = 5;
  localparam int MW = 5, LAMW = 6, PW = 3;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic            start, busy, core_load, core_hit, finish, found;
  logic [NMK-1:0]  s_c, s_comp;
  logic [NMK-1:0]  s_sorted [N];
  step_mode_e      nxt_mode, cur_mode;
  logic [MW-1:0]   nxt_mr, cur_m;
  logic [LAMW-1:0] nxt_lo;
  logic [1:0]      core_np;
  logic [LAMW-1:0] core_l1, core_l2, core_l3;
  logic [PW-1:0]   res_hw, cur_p;
  logic [LAMW-1:0] res_lam [PMAX];

  controller #(.N(N), .NMK(NMK), .LW(LW), .PMAX(PMAX), .SEGMENTS(1)) dut (
    .clk, .rst, .start, .busy, .s_c, .s_sorted, .core_load, .nxt_mode, .nxt_mr, .nxt_lo,
    .s_comp, .core_hit, .core_np, .core_l1, .core_l2, .core_l3, .finish, .found, .res_hw,
    .res_lam, .cur_mode, .cur_m, .cur_p);

  typedef struct { int mode; int m; int p; int mr; int lo; int lam [9]; } step_t;
  step_t steps [$];
  int checks = 0, failures = 0;

  function automatic int lmax(input int r, input int i);
    int a;
    a = 2 * r - i * (i - 1);
    return (a < 2 * i) ? 0 : a / (2 * i);
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL: %s", what); end
  endtask

  task automatic build();
    step_t s;
    s.mode = 0; s.m = 1; s.p = 1; s.mr = 0; s.lo = 0;
    for (int i = 0; i < 9; i++) s.lam[i] = 0;
    steps.push_back(s);
    for (int m = 3; m <= LW; m++) begin
      s.mode = 1; s.m = m; s.p = 3; s.mr = m; s.lo = 1;
      for (int i = 0; i < 9; i++) s.lam[i] = 0;
      steps.push_back(s);
      for (int p = 4; p <= PMAX; p++)
        for (int l6 = (p >= 6) ? 1 : 0; l6 <= ((p >= 6) ? lmax(m, 6) : 0); l6++)
        for (int l5 = (p > 5) ? l6 + 1 : ((p == 5) ? 1 : 0); l5 <= ((p >= 5) ? lmax(m - l6, 5) : 0); l5++)
        for (int l4 = (p > 4) ? l5 + 1 : 1; l4 <= lmax(m - l6 - l5, 4); l4++) begin
          s.mode = 2; s.m = m; s.p = p; s.lo = l4 + 1; s.mr = m - l4 - l5 - l6;
          for (int i = 0; i < 9; i++) s.lam[i] = 0;
          s.lam[4] = l4; s.lam[5] = l5; s.lam[6] = l6;
          steps.push_back(s);
        end
    end
  endtask

  function automatic logic [NMK-1:0] exp_scomp(input step_t s);
    logic [NMK-1:0] x;
    x = s_c;
    for (int i = 4; i <= 8; i++) if (s.lam[i] != 0) x ^= s_sorted[s.lam[i] - 1];
    return x;
  endfunction

  // run one decode; hit_at = index of the step whose core reports a hit (-1: none)
  task automatic run(input int hit_at, output int cycles, output bit f);
    int idx, c;
    core_hit = 0;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    idx = 0; c = 0;
    forever begin
      // mid-cycle c: current step is steps[idx-1] once the first load happened
      if (idx > 0) begin
        step_t s;
        s = steps[idx-1];
        check(int'(cur_mode) === s.mode && (s.mode === 0 || int'(cur_m) === s.m),
              $sformatf("step %0d: mode %0d m %0d exp %0d %0d", idx - 1, cur_mode, cur_m, s.mode, s.m));
        check(s_comp === exp_scomp(s), $sformatf("step %0d: s_comp %h exp %h", idx - 1, s_comp, exp_scomp(s)));
        core_hit = (idx - 1 == hit_at);
        core_np = 2'd3; core_l3 = LAMW'(s.lo); core_l2 = LAMW'(s.lo + 1); core_l1 = LAMW'(s.mr - 2 * s.lo - 1);
        #1;
      end
      if (finish) begin
        if (hit_at >= 0) begin
          step_t s;
          s = steps[hit_at];
          check(found && int'(res_hw) === ((s.mode === 2) ? s.p : 3), $sformatf("hit: found %0d hw %0d", found, res_hw));
          for (int i = 4; i <= PMAX; i++)
            check(int'(res_lam[i-1]) === s.lam[i], $sformatf("res_lam[%0d] %0d exp %0d", i - 1, res_lam[i-1], s.lam[i]));
          check(int'(res_lam[2]) === s.lo, "res_lam[2]");
        end
        break;
      end
      if (core_load) begin
        if (idx === 0) check(nxt_mode === MODE_HW1, "first load must be the single-bit step");
        else begin
          step_t s;
          s = steps[idx];
          check(int'(nxt_mode) === s.mode && int'(nxt_mr) === s.mr && int'(nxt_lo) === s.lo,
                $sformatf("load %0d: mode %0d mr %0d lo %0d exp %0d %0d %0d", idx, nxt_mode, nxt_mr, nxt_lo, s.mode, s.mr, s.lo));
        end
        idx++;
      end
      @(negedge clk);
      c++;
    end
    cycles = c + 1;
    f = found;
    @(negedge clk);
    core_hit = 0;
  endtask

  initial begin
    int cyc;
    bit f;
    start = 0; core_hit = 0; core_np = '0; core_l1 = '0; core_l2 = '0; core_l3 = '0;
    s_c = NMK'(1);
    for (int i = 0; i < N; i++) s_sorted[i] = NMK'($urandom);
    build();
    $display("%0d steps after the single-bit step", steps.size() - 1);
    // worked example of the schedule for m = 20: three steps with P = 4
    // (lambda_4 = 1, 2, 3), three with P = 5, none with P = 6
    begin
      int c4, c5, c6;
      c4 = 0; c5 = 0; c6 = 0;
      foreach (steps[k]) if (steps[k].mode == 2 && steps[k].m == 20) begin
        if (steps[k].p == 4) c4++;
        if (steps[k].p == 5) c5++;
        if (steps[k].p == 6) c6++;
      end
      check(c4 == 3 && c5 == 3 && c6 == 0, $sformatf("m = 20: %0d/%0d/%0d steps for P = 4/5/6", c4, c5, c6));
    end
    repeat (2) @(negedge clk);
    rst = 0;
    // full schedule, no hit
    s_c = NMK'($urandom) | 1;
    run(-1, cyc, f);
    check(!f && cyc === SORT + steps.size(), $sformatf("full run: %0d cycles, exp %0d", cyc, SORT + steps.size()));
    // zero syndrome
    s_c = '0;
    run(-1, cyc, f);
    check(f && cyc === 1, $sformatf("zero syndrome: %0d cycles found %0d", cyc, f));
    // hits at random P > 3 steps
    for (int k = 0; k < 20; k++) begin
      int at;
      s_c = NMK'($urandom) | 1;
      do at = $urandom_range(1, steps.size() - 1); while (steps[at].mode != 2);
      run(at, cyc, f);
      check(f && cyc === SORT + at + 1, $sformatf("hit at step %0d: %0d cycles", at, cyc));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
