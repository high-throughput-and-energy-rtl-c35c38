// controller: schedules one ORBGRAND decode and generates s_comp.
//
// A decode runs through these time steps (one clock each):
//   * sorting, log2(N/SEGMENTS) cycles; in the first of them the syndrome s_c of
//     y_hat is checked, and a zero syndrome ends the decode at once;
//   * one step testing every Hamming-weight-1 pattern (core mode MODE_HW1);
//   * for each logistic weight m = 3 .. LW, in increasing order:
//       - one step for all partitions of m into 2 and 3 parts (MODE_P23);
//       - for P = 4 .. PMAX, one step per tuple (lambda_P, ..., lambda_4) of the
//         smaller parts (MODE_PGT).  The tuples are counted like nested loops,
//         lambda_P outermost and lambda_4 innermost, lambda_i running from
//         lambda_(i+1) + 1 up to the largest value that still leaves room for i-1
//         larger distinct parts: i*lambda_i + i*(i-1)/2 <= R_i, with R_i = m minus
//         the parts above i (Lemma 1 of the design).  A P with no tuple is skipped.
// For every step the controller presents to the decoder core the residual weight
// mr = m - sum(lambda_4..lambda_P), the smallest lambda_3 (lo) and the combined
// syndrome s_comp = s_c ^ s_lambda4 ^ ... ^ s_lambdaP.  The decode ends at the
// first step in which the core reports a hit (found = 1) or after the last step
// (found = 0, abandonment).
//
// Timing: start is sampled on the edge that captures the input word (edge 0).  The
// result (finish, found, res_lam, res_hw) is valid during the last cycle of the
// decode and is taken by the word generator at the next edge, which is edge
// 1 (zero syndrome), edge SORT+1 (Hamming weight 1) or edge SORT+1+k for the k-th
// weight step.  For N = 128, LW = 96, PMAX = 8 the longest decode is 93417 cycles,
// for LW = 64, PMAX = 6 it is 4226 cycles, the worst cases quoted in the paper.
// The partition order (by m, then by P, then Eq. (4) order) and the s_comp
// formation follow the paper; the state machine and its encoding are this design's.
module controller
  import orbgrand_pkg::*;
#(
  parameter int unsigned N        = orbgrand_pkg::N_DEF,
  parameter int unsigned NMK      = orbgrand_pkg::NMK_DEF,
  parameter int unsigned LW       = orbgrand_pkg::LW_DEF,
  parameter int unsigned PMAX     = orbgrand_pkg::PMAX_DEF,
  parameter int unsigned SEGMENTS = orbgrand_pkg::SEGMENTS_DEF,
  localparam int unsigned MW      = $clog2(LW + 1),
  localparam int unsigned LAMW    = $clog2(N + 1),
  localparam int unsigned PW      = $clog2(PMAX + 1)
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             start,
  output logic             busy,
  input  logic [NMK-1:0]   s_c,
  input  logic [NMK-1:0]   s_sorted [N],
  // decoder core
  output logic             core_load,
  output step_mode_e       nxt_mode,
  output logic [MW-1:0]    nxt_mr,
  output logic [LAMW-1:0]  nxt_lo,
  output logic [NMK-1:0]   s_comp,
  input  logic             core_hit,
  input  logic [1:0]       core_np,
  input  logic [LAMW-1:0]  core_l1,
  input  logic [LAMW-1:0]  core_l2,
  input  logic [LAMW-1:0]  core_l3,
  // result
  output logic             finish,
  output logic             found,
  output logic [PW-1:0]    res_hw,
  output logic [LAMW-1:0]  res_lam [PMAX],   // lambda_1 .. lambda_PMAX, 0 = unused
  // observation of the schedule (current step)
  output step_mode_e       cur_mode,
  output logic [MW-1:0]    cur_m,
  output logic [PW-1:0]    cur_p
);

  localparam int unsigned SORT_CYC = $clog2(N / SEGMENTS);

  typedef enum logic [1:0] {S_IDLE, S_SORT, S_SEARCH} state_e;

  state_e          state;
  logic [4:0]      cnt;
  logic [NMK-1:0]  s_c_q;
  step_mode_e      mode;              // mode of the current step
  logic [MW-1:0]   m;                 // logistic weight of the current step
  logic [PW-1:0]   p;                 // P of the current MODE_PGT step (3 otherwise)
  logic [LAMW-1:0] lam [PMAX+1];      // lam[i] = lambda_i for 4 <= i <= p

  // ------------------------------------------------------------ next step
  step_mode_e      n_mode;
  logic [MW-1:0]   n_m;
  logic [PW-1:0]   n_p;
  logic [LAMW-1:0] n_lam [PMAX+1];
  logic            n_end;             // no step left

  // first tuple of P parts above 3: lambda_P = 1, ..., lambda_4 = P - 3
  function automatic logic first_fits(input int mm, input int pp);
    return (pp <= int'(PMAX)) && (mm >= pp * (pp + 1) / 2);
  endfunction

  always_comb begin
    int r, sum;
    int j, np;
    logic carried;
    n_mode  = mode;
    n_m     = m;
    n_p     = p;
    n_lam   = lam;
    n_end   = 1'b0;
    carried = 1'b0;
    r = 0; sum = 0; j = 0; np = 0;
    if (mode == MODE_HW1) begin
      n_mode = MODE_P23;
      n_m    = MW'(3);
      n_p    = PW'(3);
      n_end  = (LW < 3);
    end else begin
      if (mode == MODE_PGT) begin
        // odometer: the lowest level that can still grow takes one step
        for (int i = 4; i <= int'(PMAX); i++) begin
          if (i <= int'(p) && !carried) begin
            sum = 0;
            for (int k = i + 1; k <= int'(PMAX); k++) if (k <= int'(p)) sum += int'(lam[k]);
            r = int'(m) - sum;
            if (i * (int'(lam[i]) + 1) + i * (i - 1) / 2 <= r) begin
              carried = 1'b1;
              j       = i;
            end
          end
        end
        if (carried) begin
          n_lam[j] = lam[j] + 1'b1;
          for (int i = 4; i <= int'(PMAX); i++) begin
            if (i < j) n_lam[i] = LAMW'(int'(lam[j]) + 1 + (j - i));
          end
        end
      end
      if (!carried) begin
        np = (mode == MODE_P23) ? 4 : int'(p) + 1;
        if (first_fits(int'(m), np)) begin
          n_mode = MODE_PGT;
          n_p    = PW'(np);
          for (int i = 4; i <= int'(PMAX); i++) begin
            n_lam[i] = (i <= np) ? LAMW'(np + 1 - i) : '0;
          end
        end else if (int'(m) < int'(LW)) begin
          n_mode = MODE_P23;
          n_m    = m + 1'b1;
          n_p    = PW'(3);
        end else begin
          n_end  = 1'b1;
        end
      end
    end
  end

  // window and combined syndrome of the next step
  logic [NMK-1:0] n_scomp;
  always_comb begin
    int sum;
    sum     = 0;
    n_scomp = s_c_q;
    if (n_mode == MODE_PGT) begin
      for (int i = 4; i <= int'(PMAX); i++) begin
        if (i <= int'(n_p)) begin
          sum += int'(n_lam[i]);
          if (int'(n_lam[i]) >= 1 && int'(n_lam[i]) <= int'(N))
            n_scomp = n_scomp ^ s_sorted[$clog2(N)'(int'(n_lam[i]) - 1)];
        end
      end
      nxt_mr = MW'(int'(n_m) - sum);
      nxt_lo = n_lam[4] + 1'b1;
    end else begin
      nxt_mr = n_m;
      nxt_lo = LAMW'(1);
    end
  end

  // ------------------------------------------------------------ sequencing
  logic sort_last;
  assign sort_last = (state == S_SORT) && (int'(cnt) == SORT_CYC - 1);

  always_comb begin
    finish    = 1'b0;
    found     = 1'b0;
    core_load = 1'b0;
    nxt_mode  = n_mode;
    if (state == S_SORT && cnt == '0 && s_c == '0) begin
      finish = 1'b1;
      found  = 1'b1;
    end else if (sort_last) begin
      core_load = 1'b1;
      nxt_mode  = MODE_HW1;
    end else if (state == S_SEARCH) begin
      if (core_hit) begin
        finish = 1'b1;
        found  = 1'b1;
      end else if (n_end) begin
        finish = 1'b1;
      end else begin
        core_load = 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state  <= S_IDLE;
      cnt    <= '0;
      s_c_q  <= '0;
      s_comp <= '0;
      mode   <= MODE_HW1;
      m      <= '0;
      p      <= '0;
      for (int i = 0; i <= int'(PMAX); i++) lam[i] <= '0;
    end else begin
      case (state)
        S_IDLE: if (start) begin
          state <= S_SORT;
          cnt   <= '0;
        end
        S_SORT: begin
          cnt <= cnt + 1'b1;
          if (cnt == '0) s_c_q <= s_c;
          if (finish) begin
            state <= S_IDLE;
          end else if (sort_last) begin
            state  <= S_SEARCH;
            mode   <= MODE_HW1;
            m      <= MW'(1);
            p      <= PW'(1);
            s_comp <= (cnt == '0) ? s_c : s_c_q;
          end
        end
        S_SEARCH: begin
          if (finish) begin
            state <= S_IDLE;
          end else begin
            mode   <= n_mode;
            m      <= n_m;
            p      <= n_p;
            lam    <= n_lam;
            s_comp <= n_scomp;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  // ------------------------------------------------------------ result
  always_comb begin
    for (int i = 0; i < int'(PMAX); i++) res_lam[i] = '0;
    res_hw = '0;
    if (state == S_SEARCH && core_hit) begin
      res_lam[0] = core_l1;
      if (PMAX >= 2) res_lam[1] = core_l2;
      if (PMAX >= 3) res_lam[2] = core_l3;
      res_hw = PW'(core_np);
      if (mode == MODE_PGT) begin
        for (int i = 4; i <= int'(PMAX); i++) begin
          if (i <= int'(p)) res_lam[i-1] = lam[i];
        end
        res_hw = p;
      end
    end
  end

  initial begin
    assert (PMAX >= 3) else $error("controller: PMAX must be at least 3");
    assert (SORT_CYC >= 2) else $error("controller: N/SEGMENTS must be at least 4");
  end

  assign cur_mode = mode;
  assign cur_m    = m;
  assign cur_p    = p;

endmodule
