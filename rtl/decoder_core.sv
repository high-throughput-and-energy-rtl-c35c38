// decoder_core: parallel codebook-membership checks of one time step.
//
// ORBGRAND tests error patterns e whose flipped positions, counted in the order of
// increasing reliability, form a distinct integer partition lambda_1 > lambda_2 >
// ... > lambda_P of a logistic weight m.  With s_j the syndrome of a single error on
// the j-th least reliable bit, pattern e passes when s_comp ^ s_l1 ^ s_l2 ^ s_l3 = 0,
// where s_comp = s_c ^ s_l4 ^ ... ^ s_lP is supplied by the controller.
//
// Three shift registers hold windows of the sorted syndromes:
//   SR1[j] = s_(mr - 2*lo + 1 - j)   (lambda_1 side, descending)
//   SR2[j] = s_(lo + j)              (lambda_2 side, ascending)
//   SR3[t] = s_(lo + t)              (lambda_3)
// where mr = m - (lambda_4 + ... + lambda_P) is the weight left for the three largest
// parts and lo is the smallest allowed lambda_3 (1, or lambda_4 + 1).  Entries whose
// index falls outside 1..N are disabled (valid bit 0).  Fixed buses of NMK-wide XOR
// gates combine the registers:
//   P = 2 bus (step mode MODE_P23 only), candidate u:
//       lambda_2 = 1 + u, lambda_1 = m - 1 - u       : s_comp ^ SR1[u] ^ SR2[u]
//   P = 3 bus t, candidate u:
//       lambda_3 = lo + t, lambda_2 = lambda_3 + 1 + u,
//       lambda_1 = mr - lambda_3 - lambda_2           : s_comp ^ SR3[t] ^ SR2[t+u+1] ^ SR1[2t+u+2]
// A candidate takes part only if lambda_1 > lambda_2 (2u < mr - 3lo - 3t - 2 on the
// P = 3 buses).  Every candidate result is NOR-reduced (1 = all syndrome bits zero)
// and a 2D priority encoder (row = bus, column = candidate) picks the first hit:
// the P = 2 bus, then the P = 3 buses by increasing lambda_3, each by increasing
// lambda_2.  In step mode MODE_HW1 the N single-bit patterns s_comp ^ s_j are checked
// instead (s_comp = s_c then), the least reliable position first.
//
// Timing: on a clock edge with load = 1 the registers take the window (nxt_mode,
// nxt_mr, nxt_lo) of the next step; during the following cycle hit, hit_np and
// hit_l1..hit_l3 (1-based sorted positions, 0 = part not used) describe that step.
// One step per clock, as in the paper.  The register sizes (2*(lambda3max+1) entries
// for SR1 and SR2, lambda3max for SR3), the bus structure and the NOR/priority stage
// follow the paper.  The paper moves the registers by "adequately chosen shift
// values"; here each register is reloaded with a variable shift (a barrel shift of
// the sorted syndromes) every step, which is this design's realisation of that.
// At the default size (LW = 96, lambda3max = 31) SR1 and SR2 have the paper's 64
// entries, but the buses read only SR1[0..62] and SR2[0..46]; the remaining entries
// are kept so that the registers have the size the paper gives, and a linter
// reports them as unused.  Likewise only the low bits of the 32-bit lambda_1
// arithmetic reach the hit_l1 output.
module decoder_core
  import orbgrand_pkg::*;
#(
  parameter int unsigned N   = orbgrand_pkg::N_DEF,
  parameter int unsigned NMK = orbgrand_pkg::NMK_DEF,
  parameter int unsigned LW  = orbgrand_pkg::LW_DEF,
  localparam int unsigned MW   = $clog2(LW + 1),
  localparam int unsigned LAMW = $clog2(N + 1)
) (
  input  logic             clk,
  input  logic             rst,
  input  logic [NMK-1:0]   s_sorted [N],
  input  logic             load,
  input  step_mode_e       nxt_mode,
  input  logic [MW-1:0]    nxt_mr,
  input  logic [LAMW-1:0]  nxt_lo,
  input  logic [NMK-1:0]   s_comp,
  output logic             hit,
  output logic [1:0]       hit_np,
  output logic [LAMW-1:0]  hit_l1,
  output logic [LAMW-1:0]  hit_l2,
  output logic [LAMW-1:0]  hit_l3
);

  // ---------------------------------------------------------------- sizes
  localparam int unsigned T3   = num_p3_buses(LW);          // lambda3max = number of P=3 buses
  localparam int unsigned U2   = p2_bus_len(LW);            // candidates on the P=2 bus
  localparam int unsigned U0   = p3_bus_len(LW, 0);         // longest P=3 bus
  localparam int unsigned COLS = (U2 > U0) ? U2 : U0;
  localparam int unsigned ROWS = T3 + 1;                    // row 0 = P=2 bus
  localparam int unsigned SRL  = sr12_len(LW);              // SR1 / SR2 entries
  localparam int unsigned RW   = (ROWS > 1) ? $clog2(ROWS) : 1;
  localparam int unsigned CW   = (COLS > 1) ? $clog2(COLS) : 1;
  localparam int unsigned HW   = $clog2(N);

  // ---------------------------------------------------------------- shift registers
  logic [NMK-1:0] sr1 [SRL];
  logic [NMK-1:0] sr2 [SRL];
  logic [NMK-1:0] sr3 [T3];
  logic [SRL-1:0] sr1_v, sr2_v;
  logic [T3-1:0]  sr3_v;
  step_mode_e     mode;
  logic [MW-1:0]  mr;
  logic [LAMW-1:0] lo;

  // window element: 1-based index k of the sorted syndromes, 0 outside 1..N
  function automatic logic [NMK-1:0] win(input logic [NMK-1:0] s [N], input int k);
    if (k >= 1 && k <= int'(N)) return s[k-1];
    return '0;
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      mode  <= MODE_HW1;
      mr    <= '0;
      lo    <= '0;
      sr1_v <= '0;
      sr2_v <= '0;
      sr3_v <= '0;
      for (int j = 0; j < SRL; j++) begin
        sr1[j] <= '0;
        sr2[j] <= '0;
      end
      for (int t = 0; t < int'(T3); t++) sr3[t] <= '0;
    end else if (load) begin
      mode <= nxt_mode;
      mr   <= nxt_mr;
      lo   <= nxt_lo;
      for (int j = 0; j < SRL; j++) begin
        int k1, k2;
        k1 = int'(nxt_mr) - 2 * int'(nxt_lo) + 1 - j;
        k2 = int'(nxt_lo) + j;
        sr1[j]   <= win(s_sorted, k1);
        sr1_v[j] <= (k1 >= 1) && (k1 <= int'(N));
        sr2[j]   <= win(s_sorted, k2);
        sr2_v[j] <= (k2 >= 1) && (k2 <= int'(N));
      end
      for (int t = 0; t < int'(T3); t++) begin
        int k3;
        k3 = int'(nxt_lo) + t;
        sr3[t]   <= win(s_sorted, k3);
        sr3_v[t] <= (k3 >= 1) && (k3 <= int'(N));
      end
    end
  end

  // ---------------------------------------------------------------- buses
  logic [COLS-1:0] req [ROWS];

  // P = 2 bus
  for (genvar u = 0; u < int'(COLS); u++) begin : g_p2
    if (u < int'(U2)) begin : g_on
      logic [NMK-1:0] syn;
      logic           en;
      assign syn = s_comp ^ sr1[u] ^ sr2[u];
      assign en  = (mode == MODE_P23) && sr1_v[u] && sr2_v[u] && (2 * u < int'(mr) - 2);
      assign req[0][u] = en && ~|syn;
    end else begin : g_off
      assign req[0][u] = 1'b0;
    end
  end

  // P = 3 buses
  for (genvar t = 0; t < int'(T3); t++) begin : g_bus
    localparam int unsigned UT = p3_bus_len(LW, t);
    int lim;   // mr - 3*lo - 3*t - 2
    assign lim = int'(mr) - 3 * int'(lo) - (3 * t + 2);
    for (genvar u = 0; u < int'(COLS); u++) begin : g_cand
      if (u < int'(UT)) begin : g_on
        logic [NMK-1:0] syn;
        logic           en;
        assign syn = s_comp ^ sr3[t] ^ sr2[t+u+1] ^ sr1[2*t+u+2];
        assign en  = (mode != MODE_HW1) && sr3_v[t] && sr2_v[t+u+1] && sr1_v[2*t+u+2]
                     && (2 * u < lim);
        assign req[t+1][u] = en && ~|syn;
      end else begin : g_off
        assign req[t+1][u] = 1'b0;
      end
    end
  end

  logic          pe_any;
  logic [RW-1:0] pe_row;
  logic [CW-1:0] pe_col;

  prio_enc_2d #(.ROWS(ROWS), .COLS(COLS)) u_prio (
    .req (req),
    .any (pe_any),
    .row (pe_row),
    .col (pe_col)
  );

  // ---------------------------------------------------------------- Hamming weight 1
  logic [N-1:0]  hw1_req;
  logic          hw1_any;
  logic [HW-1:0] hw1_pos;

  always_comb begin
    for (int i = 0; i < int'(N); i++) hw1_req[i] = ~|(s_comp ^ s_sorted[i]);
    hw1_any = |hw1_req;
    hw1_pos = '0;
    for (int i = int'(N) - 1; i >= 0; i--) begin
      if (hw1_req[i]) hw1_pos = HW'(i);
    end
  end

  // ---------------------------------------------------------------- result
  always_comb begin
    int l1, l2, l3;
    hit    = 1'b0;
    hit_np = 2'd0;
    l1 = 0; l2 = 0; l3 = 0;
    if (mode == MODE_HW1) begin
      hit    = hw1_any;
      hit_np = 2'd1;
      l1     = int'(hw1_pos) + 1;
    end else if (pe_row == '0) begin
      hit    = pe_any;
      hit_np = 2'd2;
      l2     = 1 + int'(pe_col);
      l1     = int'(mr) - l2;
    end else begin
      hit    = pe_any;
      hit_np = 2'd3;
      l3     = int'(lo) + int'(pe_row) - 1;
      l2     = l3 + 1 + int'(pe_col);
      l1     = int'(mr) - l3 - l2;
    end
    hit_l1 = LAMW'(l1);
    hit_l2 = LAMW'(l2);
    hit_l3 = LAMW'(l3);
  end

endmodule
