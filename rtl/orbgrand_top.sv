// orbgrand_top: ORBGRAND soft-input decoder for any (n,k) linear block code.
//
// GRAND decoders guess the channel noise instead of decoding the code: they apply
// test error patterns e to the hard-decided word y_hat, most likely first, and stop
// at the first one for which y_hat ^ e is a codeword (H * (y_hat ^ e)^T = 0).
// ORBGRAND ranks the bits by reliability |y| and orders patterns by logistic weight,
// the sum of the reliability ranks of the flipped bits; all patterns of one weight m
// are the distinct integer partitions of m.  This decoder:
//   1. registers y (edge 0) and checks s_c = H * y_hat^T (syndrome_unit); s_c = 0
//      finishes after 1 cycle;
//   2. sorts |y| (llr_sorter, log2(N/SEGMENTS) cycles), giving the permutation Ind
//      and the single-bit syndromes s_j in reliability order;
//   3. tests all single-bit patterns in one cycle, then, for m = 3 .. LW, all
//      patterns of 2 and 3 bits in one cycle and the patterns of 4 .. PMAX bits in
//      one cycle per choice of their smaller parts (controller + decoder_core);
//   4. maps the winning ranks to bit positions (index_mux) and flips those bits of
//      y_hat (word_generator).
// Interface: load H one column per cycle (h_we, h_addr, h_wdata) while idle.  Offer
// a word with in_valid while in_ready = 1; y[i] is sign-magnitude, sign in bit Q-1
// (sign 1 = hard decision 1).  One cycle after the decode ends out_valid pulses
// with c_hat (estimated codeword), found (0 = nothing found up to LW, c_hat =
// y_hat) and out_hw (number of flipped bits).  Decodes do not overlap.
// Latency, in cycles from the accepting edge to out_valid: 1 for a codeword,
// log2(N/SEGMENTS)+1 for one flipped bit, at most 93417 for the defaults.
// The block structure follows the paper's architecture figure; the handshake, the
// LLR sign convention and the synchronous active-high reset are this design's.
// The controller's step observation outputs (cur_mode, cur_m, cur_p) are left
// unconnected here; they serve its unit test and a linter reports them as unused.
module orbgrand_top
  import orbgrand_pkg::*;
#(
  parameter int unsigned N        = orbgrand_pkg::N_DEF,
  parameter int unsigned NMK      = orbgrand_pkg::NMK_DEF,
  parameter int unsigned Q        = orbgrand_pkg::Q_DEF,
  parameter int unsigned LW       = orbgrand_pkg::LW_DEF,
  parameter int unsigned PMAX     = orbgrand_pkg::PMAX_DEF,
  parameter int unsigned SEGMENTS = orbgrand_pkg::SEGMENTS_DEF,
  localparam int unsigned IW      = $clog2(N),
  localparam int unsigned PW      = $clog2(PMAX + 1)
) (
  input  logic            clk,
  input  logic            rst,
  // parity check matrix load
  input  logic            h_we,
  input  logic [IW-1:0]   h_addr,
  input  logic [NMK-1:0]  h_wdata,
  // channel LLRs
  input  logic            in_valid,
  output logic            in_ready,
  input  logic [Q-1:0]    y [N],
  // result
  output logic            out_valid,
  output logic [N-1:0]    c_hat,
  output logic            found,
  output logic [PW-1:0]   out_hw
);

  localparam int unsigned MW   = $clog2(LW + 1);
  localparam int unsigned LAMW = $clog2(N + 1);

  // ------------------------------------------------------------ input register
  logic [N-1:0]  y_hat;
  logic [Q-2:0]  y_mag [N];
  logic          busy, accept;

  assign in_ready = !busy;
  assign accept   = in_valid && in_ready;

  always_ff @(posedge clk) begin
    if (rst) begin
      y_hat <= '0;
      for (int i = 0; i < int'(N); i++) y_mag[i] <= '0;
    end else if (accept) begin
      for (int i = 0; i < int'(N); i++) begin
        y_hat[i] <= y[i][Q-1];
        y_mag[i] <= y[i][Q-2:0];
      end
    end
  end

  // ------------------------------------------------------------ H memory, syndrome, sorter
  logic [NMK-1:0] h_cols   [N];
  logic [NMK-1:0] s_c;
  logic [IW-1:0]  ind      [N];
  logic [NMK-1:0] s_sorted [N];

  h_memory #(.N(N), .NMK(NMK)) u_hmem (
    .clk, .rst, .h_we, .h_addr, .h_wdata, .h_cols
  );

  syndrome_unit #(.N(N), .NMK(NMK)) u_synd (
    .h_cols, .y_hat, .s_c
  );

  llr_sorter #(.N(N), .NMK(NMK), .Q(Q), .SEGMENTS(SEGMENTS)) u_sort (
    .clk, .y_mag, .h_cols, .ind, .s_sorted
  );

  // ------------------------------------------------------------ controller and core
  logic            core_load, core_hit;
  step_mode_e      nxt_mode, cur_mode;
  logic [MW-1:0]   nxt_mr, cur_m;
  logic [LAMW-1:0] nxt_lo;
  logic [NMK-1:0]  s_comp;
  logic [1:0]      core_np;
  logic [LAMW-1:0] core_l1, core_l2, core_l3;
  logic            finish, res_found;
  logic [PW-1:0]   res_hw, cur_p;
  logic [LAMW-1:0] res_lam [PMAX];

  controller #(.N(N), .NMK(NMK), .LW(LW), .PMAX(PMAX), .SEGMENTS(SEGMENTS)) u_ctrl (
    .clk, .rst,
    .start    (accept),
    .busy     (busy),
    .s_c      (s_c),
    .s_sorted (s_sorted),
    .core_load(core_load),
    .nxt_mode (nxt_mode),
    .nxt_mr   (nxt_mr),
    .nxt_lo   (nxt_lo),
    .s_comp   (s_comp),
    .core_hit (core_hit),
    .core_np  (core_np),
    .core_l1  (core_l1),
    .core_l2  (core_l2),
    .core_l3  (core_l3),
    .finish   (finish),
    .found    (res_found),
    .res_hw   (res_hw),
    .res_lam  (res_lam),
    .cur_mode (cur_mode),
    .cur_m    (cur_m),
    .cur_p    (cur_p)
  );

  decoder_core #(.N(N), .NMK(NMK), .LW(LW)) u_core (
    .clk, .rst,
    .s_sorted (s_sorted),
    .load     (core_load),
    .nxt_mode (nxt_mode),
    .nxt_mr   (nxt_mr),
    .nxt_lo   (nxt_lo),
    .s_comp   (s_comp),
    .hit      (core_hit),
    .hit_np   (core_np),
    .hit_l1   (core_l1),
    .hit_l2   (core_l2),
    .hit_l3   (core_l3)
  );

  // ------------------------------------------------------------ word generation
  logic [IW-1:0]   pos [PMAX];
  logic [PMAX-1:0] pos_valid;

  index_mux #(.N(N), .PMAX(PMAX)) u_imux (
    .ind, .lam(res_lam), .pos, .pos_valid
  );

  word_generator #(.N(N), .PMAX(PMAX)) u_wgen (
    .clk, .rst,
    .load     (finish),
    .y_hat    (y_hat),
    .pos      (pos),
    .pos_valid(pos_valid),
    .c_hat    (c_hat)
  );

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      found     <= 1'b0;
      out_hw    <= '0;
    end else begin
      out_valid <= finish;
      if (finish) begin
        found  <= res_found;
        out_hw <= res_hw;
      end
    end
  end

  // H must not change while a word is being decoded.
  assert property (@(posedge clk) disable iff (rst) busy |-> !h_we)
    else $error("orbgrand_top: H written during a decode");

endmodule
