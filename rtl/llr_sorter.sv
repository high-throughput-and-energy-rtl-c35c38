// llr_sorter: orders the received bits from least to most reliable.
//
// The magnitudes |y_i| are sorted in ascending order.  Each element carries its
// original position i (the permutation vector Ind) and the H column of that
// position, so the outputs are Ind[j] and s_sorted[j] = H * 1_Ind[j]: the syndrome
// of a single error on the j-th least reliable bit.  Position j here is 0-based; the
// partition parts lambda used elsewhere are 1-based (lambda = j + 1).
//
// With SEGMENTS = S > 1 the sorter is segmented to save area: S bitonic sorters of
// length N/S each sort a contiguous slice of y, and their outputs are interleaved,
// the first element of every segment first, then the second elements, and so on
// (position j*S + s takes element j of segment s).  The result is then only
// approximately sorted.  S = 1 is the full sorter.
//
// Timing: log2(N/S) cycles from a stable input to a stable output (pipelined
// bitonic network).  Ties in |y| go to the lower original position.  The sorter,
// segmentation and interleaving follow the paper; carrying H columns through the
// network and the tie rule are this design's choices.
module llr_sorter #(
  parameter int unsigned N        = orbgrand_pkg::N_DEF,
  parameter int unsigned NMK      = orbgrand_pkg::NMK_DEF,
  parameter int unsigned Q        = orbgrand_pkg::Q_DEF,
  parameter int unsigned SEGMENTS = orbgrand_pkg::SEGMENTS_DEF,
  localparam int unsigned IW      = $clog2(N)
) (
  input  logic           clk,
  input  logic [Q-2:0]   y_mag    [N],
  input  logic [NMK-1:0] h_cols   [N],
  output logic [IW-1:0]  ind      [N],
  output logic [NMK-1:0] s_sorted [N]
);

  localparam int unsigned SL = N / SEGMENTS;   // segment length
  localparam int unsigned KW = Q - 1 + IW;     // key = {magnitude, position}

  for (genvar s = 0; s < SEGMENTS; s++) begin : g_seg
    logic [KW-1:0]  k_in  [SL];
    logic [NMK-1:0] d_in  [SL];
    logic [KW-1:0]  k_out [SL];
    logic [NMK-1:0] d_out [SL];

    for (genvar j = 0; j < SL; j++) begin : g_in
      assign k_in[j] = {y_mag[s*SL+j], IW'(s*SL+j)};
      assign d_in[j] = h_cols[s*SL+j];
      assign ind[j*SEGMENTS+s]      = k_out[j][IW-1:0];
      assign s_sorted[j*SEGMENTS+s] = d_out[j];
    end

    bitonic_sorter #(.L(SL), .KW(KW), .DW(NMK)) u_sort (
      .clk     (clk),
      .key_in  (k_in),
      .data_in (d_in),
      .key_out (k_out),
      .data_out(d_out)
    );
  end

  initial begin
    assert (N % SEGMENTS == 0) else $error("llr_sorter: N must be a multiple of SEGMENTS");
  end

endmodule
