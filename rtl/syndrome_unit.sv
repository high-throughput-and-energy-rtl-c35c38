// syndrome_unit: the H * y_hat^T block.
//
// Computes the syndrome of the hard-decided received word, s_c = H * y_hat^T over
// GF(2), as the XOR of the H columns at the positions where y_hat is 1.  A zero
// syndrome means y_hat is already a codeword.  s_c is also the starting value that
// every test syndrome is combined with: by linearity H*(y_hat ^ e)^T is s_c XOR the
// columns selected by e.
//
// Purely combinational (an XOR tree of depth log2(N) per syndrome bit); the
// controller registers the result.  Function from the paper, structure this
// design's own.
module syndrome_unit #(
  parameter int unsigned N   = orbgrand_pkg::N_DEF,
  parameter int unsigned NMK = orbgrand_pkg::NMK_DEF
) (
  input  logic [NMK-1:0] h_cols [N],
  input  logic [N-1:0]   y_hat,
  output logic [NMK-1:0] s_c
);

  always_comb begin
    s_c = '0;
    for (int i = 0; i < N; i++) begin
      if (y_hat[i]) s_c = s_c ^ h_cols[i];
    end
  end

endmodule
