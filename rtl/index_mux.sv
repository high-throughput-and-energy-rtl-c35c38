// index_mux: the P n:1 multiplexers between the sorter and the word generator.
//
// The decoder finds a noise guess as sorted positions lambda_1 .. lambda_P (1-based
// ranks in the order of increasing reliability).  Multiplexer j looks up
// pos[j] = Ind[lambda_j - 1], the original bit position of rank lambda_j, i.e. the
// bit to flip.  lambda_j = 0 marks an unused multiplexer (a guess of Hamming weight
// below PMAX) and gives pos_valid[j] = 0.  Purely combinational.
// PMAX multiplexers of N inputs follow the paper; the 0 code is this design's.
module index_mux #(
  parameter int unsigned N    = orbgrand_pkg::N_DEF,
  parameter int unsigned PMAX = orbgrand_pkg::PMAX_DEF,
  localparam int unsigned IW   = $clog2(N),
  localparam int unsigned LAMW = $clog2(N + 1)
) (
  input  logic [IW-1:0]   ind       [N],
  input  logic [LAMW-1:0] lam       [PMAX],
  output logic [IW-1:0]   pos       [PMAX],
  output logic [PMAX-1:0] pos_valid
);

  for (genvar j = 0; j < int'(PMAX); j++) begin : g_mux
    always_comb begin
      pos_valid[j] = (lam[j] != '0) && (int'(lam[j]) <= int'(N));
      pos[j]       = pos_valid[j] ? ind[IW'(int'(lam[j]) - 1)] : '0;
    end
  end

endmodule
