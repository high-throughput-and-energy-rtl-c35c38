// word_generator: forms and holds the decoded word.
//
// When load is high the estimated codeword c_hat = y_hat ^ e is registered, where
// the noise guess e has a 1 at every valid bit-flip position pos[j].  With no valid
// position (zero syndrome, or abandonment) c_hat = y_hat.  c_hat is held until the
// next load.  Timing: one register stage, c_hat changes on the edge where load = 1.
// The paper's word generator delivers the message u_hat; the inverse generator
// matrix it would need is not part of the described hardware, so this block
// returns the full codeword (for a systematic code u_hat is read off its
// information positions).  That output choice is this design's.
module word_generator #(
  parameter int unsigned N    = orbgrand_pkg::N_DEF,
  parameter int unsigned PMAX = orbgrand_pkg::PMAX_DEF,
  localparam int unsigned IW  = $clog2(N)
) (
  input  logic            clk,
  input  logic            rst,
  input  logic            load,
  input  logic [N-1:0]    y_hat,
  input  logic [IW-1:0]   pos       [PMAX],
  input  logic [PMAX-1:0] pos_valid,
  output logic [N-1:0]    c_hat
);

  logic [N-1:0] e;

  always_comb begin
    e = '0;
    for (int j = 0; j < int'(PMAX); j++) begin
      if (pos_valid[j]) e[pos[j]] = 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (rst)       c_hat <= '0;
    else if (load) c_hat <= y_hat ^ e;
  end

endmodule
