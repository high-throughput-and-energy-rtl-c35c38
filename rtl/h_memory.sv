// h_memory: storage for the parity check matrix H of the code being decoded.
//
// The decoder is code-agnostic: any (n,k) linear code with n = N and n-k <= NMK is
// decoded after its H has been written here.  H is stored column by column, because
// the decoder only ever uses columns: column i is the syndrome s_i = H * 1_i of a
// single bit error at position i.  A code with fewer than NMK parity rows is written
// with its unused upper rows zero.
//
// Interface: one column is written per clock (h_we, h_addr = column 0..N-1, h_wdata
// with row 0 in bit 0).  All N columns are visible at once on h_cols and change the
// cycle after the write.  Writing while a frame is decoded is not allowed (the
// decoder reads H during the whole decode); the top level asserts this.
// Reset clears the matrix.  The memory size (n-k) x n follows the paper; the column
// write port and the reset are this design's choice.
module h_memory #(
  parameter int unsigned N   = orbgrand_pkg::N_DEF,
  parameter int unsigned NMK = orbgrand_pkg::NMK_DEF,
  localparam int unsigned AW = $clog2(N)
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 h_we,
  input  logic [AW-1:0]        h_addr,
  input  logic [NMK-1:0]       h_wdata,
  output logic [NMK-1:0]       h_cols [N]
);

  logic [NMK-1:0] mem [N];

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < N; i++) mem[i] <= '0;
    end else if (h_we && (int'(h_addr) < N)) begin
      mem[h_addr] <= h_wdata;
    end
  end

  assign h_cols = mem;

endmodule
