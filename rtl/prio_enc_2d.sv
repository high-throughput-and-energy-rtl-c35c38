// prio_enc_2d: two-dimensional priority encoder.
//
// Takes a ROWS x COLS array of request bits and returns the first request in
// row-major order: the lowest row that has any request, and within it the lowest
// column.  Built as a row-level OR reduction plus a first-one search over the rows,
// then a first-one search over the selected row, so the depth grows with
// log(ROWS) + log(COLS) rather than with ROWS * COLS.  Purely combinational.
// In the decoder a row is one bus of the shift-register network and a column one
// XOR/NOR-reduce checker on that bus.  The use of a 2D priority encoder follows the
// paper; its priority order is this design's choice.
module prio_enc_2d #(
  parameter int unsigned ROWS = 4,
  parameter int unsigned COLS = 4,
  localparam int unsigned RW  = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned CW  = (COLS > 1) ? $clog2(COLS) : 1
) (
  input  logic [COLS-1:0] req [ROWS],
  output logic            any,
  output logic [RW-1:0]   row,
  output logic [CW-1:0]   col
);

  logic [ROWS-1:0] row_any;
  logic [COLS-1:0] sel;

  always_comb begin
    for (int r = 0; r < ROWS; r++) row_any[r] = |req[r];
    any = |row_any;
    row = '0;
    for (int r = ROWS - 1; r >= 0; r--) begin
      if (row_any[r]) row = RW'(r);
    end
    sel = req[row];
    col = '0;
    for (int c = COLS - 1; c >= 0; c--) begin
      if (sel[c]) col = CW'(c);
    end
  end

endmodule
