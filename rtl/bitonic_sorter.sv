// bitonic_sorter: pipelined bitonic sorting network (ascending).
//
// Sorts L = 2^k keys in ascending order and moves a payload word with each key.
// The network is Batcher's bitonic sorter: k merge phases, phase p building sorted
// runs of length 2^p out of bitonic sequences with p layers of compare-exchange
// elements (k(k+1)/2 layers in all, L/2 comparators per layer).  One register stage
// is placed after every phase, so the network is pipelined to log2(L) stages and a
// result appears log2(L) clock cycles after its input; a new input can be accepted
// every cycle.  The pipeline always advances; the output stays constant as long as
// the input does.
//
// Keys must be distinct for a unique result; the caller makes them so by appending
// the element index (ties in |y| are then broken by the lower index).
// The bitonic network and its log2(n)-stage pipelining follow the paper; where the
// pipeline registers sit is this design's choice.
module bitonic_sorter #(
  parameter int unsigned L  = 128,
  parameter int unsigned KW = 11,
  parameter int unsigned DW = 32
) (
  input  logic          clk,
  input  logic [KW-1:0] key_in  [L],
  input  logic [DW-1:0] data_in [L],
  output logic [KW-1:0] key_out [L],
  output logic [DW-1:0] data_out[L]
);

  localparam int unsigned LOG = $clog2(L);

  // stage_k[p] / stage_d[p]: input of phase p (p = 0 is the module input),
  // stage p+1 is the registered output of phase p.
  logic [KW-1:0] stage_k [LOG+1][L];
  logic [DW-1:0] stage_d [LOG+1][L];

  assign stage_k[0] = key_in;
  assign stage_d[0] = data_in;

  for (genvar p = 0; p < LOG; p++) begin : g_phase
    localparam int unsigned SIZE = 2 << p;  // sorted run length produced by this phase
    logic [KW-1:0] wk [L];
    logic [DW-1:0] wd [L];

    always_comb begin
      logic [KW-1:0] tk;
      logic [DW-1:0] td;
      int unsigned   stride, partner;
      logic          up;
      tk      = '0;
      td      = '0;
      stride  = 0;
      partner = 0;
      up      = 1'b0;
      wk = stage_k[p];
      wd = stage_d[p];
      for (int j = p; j >= 0; j--) begin
        stride = 1 << j;
        for (int unsigned i = 0; i < L; i++) begin
          partner = i ^ stride;
          if (partner > i) begin
            up = ((i & SIZE) == 0);
            if ((wk[i] > wk[partner]) == up) begin
              tk = wk[i]; wk[i] = wk[partner]; wk[partner] = tk;
              td = wd[i]; wd[i] = wd[partner]; wd[partner] = td;
            end
          end
        end
      end
    end

    always_ff @(posedge clk) begin
      stage_k[p+1] <= wk;
      stage_d[p+1] <= wd;
    end
  end

  assign key_out  = stage_k[LOG];
  assign data_out = stage_d[LOG];

  initial begin
    assert (L >= 2 && (1 << LOG) == L) else $error("bitonic_sorter: L must be a power of two");
  end

endmodule
