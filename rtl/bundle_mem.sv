// bundle_mem: storage for the n bundle hypervectors M_1..M_n of the LogHD model.
//
// LogHD replaces the C class prototypes of a conventional HDC classifier by
// n = ceil(log_k C) + eps bundles, each a weighted superposition of the
// prototypes. This memory holds them after training, already normalized and
// quantized to W-bit two's complement. Each bundle is a bank of
// ROWS = ceil(D / LANES) words; a word holds LANES consecutive dimensions,
// dimension r*LANES + i in bits [i*W +: W] of row r (padding dimensions beyond
// D should be loaded with zero).
//
// Interface: one write port (bundle, row, word) for loading the model, and one
// read port that returns row rd_row of all n banks at once, so that the
// similarity unit can update all n dot products in the same cycle.
// Timing: synchronous read, rd_data is valid the cycle after rd_en and holds
// until the next read. Banking and word shape are this design's choice; the
// method fixes only what is stored (n vectors of D elements).
module bundle_mem
  import loghd_pkg::N_DEF, loghd_pkg::D_DEF, loghd_pkg::W_DEF, loghd_pkg::LANES_DEF, loghd_pkg::idx_width;
#(
  parameter int unsigned N     = N_DEF,
  parameter int unsigned D     = D_DEF,
  parameter int unsigned W     = W_DEF,
  parameter int unsigned LANES = LANES_DEF,
  localparam int unsigned ROWS = (D + LANES - 1) / LANES,
  localparam int unsigned NW   = idx_width(N),
  localparam int unsigned RW   = idx_width(ROWS)
) (
  input  logic                            clk,
  input  logic                            wr_en,
  input  logic [NW-1:0]                   wr_bundle,
  input  logic [RW-1:0]                   wr_row,
  input  logic [LANES*W-1:0]              wr_data,
  input  logic                            rd_en,
  input  logic [RW-1:0]                   rd_row,
  output logic [N-1:0][LANES*W-1:0]       rd_data
);

  for (genvar j = 0; j < N; j++) begin : g_bank
    logic [LANES*W-1:0] mem [ROWS];

    always_ff @(posedge clk) begin
      if (wr_en && wr_bundle == NW'(j)) mem[wr_row] <= wr_data;
      if (rd_en) rd_data[j] <= mem[rd_row];
    end
  end

endmodule
