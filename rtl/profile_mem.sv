// profile_mem: storage for the C expected activation profiles P_1..P_C.
//
// The profile of class c is the mean activation vector (one similarity per
// bundle) of that class's training examples; LogHD classifies a query by the
// profile nearest to its own activation vector. Each entry holds the n values
// of one profile as PW-bit two's complement numbers, in the same fixed-point
// scale as the activations produced by similarity_unit.
//
// Interface: a write port (class, profile) for loading, and a read port that
// returns the whole profile of one class. Timing: synchronous read, rd_data
// valid the cycle after rd_en. One profile per cycle lets the decoder finish
// the C distance computations in C cycles; that rate, like the word shape, is
// this design's choice.
module profile_mem
  import loghd_pkg::C_DEF, loghd_pkg::N_DEF, loghd_pkg::PW_DEF, loghd_pkg::idx_width;
#(
  parameter int unsigned C  = C_DEF,
  parameter int unsigned N  = N_DEF,
  parameter int unsigned PW = PW_DEF,
  localparam int unsigned CW = idx_width(C)
) (
  input  logic                      clk,
  input  logic                      wr_en,
  input  logic [CW-1:0]             wr_class,
  input  logic [N-1:0][PW-1:0]      wr_data,
  input  logic                      rd_en,
  input  logic [CW-1:0]             rd_class,
  output logic [N-1:0][PW-1:0]      rd_data
);

  logic [N-1:0][PW-1:0] mem [C];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_class] <= wr_data;
    if (rd_en) rd_data <= mem[rd_class];
  end

endmodule
