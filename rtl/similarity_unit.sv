// similarity_unit: computes the activation vector A of a query against the n bundles.
//
// LogHD scores a query phi(x_q) by its cosine similarity to every bundle,
// A_j = delta(M_j, phi(x_q)). Bundles and query are normalized before they
// are quantized (all bundles to one common norm), so both norms in the
// cosine are constants and the dot product alone carries the similarity;
// this unit therefore computes n plain dot products and no divisions or
// square roots. The activation profiles the decoder compares against are
// stored in the scale this unit produces.
//
// Operation: the query arrives LANES dimensions per beat together with the
// matching row of every bundle. On each beat with mac_en high, each of the n
// accumulators adds the sum of LANES products W x QW bits (mac_first loads
// the sum instead, starting a new query). After the last beat, acc holds the
// exact dot products and act holds them rescaled to PW-bit two's complement:
// arithmetic right shift by act_shift, then saturation to the PW-bit range.
//
// Timing: acc updates on the clock edge of a mac_en beat; act is a
// combinational function of acc and act_shift. The shift-and-saturate
// rescaling and the lane count are this design's choices.
module similarity_unit
  import loghd_pkg::N_DEF, loghd_pkg::D_DEF, loghd_pkg::W_DEF, loghd_pkg::QW_DEF, loghd_pkg::PW_DEF,
         loghd_pkg::LANES_DEF, loghd_pkg::SHW, loghd_pkg::acc_width;
#(
  parameter int unsigned N     = N_DEF,
  parameter int unsigned D     = D_DEF,
  parameter int unsigned W     = W_DEF,
  parameter int unsigned QW    = QW_DEF,
  parameter int unsigned PW    = PW_DEF,
  parameter int unsigned LANES = LANES_DEF,
  localparam int unsigned ROWS  = (D + LANES - 1) / LANES,
  localparam int unsigned ACC_W = acc_width(W, QW, ROWS * LANES)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          mac_en,
  input  logic                          mac_first,
  input  logic [LANES-1:0][QW-1:0]      q_chunk,
  input  logic [N-1:0][LANES*W-1:0]     m_rows,
  input  logic [SHW-1:0]                act_shift,
  output logic [N-1:0][ACC_W-1:0]       acc,
  output logic [N-1:0][PW-1:0]          act
);

  localparam logic signed [ACC_W-1:0] ACT_MAX = ACC_W'((1 << (PW - 1)) - 1);
  localparam logic signed [ACC_W-1:0] ACT_MIN = -ACC_W'(1 << (PW - 1));

  logic [N-1:0][ACC_W-1:0] beat_sum;

  // Sum of LANES products per bundle for the current beat.
  always_comb begin
    for (int j = 0; j < N; j++) begin
      logic signed [ACC_W-1:0]  s;
      logic signed [W+QW-1:0]   p;
      s = '0;
      for (int i = 0; i < LANES; i++) begin
        p = $signed(m_rows[j][i*W +: W]) * $signed(q_chunk[i]);
        s += ACC_W'(p);
      end
      beat_sum[j] = s;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc <= '0;
    end else if (mac_en) begin
      for (int j = 0; j < N; j++) begin
        acc[j] <= mac_first ? beat_sum[j] : acc[j] + beat_sum[j];
      end
    end
  end

  // Rescale to the profile format: arithmetic shift, then saturate.
  always_comb begin
    for (int j = 0; j < N; j++) begin
      logic signed [ACC_W-1:0] sh;
      sh = $signed(acc[j]) >>> act_shift;
      if (sh > ACT_MAX)      act[j] = PW'(ACT_MAX);
      else if (sh < ACT_MIN) act[j] = PW'(ACT_MIN);
      else                   act[j] = PW'(sh);
    end
  end

endmodule
