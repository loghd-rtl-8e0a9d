// profile_decoder: nearest-profile classification in activation space.
//
// LogHD predicts the class whose expected activation profile P_c is closest
// to the query's activation vector A in squared Euclidean distance,
// y = argmin_c sum_j (A_j - P_c,j)^2. This unit receives one profile per
// cycle (en high) with its class index, computes the n differences, squares
// and sums them in parallel, and keeps the smallest distance seen since the
// last cycle with first high, together with its class. A strictly smaller
// distance is needed to replace the current best, so ties go to the class
// presented earlier (the lowest index when classes come in order).
//
// Timing: best_cls / best_dist update on the clock edge of an en cycle and
// are valid the cycle after the last profile. The Euclidean metric is the
// method's; the one-class-per-cycle rate and tie rule are this design's.
module profile_decoder
  import loghd_pkg::C_DEF, loghd_pkg::N_DEF, loghd_pkg::PW_DEF, loghd_pkg::idx_width, loghd_pkg::dist_width;
#(
  parameter int unsigned C  = C_DEF,
  parameter int unsigned N  = N_DEF,
  parameter int unsigned PW = PW_DEF,
  localparam int unsigned CW     = idx_width(C),
  localparam int unsigned DIST_W = dist_width(PW, N)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     en,
  input  logic                     first,
  input  logic [CW-1:0]            cls,
  input  logic [N-1:0][PW-1:0]     act,
  input  logic [N-1:0][PW-1:0]     prof,
  output logic [CW-1:0]            best_cls,
  output logic [DIST_W-1:0]        best_dist
);

  logic [DIST_W-1:0] cur_dist;

  always_comb begin
    cur_dist = '0;
    for (int j = 0; j < N; j++) begin
      logic signed [PW:0]      diff;
      logic signed [2*PW+1:0]  sq;
      diff = $signed({act[j][PW-1], act[j]}) - $signed({prof[j][PW-1], prof[j]});
      sq   = diff * diff;
      cur_dist += DIST_W'(unsigned'(sq));
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      best_cls  <= '0;
      best_dist <= '1;
    end else if (en && (first || cur_dist < best_dist)) begin
      best_cls  <= cls;
      best_dist <= cur_dist;
    end
  end

endmodule
