// loghd_top: LogHD hyperdimensional-classifier inference engine.
//
// A conventional HDC classifier keeps one D-dimensional prototype per class
// and compares a query with all C of them. LogHD keeps only
// n = ceil(log_k C) + EPS "bundle" hypervectors (each a code-weighted sum of
// class prototypes, built offline) plus, per class, an n-entry expected
// activation profile. Inference computes the query's similarity to each
// bundle, A = (delta(M_1,q), .., delta(M_n,q)), and returns the class whose
// profile is nearest to A in squared Euclidean distance. With the default
// C = 26, k = 2 this is 5 stored hypervectors instead of 26, at full D = 10,000.
//
// Data path: the encoded, normalized and quantized query phi(x_q) streams in
// on q_data, LANES dimensions per beat (dimension r*LANES+i in lane i of beat
// r, ROWS = ceil(D/LANES) beats). bundle_mem supplies the matching row of all
// n bundles, similarity_unit accumulates the n dot products, profile_mem and
// profile_decoder then scan the C profiles, one per cycle. loghd_ctrl sequences
// the phases. The engine does not encode inputs and does not train: bundles
// and profiles are written through the bw_* and pw_* ports, and act_shift sets
// the scale between raw dot products and the profile format (see
// similarity_unit).
//
// Timing: with q_valid held high, res_valid rises ROWS + C + 2 cycles after
// the first beat is accepted (128 cycles at the defaults); res_class,
// res_dist, res_act and res_acc (the raw dot
// products) hold while res_valid is high. The algorithm and the
// default sizes follow the LogHD method; the micro-architecture (lanes,
// banking, handshakes, fixed-point formats) is this design's own.
module loghd_top
  import loghd_pkg::*;
#(
  parameter int unsigned D     = D_DEF,
  parameter int unsigned C     = C_DEF,
  parameter int unsigned K     = K_DEF,
  parameter int unsigned EPS   = EPS_DEF,
  parameter int unsigned N     = clog_k(C, K) + EPS,
  parameter int unsigned W     = W_DEF,
  parameter int unsigned QW    = QW_DEF,
  parameter int unsigned PW    = PW_DEF,
  parameter int unsigned LANES = LANES_DEF,
  localparam int unsigned ROWS   = (D + LANES - 1) / LANES,
  localparam int unsigned RW     = idx_width(ROWS),
  localparam int unsigned NW     = idx_width(N),
  localparam int unsigned CW     = idx_width(C),
  localparam int unsigned ACC_W  = acc_width(W, QW, ROWS * LANES),
  localparam int unsigned DIST_W = dist_width(PW, N)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [SHW-1:0]              act_shift,
  // bundle memory load port
  input  logic                        bw_en,
  input  logic [NW-1:0]               bw_bundle,
  input  logic [RW-1:0]               bw_row,
  input  logic [LANES*W-1:0]          bw_data,
  // profile memory load port
  input  logic                        pw_en,
  input  logic [CW-1:0]               pw_class,
  input  logic [N-1:0][PW-1:0]        pw_data,
  // encoded query stream
  input  logic                        q_valid,
  output logic                        q_ready,
  input  logic [LANES-1:0][QW-1:0]    q_data,
  // result
  output logic                        res_valid,
  input  logic                        res_ready,
  output logic [CW-1:0]               res_class,
  output logic [DIST_W-1:0]           res_dist,
  output logic [N-1:0][PW-1:0]        res_act,
  output logic [N-1:0][ACC_W-1:0]     res_acc
);

  initial begin
    assert (K >= 2) else $fatal(1, "alphabet size K must be at least 2");
    assert (N >= clog_k(C, K)) else $fatal(1, "N must be at least ceil(log_K C)");
  end

  logic                      row_rd_en;
  logic [RW-1:0]             row_rd_addr;
  logic                      mac_en, mac_first;
  logic                      prof_rd_en;
  logic [CW-1:0]             prof_rd_class;
  logic                      dec_en, dec_first;
  logic [CW-1:0]             dec_cls;
  logic [N-1:0][LANES*W-1:0] m_rows;
  logic [N-1:0][PW-1:0]      prof;
  logic [N-1:0][ACC_W-1:0]   acc;
  logic [N-1:0][PW-1:0]      act;
  logic [LANES-1:0][QW-1:0]  q_chunk;

  // Query beat held for the cycle in which its bundle rows are read.
  always_ff @(posedge clk) begin
    if (q_valid && q_ready) q_chunk <= q_data;
  end

  loghd_ctrl #(.C(C), .D(D), .LANES(LANES)) u_ctrl (
    .clk, .rst_n,
    .q_valid, .q_ready,
    .row_rd_en, .row_rd_addr,
    .mac_en, .mac_first,
    .prof_rd_en, .prof_rd_class,
    .dec_en, .dec_first, .dec_cls,
    .res_valid, .res_ready
  );

  bundle_mem #(.N(N), .D(D), .W(W), .LANES(LANES)) u_bundles (
    .clk,
    .wr_en(bw_en), .wr_bundle(bw_bundle), .wr_row(bw_row), .wr_data(bw_data),
    .rd_en(row_rd_en), .rd_row(row_rd_addr), .rd_data(m_rows)
  );

  similarity_unit #(.N(N), .D(D), .W(W), .QW(QW), .PW(PW), .LANES(LANES)) u_sim (
    .clk, .rst_n,
    .mac_en, .mac_first,
    .q_chunk, .m_rows,
    .act_shift,
    .acc, .act
  );

  profile_mem #(.C(C), .N(N), .PW(PW)) u_profiles (
    .clk,
    .wr_en(pw_en), .wr_class(pw_class), .wr_data(pw_data),
    .rd_en(prof_rd_en), .rd_class(prof_rd_class), .rd_data(prof)
  );

  profile_decoder #(.C(C), .N(N), .PW(PW)) u_dec (
    .clk, .rst_n,
    .en(dec_en), .first(dec_first), .cls(dec_cls),
    .act, .prof,
    .best_cls(res_class), .best_dist(res_dist)
  );

  assign res_act = act;
  assign res_acc = acc;

  // A beat offered but not taken must stay offered.
  assert property (@(posedge clk) disable iff (!rst_n)
                   q_valid && !q_ready |=> q_valid);

endmodule
