// loghd_pkg: constants and helper functions shared by the LogHD inference engine.
//
// LogHD stores n bundle hypervectors of length D in place of C class prototypes,
// with n = ceil(log_k C) + EPS for an alphabet of k code symbols. The defaults
// are the configuration whose hardware results are reported for the method:
// ISOLET with C = 26 classes, k = 2 and D = 10,000, giving n = 5 bundles.
// Element widths (8-bit bundles, query and profiles) and the number of
// dimensions processed per cycle (LANES = 100) are choices of this design;
// the method itself evaluates 1, 2, 4 and 8-bit models.
package loghd_pkg;

  // Smallest n with k**n >= c, i.e. ceil(log_k c) for k >= 2.
  function automatic int unsigned clog_k(input int unsigned c, input int unsigned k);
    int unsigned n;
    longint unsigned p;
    n = 0;
    p = 1;
    while (p < longint'(c)) begin
      p = p * k;
      n++;
    end
    return n;
  endfunction

  localparam int unsigned D_DEF     = 10000;  // hypervector dimension
  localparam int unsigned C_DEF     = 26;     // number of classes (ISOLET)
  localparam int unsigned K_DEF     = 2;      // code alphabet size
  localparam int unsigned EPS_DEF   = 0;      // redundant bundles beyond ceil(log_k C)
  localparam int unsigned N_DEF     = clog_k(C_DEF, K_DEF) + EPS_DEF;  // bundles = 5
  localparam int unsigned W_DEF     = 8;      // bundle element width (two's complement)
  localparam int unsigned QW_DEF    = 8;      // query element width (two's complement)
  localparam int unsigned PW_DEF    = 8;      // profile / activation width (two's complement)
  localparam int unsigned LANES_DEF = 100;    // dimensions processed per cycle
  localparam int unsigned SHW       = 5;      // width of the activation shift setting

  // Width of an index into x entries (at least one bit).
  function automatic int unsigned idx_width(input int unsigned x);
    return (x > 1) ? $clog2(x) : 1;
  endfunction

  // Width of a dot product of d products of wa- and wb-bit signed numbers.
  function automatic int unsigned acc_width(input int unsigned wa, input int unsigned wb,
                                            input int unsigned d);
    return wa + wb + $clog2(d);
  endfunction

  // Width of a sum of n squared differences of two pw-bit signed numbers.
  function automatic int unsigned dist_width(input int unsigned pw, input int unsigned n);
    return 2 * (pw + 1) + $clog2(n + 1);
  endfunction

  // Phases of one inference, in order (see loghd_ctrl).
  typedef enum logic [2:0] {
    S_ACC  = 3'd0,  // accept query beats, accumulate dot products
    S_WAIT = 3'd1,  // last beat's multiply-accumulate completes
    S_DEC  = 3'd2,  // read one class profile per cycle
    S_FIN  = 3'd3,  // last distance compare completes
    S_OUT  = 3'd4   // result valid, waiting for res_ready
  } state_e;

endpackage
