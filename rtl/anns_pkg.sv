// anns_pkg: types and constants shared by the ANNS-AMP modules.
//
// The accelerator runs the four distance-related stages of cluster-based PQ
// search: cluster locating (CL), residual calculation (RC), LUT construction
// (LC) and distance calculation (DC). mode_e names them; its 2-bit encoding is
// this design's choice. Data are 8-bit (uint8 base vectors, int8 residuals and
// codebooks), and a precision is the number of most significant bits used,
// 1..8, carried in a 4-bit field.
package anns_pkg;
  localparam int unsigned B      = 8;   // operand bits at full precision
  localparam int unsigned PREC_W = 4;   // width of a precision field (1..B)

  typedef enum logic [1:0] {
    MODE_CL = 2'd0,   // query vs centroid slices, squared L2
    MODE_RC = 2'd1,   // query minus centroid, residual only
    MODE_LC = 2'd2,   // residual vs codebook entry, squared L2 per subspace
    MODE_DC = 2'd3    // LUT look-up and accumulation
  } mode_e;

  // Ceil(log2(x)) with a floor of 1, for index widths.
  function automatic int unsigned clog2_1(input int unsigned x);
    return (x <= 2) ? 1 : $clog2(x);
  endfunction
endpackage
