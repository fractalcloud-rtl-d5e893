// fc_pkg: types, constants and FP16 arithmetic shared by the FractalCloud
// accelerator.
//
// All datapath arithmetic is IEEE-754 binary16 (half precision), which is the
// number format the architecture uses for coordinates, distances and
// features. The functions below are combinational and synthesizable. They
// are a compact implementation chosen for this design: results are rounded
// toward zero, subnormal inputs and results are flushed to zero, and
// overflow saturates to the largest finite value (no Inf/NaN is produced).
// Point clouds and MLP features in the supported networks stay well inside
// the normal range, so these simplifications do not change partitioning,
// sampling or neighbour decisions for normalised coordinates.
//
// Also defined here: the 3-D point type, the RSPU operating modes and the
// record types that the fractal engine and point units exchange.
package fc_pkg;

  typedef logic [15:0] fp16_t;

  localparam fp16_t FP16_ZERO   = 16'h0000;
  localparam fp16_t FP16_MAXPOS = 16'h7BFF;

  // Coordinates of one point; x in the most significant half word.
  typedef struct packed {
    fp16_t x;
    fp16_t y;
    fp16_t z;
  } point_t;

  // Operating modes of a reuse-and-skip-enabled point unit.
  typedef enum logic [1:0] {
    MODE_FPS = 2'd0,   // farthest point sampling inside one block
    MODE_BQ  = 2'd1,   // ball query (grouping): up to K points within radius
    MODE_KNN = 2'd2    // K nearest neighbours (interpolation)
  } rspu_mode_e;

  // Coordinate along dimension d (0 = x, 1 = y, 2 = z).
  function automatic fp16_t pt_dim(point_t p, logic [1:0] d);
    case (d)
      2'd0:    return p.x;
      2'd1:    return p.y;
      default: return p.z;
    endcase
  endfunction

  // Next dimension in the x -> y -> z -> x cycle.
  function automatic logic [1:0] next_dim(logic [1:0] d);
    return (d == 2'd2) ? 2'd0 : d + 2'd1;
  endfunction

  // Monotonic key: unsigned comparison of keys orders the FP16 values.
  function automatic logic [15:0] fp16_key(fp16_t a);
    return a[15] ? ~a : (a | 16'h8000);
  endfunction

  function automatic logic fp16_lt(fp16_t a, fp16_t b);
    return fp16_key(a) < fp16_key(b);
  endfunction

  function automatic logic fp16_gt(fp16_t a, fp16_t b);
    return fp16_key(a) > fp16_key(b);
  endfunction

  function automatic fp16_t fp16_max(fp16_t a, fp16_t b);
    return fp16_gt(b, a) ? b : a;
  endfunction

  function automatic fp16_t fp16_min(fp16_t a, fp16_t b);
    return fp16_lt(b, a) ? b : a;
  endfunction

  // Multiply.
  function automatic fp16_t fp16_mul(fp16_t a, fp16_t b);
    logic        s;
    logic [21:0] prod;
    logic [9:0]  m;
    int          e;
    s = a[15] ^ b[15];
    if (a[14:10] == 5'd0 || b[14:10] == 5'd0) return {s, 15'd0};
    prod = {1'b1, a[9:0]} * {1'b1, b[9:0]};
    e = int'(a[14:10]) + int'(b[14:10]) - 15;
    if (prod[21]) begin
      m = prod[20:11];
      e = e + 1;
    end else begin
      m = prod[19:10];
    end
    if (e <= 0)  return {s, 15'd0};
    if (e >= 31) return {s, FP16_MAXPOS[14:0]};
    return {s, 5'(e), m};
  endfunction

  // Add.
  function automatic fp16_t fp16_add(fp16_t a, fp16_t b);
    fp16_t       big, sml;
    logic [13:0] mb, ms;
    logic [14:0] sum;
    logic [13:0] diff;
    logic [4:0]  d;
    int          e, lz;
    if (a[14:10] == 5'd0) return (b[14:10] == 5'd0) ? FP16_ZERO : b;
    if (b[14:10] == 5'd0) return a;
    if (a[14:0] >= b[14:0]) begin big = a; sml = b; end
    else                    begin big = b; sml = a; end
    d  = big[14:10] - sml[14:10];
    mb = {1'b1, big[9:0], 3'b000};
    ms = (d > 5'd13) ? 14'd0 : ({1'b1, sml[9:0], 3'b000} >> d);
    e  = int'(big[14:10]);
    if (big[15] == sml[15]) begin
      sum = {1'b0, mb} + {1'b0, ms};
      if (sum[14]) begin
        e = e + 1;
        if (e >= 31) return {big[15], FP16_MAXPOS[14:0]};
        return {big[15], 5'(e), sum[13:4]};
      end
      return {big[15], 5'(e), sum[12:3]};
    end
    diff = mb - ms;
    if (diff == 14'd0) return FP16_ZERO;
    lz = 0;
    for (int i = 13; i >= 0; i--) begin
      if (diff[i]) break;
      lz++;
    end
    diff = diff << lz;
    e = e - lz;
    if (e <= 0) return {big[15], 15'd0};
    return {big[15], 5'(e), diff[12:3]};
  endfunction

  function automatic fp16_t fp16_sub(fp16_t a, fp16_t b);
    return fp16_add(a, {~b[15], b[14:0]});
  endfunction

  // Divide by two: the right shift of the midpoint computation, applied to
  // the exponent.
  function automatic fp16_t fp16_half(fp16_t a);
    if (a[14:10] <= 5'd1) return {a[15], 15'd0};
    return {a[15], a[14:10] - 5'd1, a[9:0]};
  endfunction

  // Squared Euclidean distance between two points.
  function automatic fp16_t fp16_dist2(point_t a, point_t b);
    fp16_t dx, dy, dz;
    dx = fp16_sub(a.x, b.x);
    dy = fp16_sub(a.y, b.y);
    dz = fp16_sub(a.z, b.z);
    return fp16_add(fp16_add(fp16_mul(dx, dx), fp16_mul(dy, dy)), fp16_mul(dz, dz));
  endfunction

endpackage
