// pba_pkg: types, constants and single-precision arithmetic shared by the
// Schur-elimination engine.
//
// Numbers are IEEE-754 binary32 words (f32_t). The arithmetic follows the
// single-precision datapath of the hardware: round to nearest, ties to even.
// To keep the logic small, subnormal inputs and results are flushed to zero
// and infinity / NaN inputs are not treated specially (a result that
// overflows becomes infinity). Those simplifications are this design's own
// choice; the source only says the hardware uses single precision.
//
// The input stream is a sequence of 32-bit words. The first word of every
// command carries its opcode in bits [31:28]:
//   OP_START : [5:0] number of cameras b. Clears every accumulator.
//   OP_CAMD  : [5:0] camera j, then 6 floats: diagonal of mu*Dc_j^T*Dc_j.
//   OP_POINT : [8] target PE, [21:16] co-observation value CO_i, then
//              3 floats (diagonal of mu*Dp_i^T*Dp_i), then CO_i records of
//              21 words: camera index in [5:0], J^p (2x3, row-major),
//              J^c (2x6, row-major), eps (2).
//   OP_FLUSH : drain the PEs, then stream S and r out.
package pba_pkg;

  typedef logic [31:0] f32_t;

  localparam int unsigned CAM_W    = 6;   // camera index width (b <= 63)
  localparam int unsigned CO_W     = 6;   // co-observation value width
  localparam int unsigned NCAM_MAX = 50;  // largest b (datasets have <= 50 images)

  localparam f32_t F32_ZERO = 32'h0000_0000;

  typedef enum logic [3:0] {
    OP_NOP   = 4'd0,
    OP_START = 4'd1,
    OP_CAMD  = 4'd2,
    OP_POINT = 4'd3,
    OP_FLUSH = 4'd4
  } opcode_e;

  // One observation o_ij of point i on image j: the 2x3 point Jacobian,
  // the 2x6 camera Jacobian and the 2-element reprojection error.
  typedef struct packed {
    logic [CAM_W-1:0] cam;
    f32_t [1:0][2:0]  jp;   // jp[k][c]: residual row k, point parameter c
    f32_t [1:0][5:0]  jc;   // jc[k][c]: residual row k, camera parameter c
    f32_t [1:0]       eps;
  } obs_t;

  // Record handed from the input buffer to a PE: either a point header
  // (co, dp) or one observation.
  typedef struct packed {
    logic            is_hdr;
    logic [CO_W-1:0] co;
    f32_t [2:0]      dp;
    obs_t            obs;
  } pe_rec_t;

  function automatic f32_t fp_neg(f32_t a);
    return {~a[31], a[30:0]};
  endfunction

  // Round a normalised mantissa with 3 extra bits (guard, round, sticky).
  // m27 holds {1.xxx (24 bits), g, r, s}; e is the biased exponent.
  function automatic f32_t fp_pack(logic s, int e, logic [26:0] m27);
    logic [24:0] m;
    logic        rup;
    int          ee;
    rup = m27[2] & (m27[1] | m27[0] | m27[3]);
    m   = {1'b0, m27[26:3]} + 25'(rup);
    ee  = e;
    if (m[24]) begin
      m  = m >> 1;
      ee = ee + 1;
    end
    if (ee >= 255) return {s, 8'hFF, 23'd0};
    if (ee <= 0)   return {s, 31'd0};
    return {s, ee[7:0], m[22:0]};
  endfunction

  function automatic f32_t fp_mul(f32_t a, f32_t b);
    logic        s;
    logic [47:0] p;
    logic [26:0] m27;
    int          e;
    s = a[31] ^ b[31];
    if (a[30:23] == 8'd0 || b[30:23] == 8'd0) return {s, 31'd0};
    p = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    e = int'(a[30:23]) + int'(b[30:23]) - 127;
    if (p[47]) begin
      m27 = {p[47:24], p[23], p[22], |p[21:0]};
      e   = e + 1;
    end else begin
      m27 = {p[46:23], p[22], p[21], |p[20:0]};
    end
    return fp_pack(s, e, m27);
  endfunction

  function automatic f32_t fp_add(f32_t a, f32_t b);
    f32_t        x, y;
    logic [27:0] mx, my, sum;
    int          ex, ey, d, lz;
    logic        st;
    if (a[30:23] == 8'd0) return (b[30:23] == 8'd0) ? {a[31] & b[31], 31'd0} : b;
    if (b[30:23] == 8'd0) return a;
    if (a[30:0] >= b[30:0]) begin x = a; y = b; end
    else begin x = b; y = a; end
    ex = int'(x[30:23]);
    ey = int'(y[30:23]);
    d  = ex - ey;
    mx = {1'b0, 1'b1, x[22:0], 3'b000};
    my = {1'b0, 1'b1, y[22:0], 3'b000};
    if (d > 27) begin
      my = 28'd1;                      // only a sticky bit survives
    end else if (d > 0) begin
      st = |(my & ((28'd1 << d) - 28'd1));
      my = (my >> d) | 28'(st);
    end
    if (x[31] == y[31]) begin
      sum = mx + my;
      if (sum[27]) begin
        sum = (sum >> 1) | 28'(sum[0]);
        ex  = ex + 1;
      end
    end else begin
      sum = mx - my;
      if (sum == 28'd0) return F32_ZERO;
      lz = 0;
      for (int i = 26; i >= 0; i--) begin
        if (sum[i]) break;
        lz++;
      end
      sum = sum << lz;
      ex  = ex - lz;
    end
    return fp_pack(x[31], ex, sum[26:0]);
  endfunction

  // Upper-triangle index of (r, c), r <= c, in a 6x6 symmetric block
  // stored row by row (21 entries).
  function automatic logic [4:0] tri6(logic [2:0] r, logic [2:0] c);
    logic [2:0] lo, hi;
    lo = (r <= c) ? r : c;
    hi = (r <= c) ? c : r;
    return 5'(int'(lo) * 6 - (int'(lo) * (int'(lo) - 1)) / 2 + int'(hi) - int'(lo));
  endfunction

  // Index of block (j1, j2), j1 <= j2, in the row-major upper block
  // triangle of a b x b block matrix.
  function automatic logic [15:0] blk_index(logic [CAM_W-1:0] j1, logic [CAM_W-1:0] j2,
                                            logic [CAM_W-1:0] b);
    return 16'(int'(j1) * int'(b) - (int'(j1) * (int'(j1) - 1)) / 2 + int'(j2) - int'(j1));
  endfunction

endpackage
