// slam_pkg: types, constants and arithmetic helpers shared by the depth
// estimation pipeline.
//
// Number formats (this design's choice; the reference design computes in
// floating point):
//   inverse depth and its variance  : signed Q8.24 in 32 bits
//   image coordinates               : signed Q16.16 in 32 bits
//   interpolated intensity          : unsigned Q8.8 in 16 bits
//   matching error                  : unsigned, squared intensity units Q.8
//
// A keyframe map point occupies 24 bytes (three 64-bit words), which is what
// 7.37 MB for a 640x480 map amounts to. The fields follow the usual
// semi-dense depth-map point: inverse depth, variance, their smoothed
// versions, a validity counter and a blacklist counter.
package slam_pkg;

  localparam int FRAC_ID = 24;        // inverse depth fraction bits
  localparam logic signed [31:0] ID_ONE = 32'sd1 <<< FRAC_ID;

  typedef logic signed [31:0] fix_t;  // generic 32-bit fixed point word
  typedef logic [7:0]         pix_t;  // 8-bit grey pixel
  typedef logic [15:0]        ipix_t; // interpolated pixel, Q8.8
  typedef logic [31:0]        err_t;  // SSD error

  typedef struct packed {
    fix_t               idepth;
    fix_t               idepth_var;
    fix_t               idepth_smoothed;
    fix_t               idepth_var_smoothed;
    logic signed [15:0] validity;
    logic signed [15:0] blacklisted;
    logic [30:0]        reserved;
    logic               is_valid;
  } map_point_t;                      // 192 bits

  // Outcome of each map point on its way through the pipeline.
  typedef enum logic [3:0] {
    ST_SCAN       = 4'd0,  // scan requested / performed and accepted
    ST_SKIP_GRAD  = 4'd1,  // gradient too low or point blacklisted
    ST_FAIL_OOB   = 4'd2,  // search interval leaves the frame / behind camera
    ST_FAIL_ERR   = 4'd3,  // best error above threshold
    ST_FAIL_UNIQ  = 4'd4,  // best and second best too close
    ST_FAIL_DEPTH = 4'd5   // triangulation ill-conditioned
  } status_e;

  // Operating parameters written by the host CPU.
  typedef struct packed {
    fix_t [8:0]  m;          // M = K R K^-1, row major, Q16.16
    fix_t [2:0]  t;          // K t, Q16.16
    fix_t        epi_x;      // keyframe epipolar direction at (u,v):
    fix_t        epi_y;      //   (epi_x + epi_z*u, epi_y + epi_z*v), Q16.16
    fix_t        epi_z;
    fix_t        id_min;     // inverse depth search limits, Q8.24
    fix_t        id_max;
    logic [15:0] grad_create;// min gradient to create a hypothesis
    logic [15:0] grad_update;// min gradient to update one
    logic signed [15:0] bl_min; // min blacklist counter to try creation
    err_t        max_err;    // max accepted SSD
    fix_t        sigma2;     // pixel noise variance (steps^2), Q8.24
    fix_t        var_init;   // variance of a filled / created point, Q8.24
    logic [15:0] fill_thresh;// validity sum needed to fill a gap
  } params_t;

  // Everything a map point carries through the pipeline ("metadata").
  typedef struct packed {
    map_point_t  pt;
    logic [15:0] x;
    logic [15:0] y;
    status_e     st;
    logic [15:0] max_grad;
    // scan geometry (frame side)
    fix_t        start_x;    // first sample position, Q16.16
    fix_t        start_y;
    fix_t        inc_x;      // step, Q16.16
    fix_t        inc_y;
    logic [15:0] nsteps;     // number of candidate positions - 1
    logic        major_x;    // triangulate along x
    fix_t        a_m;        // M*[u v 1] along the major axis, Q16.16
    fix_t        a_z;
    fix_t        b_m;        // t along the major axis
    fix_t        b_z;
    fix_t        id_lo;      // searched inverse depth interval
    fix_t        id_hi;
    ipix_t [4:0] pattern;    // keyframe 5-point pattern
    // loop processing results
    logic [15:0] best_idx;
    err_t        best_err;
    err_t        second_err;
    err_t        err_pre;
    err_t        err_post;
    logic        pre_ok;
    logic        post_ok;
    // new observation
    fix_t        id_obs;
    fix_t        var_obs;
    fix_t        slope;      // d(idepth)/d(step), Q8.24
  } job_t;

  // one frame sample of the fast-rate pipeline
  typedef struct packed {
    fix_t x;
    fix_t y;
    logic last;
  } sample_t;

  typedef struct packed {
    pix_t [3:0] win;         // p00, p10, p01, p11 (index = dy*2+dx)
    logic [7:0] fx;
    logic [7:0] fy;
    logic       last;
  } window_t;

  typedef struct packed {
    ipix_t v;
    logic  last;
  } isample_t;

  function automatic fix_t fabs(fix_t a);
    return (a < 0) ? -a : a;
  endfunction

  // bilinear interpolation, weights with 8 fraction bits, result Q8.8
  function automatic ipix_t bilerp(pix_t [3:0] w, logic [7:0] fx, logic [7:0] fy);
    logic [16:0] top, bot;
    logic [25:0] v;
    top = 17'(w[0]) * 17'(9'd256 - 9'(fx)) + 17'(w[1]) * 17'(fx);
    bot = 17'(w[2]) * 17'(9'd256 - 9'(fx)) + 17'(w[3]) * 17'(fx);
    v = 26'(top) * 26'(9'd256 - 9'(fy)) + 26'(bot) * 26'(fy);
    return ipix_t'(v >> 8);
  endfunction

  // integer square root of a non-negative Q8.24 value, result Q8.24
  function automatic fix_t fsqrt(fix_t a);
    logic [55:0] n;
    logic [27:0] r, b;
    n = 56'(unsigned'(a)) << FRAC_ID;
    r = '0;
    for (int i = 27; i >= 0; i--) begin
      b = r | (28'd1 << i);
      if (56'(b) * 56'(b) <= n) r = b;
    end
    return fix_t'(r);
  endfunction

  // multiply Q8.24 * Q8.24 -> Q8.24
  function automatic fix_t mul_id(fix_t a, fix_t b);
    logic signed [63:0] p;
    p = 64'(a) * 64'(b);
    return fix_t'(p >>> FRAC_ID);
  endfunction

endpackage
