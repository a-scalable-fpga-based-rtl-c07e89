// epipolar_unit: epipolar line and 5-point unit. For a keypoint marked for
// scanning it works out where to search in the camera frame and what to
// search for.
//
// Search interval: prior d +- 2 sigma_d for a valid point (clamped to
// [id_min, id_max]), the whole [id_min, id_max] otherwise. Both ends are
// projected with p(id) = M*[u v 1]^T + t*id, x = p0/p2, y = p1/p2 (M = K R
// K^-1 and t = K t written by the host). The far end (low inverse depth)
// is the scan start. The step count is the max-norm length of the segment
// rounded up (at least 1, at most MAX_STEPS); the increment is the segment
// divided by it. Samples start two increments before the far end so that
// the 5-sample window is centred on each of the nsteps+1 candidates.
// Robustness checks: both ends in front of the camera and at least 3
// pixels inside the frame; failures are marked ST_FAIL_OOB.
//
// 5-point pattern: the keyframe intensities at (u,v) + k*dir, k = -2..2,
// with dir the keyframe epipolar direction (host-supplied affine function
// of (u,v)) normalised to max-norm 1, read from the keyframe cache and
// bilinearly interpolated. The host orients dir so that it matches the
// far-to-near direction of the frame line.
//
// Timing: skipped points leave one cycle after they arrive; a scanned
// point takes 7 cycles (geometry, 5 pattern reads, result). The reference
// design quotes one point per 5 cycles for its slow-rate units; this
// design's unit is slightly slower for scanned points only. Max-norm step
// length and the affine direction model are this design's choices.
module epipolar_unit
  import slam_pkg::*;
#(
  parameter int IMG_W     = 640,
  parameter int IMG_H     = 480,
  parameter int MAX_STEPS = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  input  params_t     prm,
  input  logic        in_valid,
  output logic        in_ready,
  input  job_t        in_job,
  output logic        out_valid,
  input  logic        out_ready,
  output job_t        out_job,
  // keyframe cache read port
  output logic        rd_en,
  output logic [15:0] rd_x,
  output logic [15:0] rd_y,
  input  pix_t [3:0]  rd_win
);
  localparam fix_t MARGIN = 32'sd3 <<< 16;
  typedef enum logic [1:0] {S_IDLE, S_READ, S_OUT} state_e;
  state_e state;
  job_t   job;
  logic [2:0] k;
  logic       cap;
  logic [2:0] cap_k;
  fix_t dnx, dny;           // normalised keyframe direction
  logic geo_ok;

  // ---------------- geometry of the incoming point (combinational)
  fix_t a0, a1, a2, sd, lo, hi;
  fix_t fx_, fy_, nx_, ny_, dx, dy, adx, ady, len, incx, incy;
  fix_t kdx, kdy, kn, kdnx, kdny;
  logic [15:0] ns;
  logic ok_far, ok_near, ok_pat;

  function automatic fix_t mulxy(fix_t m, logic [15:0] c);   // Q16.16 * int
    logic signed [63:0] p;
    p = 64'(m) * 64'(signed'({16'd0, c}));
    return fix_t'(p);
  endfunction

  // project one inverse depth; returns ok=0 behind the camera
  task automatic project(input fix_t id, output fix_t px, output fix_t py, output logic ok);
    logic signed [63:0] p0, p1, p2;
    p0 = 64'(a0) + ((64'(prm.t[0]) * 64'(id)) >>> FRAC_ID);
    p1 = 64'(a1) + ((64'(prm.t[1]) * 64'(id)) >>> FRAC_ID);
    p2 = 64'(a2) + ((64'(prm.t[2]) * 64'(id)) >>> FRAC_ID);
    ok = (p2 > 64'sd256);
    px = ok ? fix_t'((p0 <<< 16) / p2) : '0;
    py = ok ? fix_t'((p1 <<< 16) / p2) : '0;
    ok = ok && px >= MARGIN && py >= MARGIN &&
         px <= (32'(IMG_W - 4) <<< 16) && py <= (32'(IMG_H - 4) <<< 16);
  endtask

  always_comb begin
    a0 = mulxy(prm.m[0], in_job.x) + mulxy(prm.m[1], in_job.y) + prm.m[2];
    a1 = mulxy(prm.m[3], in_job.x) + mulxy(prm.m[4], in_job.y) + prm.m[5];
    a2 = mulxy(prm.m[6], in_job.x) + mulxy(prm.m[7], in_job.y) + prm.m[8];
    if (in_job.pt.is_valid) begin
      sd = fsqrt(in_job.pt.idepth_var);
      lo = in_job.pt.idepth - 2 * sd;
      hi = in_job.pt.idepth + 2 * sd;
      if (lo < prm.id_min) lo = prm.id_min;
      if (hi > prm.id_max) hi = prm.id_max;
    end else begin
      sd = '0;
      lo = prm.id_min;
      hi = prm.id_max;
    end
    project(lo, fx_, fy_, ok_far);
    project(hi, nx_, ny_, ok_near);
    dx  = nx_ - fx_;
    dy  = ny_ - fy_;
    adx = fabs(dx);
    ady = fabs(dy);
    len = (adx > ady) ? adx : ady;
    ns  = 16'((len + 32'sh0000_FFFF) >>> 16);
    if (ns == 0) ns = 16'd1;
    if (ns > 16'(MAX_STEPS)) ns = 16'(MAX_STEPS);
    incx = dx / fix_t'(ns);
    incy = dy / fix_t'(ns);
    // keyframe direction, max-norm normalised
    kdx = prm.epi_x + mulxy(prm.epi_z, in_job.x);
    kdy = prm.epi_y + mulxy(prm.epi_z, in_job.y);
    kn  = (fabs(kdx) > fabs(kdy)) ? fabs(kdx) : fabs(kdy);
    kdnx = (kn > 0) ? fix_t'((64'(kdx) <<< 16) / 64'(kn)) : '0;
    kdny = (kn > 0) ? fix_t'((64'(kdy) <<< 16) / 64'(kn)) : '0;
    ok_pat = (kn >= 32'sh0000_0100) &&
             in_job.x >= 16'd2 && in_job.y >= 16'd2 &&
             in_job.x <= 16'(IMG_W - 3) && in_job.y <= 16'(IMG_H - 3);
  end

  // ---------------- pattern reads
  fix_t px_k, py_k;
  always_comb begin
    px_k = (fix_t'(job.x) <<< 16) + (fix_t'(signed'({1'b0, k})) - 2) * dnx;
    py_k = (fix_t'(job.y) <<< 16) + (fix_t'(signed'({1'b0, k})) - 2) * dny;
    rd_en = (state == S_READ) && (k < 3'd5);
    rd_x  = px_k[31:16];
    rd_y  = py_k[31:16];
  end
  logic [7:0] fxk [5], fyk [5];

  assign in_ready = (state == S_IDLE) && (!out_valid || out_ready);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      state <= S_IDLE; job <= '0; k <= '0; cap <= 1'b0; cap_k <= '0;
      dnx <= '0; dny <= '0; geo_ok <= 1'b0; out_valid <= 1'b0; out_job <= '0;
      for (int i = 0; i < 5; i++) begin fxk[i] <= '0; fyk[i] <= '0; end
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      cap   <= rd_en;
      cap_k <= k;
      if (rd_en) begin
        fxk[k] <= px_k[15:8];
        fyk[k] <= py_k[15:8];
      end
      case (state)
        S_IDLE: if (in_valid && in_ready) begin
          job <= in_job;
          if (in_job.st != ST_SCAN) begin
            out_valid <= 1'b1;          // forward in one cycle
            out_job   <= in_job;
          end else begin
            job.id_lo   <= lo;
            job.id_hi   <= hi;
            job.start_x <= fx_ - 2 * incx;
            job.start_y <= fy_ - 2 * incy;
            job.inc_x   <= incx;
            job.inc_y   <= incy;
            job.nsteps  <= ns;
            job.major_x <= (adx >= ady);
            job.a_m     <= (adx >= ady) ? a0 : a1;
            job.a_z     <= a2;
            job.b_m     <= (adx >= ady) ? prm.t[0] : prm.t[1];
            job.b_z     <= prm.t[2];
            dnx    <= kdnx;
            dny    <= kdny;
            geo_ok <= ok_far && ok_near && ok_pat;
            k      <= '0;
            state  <= S_READ;
          end
        end
        S_READ: begin
          if (k < 3'd5) k <= k + 1'b1;
          if (!geo_ok) begin            // nothing to sample
            job.st <= ST_FAIL_OOB;
            state  <= S_OUT;
          end
          if (cap) begin
            job.pattern[cap_k] <= bilerp(rd_win, fxk[cap_k], fyk[cap_k]);
            if (cap_k == 3'd4) state <= S_OUT;
          end
        end
        default: begin
          out_valid <= 1'b1;
          out_job   <= job;
          state     <= S_IDLE;
        end
      endcase
    end
endmodule
