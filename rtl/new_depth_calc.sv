// new_depth_calc: turns the result of a scan into an inverse-depth
// observation. A match is rejected if its error exceeds max_err
// (ST_FAIL_ERR) or if the second best error is less than 1.5 times the
// best (ST_FAIL_UNIQ, ambiguous match). Otherwise the matched position
// along the major axis, xm = start + (best_idx+2)*inc, is triangulated:
//   xm = (a_m + b_m*id) / (a_z + b_z*id)  =>  id = (a_m - xm*a_z) / (xm*b_z - b_m)
// A vanishing denominator or negative result gives ST_FAIL_DEPTH. The
// observation variance is slope^2 * sigma2, slope = (id_hi - id_lo)/nsteps
// being the inverse-depth change per step. Points that were not scanned
// pass unchanged. One point per cycle, one cycle latency. Thresholds,
// triangulation form and variance model are this design's choices.
module new_depth_calc
  import slam_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  params_t prm,
  input  logic    in_valid,
  output logic    in_ready,
  input  job_t    in_job,
  output logic    out_valid,
  input  logic    out_ready,
  output job_t    out_job
);
  job_t r;
  always_comb begin
    fix_t xm, slope, num, den;
    logic signed [63:0] q;
    logic [33:0] b3, s2;
    r  = in_job;
    b3 = 34'(in_job.best_err) * 34'd3;
    s2 = 34'(in_job.second_err) * 34'd2;
    xm = (in_job.major_x ? in_job.start_x : in_job.start_y) +
         fix_t'(32'(in_job.best_idx) + 32'd2) * (in_job.major_x ? in_job.inc_x : in_job.inc_y);
    num = in_job.a_m - fix_t'((64'(xm) * 64'(in_job.a_z)) >>> 16);
    den = fix_t'((64'(xm) * 64'(in_job.b_z)) >>> 16) - in_job.b_m;
    q   = (den != 0) ? (64'(num) <<< FRAC_ID) / 64'(den) : 64'sd0;
    slope = (in_job.id_hi - in_job.id_lo) / fix_t'({16'd0, in_job.nsteps});
    if (in_job.st == ST_SCAN) begin
      if (in_job.best_err > prm.max_err)       r.st = ST_FAIL_ERR;
      else if (s2 < b3)                        r.st = ST_FAIL_UNIQ;
      else if (den == 0 || q < 0 || q > 64'sh7FFF_FFFF) r.st = ST_FAIL_DEPTH;
      else begin
        r.id_obs  = fix_t'(q);
        r.slope   = slope;
        r.var_obs = mul_id(mul_id(slope, slope), prm.sigma2);
      end
    end
  end

  assign in_ready = !out_valid || out_ready;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      out_valid <= 1'b0; out_job <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) out_job <= r;
    end
endmodule
