// subpixel_stereo: refines an accepted match below one step. When the
// errors of both neighbours of the best candidate are known and the three
// errors form a valley (curvature e_pre - 2 e_best + e_post > 0), the
// minimum of the parabola through them lies at
//   off = (e_pre - e_post) / (2 (e_pre - 2 e_best + e_post))   steps,
// clamped to +-0.5; the observation moves by off * slope. Otherwise the
// point passes unchanged. One point per cycle, one cycle latency. The
// parabola fit is this design's choice for "refine if conditions are
// right".
module subpixel_stereo
  import slam_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  output logic    in_ready,
  input  job_t    in_job,
  output logic    out_valid,
  input  logic    out_ready,
  output job_t    out_job,
  output logic    refined       // pulses with a refined point (statistics)
);
  job_t r;
  logic ref_c;
  always_comb begin
    logic signed [35:0] curv, diff;
    logic signed [63:0] off;
    r     = in_job;
    ref_c = 1'b0;
    curv  = 36'(in_job.err_pre) - 36'(in_job.best_err) * 2 + 36'(in_job.err_post);
    diff  = 36'(in_job.err_pre) - 36'(in_job.err_post);
    off   = (curv > 0) ? (64'(diff) <<< 16) / (64'(curv) * 2) : 64'sd0;  // Q.16
    if (off > 64'sd32768)  off = 64'sd32768;
    if (off < -64'sd32768) off = -64'sd32768;
    if (in_job.st == ST_SCAN && in_job.pre_ok && in_job.post_ok && curv > 0) begin
      ref_c    = 1'b1;
      r.id_obs = in_job.id_obs + fix_t'((64'(in_job.slope) * off) >>> 16);
    end
  end

  assign in_ready = !out_valid || out_ready;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      out_valid <= 1'b0; out_job <= '0; refined <= 1'b0;
    end else begin
      refined <= 1'b0;
      if (in_ready) begin
        out_valid <= in_valid;
        if (in_valid) begin
          out_job <= r;
          refined <= ref_c;
        end
      end
    end
endmodule
