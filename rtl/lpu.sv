// lpu: loop processing unit, the core of the epipolar scan. It takes the
// metadata of a point and, for a scanned point, the stream of interpolated
// frame intensities along the line. A 5-sample shift window slides over
// the stream; from the fifth sample on, every cycle gives the sum of
// squared differences between the window and the keyframe's 5-point
// pattern, i.e. the error of one candidate position (index 0..nsteps).
//
// Kept per scan: best error and its index, the error of the candidate just
// before and just after the best (for sub-pixel refinement), and the
// second best error over candidates not adjacent to the best at the time
// they were seen. When the last sample arrives the results are written
// into the metadata and the point leaves. Skipped points leave one cycle
// after arriving. Rate: one scan step per cycle.
module lpu
  import slam_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     meta_valid,
  output logic     meta_ready,
  input  job_t     meta_in,
  input  logic     is_valid,
  output logic     is_ready,
  input  isample_t is,
  output logic     out_valid,
  input  logic     out_ready,
  output job_t     out_job
);
  logic        scanning;
  job_t        job;
  ipix_t       w [5];
  logic [16:0] cnt;         // samples taken
  err_t        e, prev_e;
  logic [15:0] idx;
  ipix_t       nw [5];

  assign meta_ready = !scanning && (!out_valid || out_ready);
  assign is_ready   = scanning;

  always_comb begin
    logic signed [16:0] d;
    logic [33:0] acc;
    for (int j = 0; j < 4; j++) nw[j] = w[j+1];
    nw[4] = is.v;
    acc = '0;
    for (int j = 0; j < 5; j++) begin
      d   = 17'(signed'({1'b0, nw[j]})) - 17'(signed'({1'b0, job.pattern[j]}));
      acc = acc + 34'(unsigned'(34'(d) * 34'(d)) >> 8);
    end
    e   = err_t'(acc);
    idx = 16'(cnt - 17'd4);
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      scanning <= 1'b0; job <= '0; cnt <= '0; prev_e <= '0;
      for (int j = 0; j < 5; j++) w[j] <= '0;
      out_valid <= 1'b0; out_job <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (meta_valid && meta_ready) begin
        if (meta_in.st == ST_SCAN) begin
          scanning <= 1'b1;
          job      <= meta_in;
          cnt      <= '0;
        end else begin
          out_valid <= 1'b1;
          out_job   <= meta_in;
        end
      end
      if (scanning && is_valid) begin
        for (int j = 0; j < 5; j++) w[j] <= nw[j];
        cnt <= cnt + 1'b1;
        if (cnt >= 17'd4) begin
          prev_e <= e;
          if (idx == 0) begin
            job.best_err   <= e;
            job.best_idx   <= '0;
            job.second_err <= '1;
            job.pre_ok     <= 1'b0;
            job.post_ok    <= 1'b0;
          end else if (e < job.best_err) begin
            if (idx > job.best_idx + 16'd1 && job.best_err < job.second_err)
              job.second_err <= job.best_err;
            job.best_err <= e;
            job.best_idx <= idx;
            job.err_pre  <= prev_e;
            job.pre_ok   <= 1'b1;
            job.post_ok  <= 1'b0;
          end else begin
            if (idx == job.best_idx + 16'd1) begin
              job.err_post <= e;
              job.post_ok  <= 1'b1;
            end
            if (idx > job.best_idx + 16'd1 && e < job.second_err)
              job.second_err <= e;
          end
        end
        if (is.last) begin
          scanning <= 1'b0;
          out_valid <= 1'b1;
          out_job   <= job;
          // fold in the final candidate (same rules as above)
          if (e < job.best_err) begin
            if (idx > job.best_idx + 16'd1 && job.best_err < job.second_err)
              out_job.second_err <= job.best_err;
            out_job.best_err <= e;
            out_job.best_idx <= idx;
            out_job.err_pre  <= prev_e;
            out_job.pre_ok   <= 1'b1;
            out_job.post_ok  <= 1'b0;
          end else begin
            if (idx == job.best_idx + 16'd1) begin
              out_job.err_post <= e;
              out_job.post_ok  <= 1'b1;
            end
            if (idx > job.best_idx + 16'd1 && e < job.second_err)
              out_job.second_err <= e;
          end
        end
      end
    end

  a_scan_len: assert property (@(posedge clk) disable iff (!rst_n)
    scanning && is_valid && is.last |-> cnt == 17'(job.nsteps) + 17'd4);
endmodule
