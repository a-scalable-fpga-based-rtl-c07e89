// tb_subpixel_stereo: checks the parabola refinement against a real-valued
// computation for random valleys, the +-0.5 step clamp, and that points
// without both neighbours or without a valley pass unchanged.
module tb_subpixel_stereo;
  import slam_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  logic in_valid, in_ready, out_valid, out_ready, refined;
  job_t in_job, out_job;
  subpixel_stereo dut (.*);

  initial begin
    int n_ref = 0;
    in_valid = 0; in_job = '0; out_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    for (int n = 0; n < 200; n++) begin
      job_t j;
      real off, exp_id, slope;
      bit valley;
      j = '0; j.st = ST_SCAN;
      j.best_err = $urandom % 1000;
      j.err_pre  = j.best_err + $urandom % 2000;
      j.err_post = j.best_err + $urandom % 2000;
      j.pre_ok = ($urandom % 8 != 0); j.post_ok = ($urandom % 8 != 0);
      if (n % 20 == 0) j.err_pre = j.best_err;   // flat side
      j.id_obs = fix_t'(32'sd1 <<< 24);
      j.slope  = fix_t'($urandom % 200000);
      slope = real'(j.slope) / 16777216.0;
      valley = (real'(j.err_pre) - 2.0 * j.best_err + j.err_post) > 0;
      exp_id = 1.0;
      if (j.pre_ok && j.post_ok && valley) begin
        off = (real'(j.err_pre) - j.err_post) / (2.0 * (real'(j.err_pre) - 2.0 * j.best_err + j.err_post));
        if (off > 0.5) off = 0.5;
        if (off < -0.5) off = -0.5;
        exp_id = 1.0 + off * slope;
      end
      in_job = j; in_valid = 1;
      @(posedge clk); #1; in_valid = 0;
      chk(out_valid, "output");
      chk(refined == (j.pre_ok && j.post_ok && valley), "refine decision");
      if (refined) n_ref++;
      chk(real'(out_job.id_obs) / 16777216.0 - exp_id < 1e-5 && exp_id - real'(out_job.id_obs) / 16777216.0 < 1e-5,
          $sformatf("refined idepth %f vs %f", real'(out_job.id_obs) / 16777216.0, exp_id));
    end
    chk(n_ref > 50, "refinements happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
