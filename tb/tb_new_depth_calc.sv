// tb_new_depth_calc: builds scan results for a known geometry (frame x =
// (u + T*id) / (1 + Tz*id)), plants the best match at the candidate of a
// chosen inverse depth and checks the triangulated inverse depth (real
// arithmetic reference), the variance model and the three rejection rules.
module tb_new_depth_calc;
  import slam_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  params_t prm;
  logic in_valid, in_ready, out_valid, out_ready;
  job_t in_job, out_job;
  new_depth_calc dut (.*);

  function automatic fix_t q16(real v); return fix_t'($rtoi(v * 65536.0)); endfunction
  function automatic fix_t q24(real v); return fix_t'($rtoi(v * 16777216.0)); endfunction
  function automatic real r24(fix_t v); return real'(v) / 16777216.0; endfunction

  task automatic one(real u, real T, real Tz, int ns, int bi, err_t be, err_t se, status_e want);
    job_t j;
    real lo, hi, x0, x1, inc, xm, id, slope;
    lo = 0.1; hi = 2.0;
    x0 = (u + T * lo) / (1 + Tz * lo);
    x1 = (u + T * hi) / (1 + Tz * hi);
    inc = (x1 - x0) / ns;
    j = '0; j.st = ST_SCAN; j.major_x = 1;
    j.start_x = q16(x0 - 2 * inc); j.inc_x = q16(inc); j.nsteps = 16'(ns);
    j.a_m = q16(u); j.a_z = q16(1.0); j.b_m = q16(T); j.b_z = q16(Tz);
    j.id_lo = q24(lo); j.id_hi = q24(hi);
    j.best_idx = 16'(bi); j.best_err = be; j.second_err = se;
    in_job = j; in_valid = 1;
    @(posedge clk); #1; in_valid = 0;
    chk(out_valid && out_job.st == want, $sformatf("status %0d want %0d", out_job.st, want));
    if (want == ST_SCAN) begin
      xm = real'(j.start_x) / 65536.0 + (bi + 2) * real'(j.inc_x) / 65536.0;
      id = (u - xm) / (xm * Tz - T);
      slope = (hi - lo) / ns;
      chk(r24(out_job.id_obs) - id < 3e-3 * id && id - r24(out_job.id_obs) < 3e-3 * id,
          $sformatf("idepth %f vs %f", r24(out_job.id_obs), id));
      chk(r24(out_job.var_obs) - slope * slope * 0.5 < 1e-4 && slope * slope * 0.5 - r24(out_job.var_obs) < 1e-4,
          $sformatf("variance %f vs %f", r24(out_job.var_obs), slope * slope * 0.5));
    end
  endtask

  initial begin
    prm = '0; prm.max_err = 1000; prm.sigma2 = q24(0.5);
    in_valid = 0; in_job = '0; out_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    for (int n = 0; n < 40; n++) begin
      int ns;
      ns = $urandom % 40 + 4;
      one(100.0 + $urandom % 300, 20.0 + $urandom % 40, 0.01 * ($urandom % 10), ns, $urandom % (ns + 1), 200, 400, ST_SCAN);
    end
    one(200.0, 30.0, 0.0, 10, 3, 1001, 5000, ST_FAIL_ERR);
    one(200.0, 30.0, 0.0, 10, 3, 400, 590, ST_FAIL_UNIQ);
    one(200.0, 30.0, 0.0, 10, 3, 400, 600, ST_SCAN);
    // a skipped point is unchanged
    in_job = '0; in_job.st = ST_SKIP_GRAD; in_job.x = 16'd9; in_valid = 1;
    @(posedge clk); #1; in_valid = 0;
    chk(out_valid && out_job == in_job, "skip passes unchanged");
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
