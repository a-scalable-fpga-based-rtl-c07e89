// tb_lpu: random 5-point patterns and sample streams, including planted
// minima. Every scan result (best error and index, second best, neighbour
// errors) is compared with a software scan written from the definition;
// skipped points must pass through, and a scan must take one cycle per
// sample.
module tb_lpu;
  import slam_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  logic meta_valid, meta_ready, is_valid, is_ready, out_valid, out_ready;
  job_t meta_in, out_job;
  isample_t is;
  lpu dut (.*);

  job_t exp_q[$];
  int n_out = 0;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    job_t e;
    e = exp_q.pop_front();
    chk(out_job.x == e.x && out_job.st == e.st, "order");
    if (e.st == ST_SCAN) begin
      chk(out_job.best_err == e.best_err && out_job.best_idx == e.best_idx,
          $sformatf("best %0d@%0d vs %0d@%0d", out_job.best_err, out_job.best_idx, e.best_err, e.best_idx));
      chk(out_job.second_err == e.second_err, $sformatf("second %0d vs %0d", out_job.second_err, e.second_err));
      chk(out_job.pre_ok == e.pre_ok && (!e.pre_ok || out_job.err_pre == e.err_pre), "pre");
      chk(out_job.post_ok == e.post_ok && (!e.post_ok || out_job.err_post == e.err_post), "post");
    end
    n_out++;
  end

  initial begin
    int ns, t0;
    ipix_t s [];
    err_t  err [];
    meta_valid = 0; meta_in = '0; is_valid = 0; is = '0; out_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    for (int n = 0; n < 60; n++) begin
      job_t j, e;
      j = '0; j.x = 16'(n);
      j.st = (n % 3 == 2) ? ST_SKIP_GRAD : ST_SCAN;
      ns = $urandom % 30 + 1;
      j.nsteps = 16'(ns);
      for (int k = 0; k < 5; k++) j.pattern[k] = ipix_t'($urandom % 65536);
      s = new[ns + 5];
      for (int i = 0; i < ns + 5; i++) s[i] = ipix_t'($urandom % 65536);
      if (n % 2 == 0) begin          // plant a clear minimum
        int p;
        p = $urandom % (ns + 1);
        for (int k = 0; k < 5; k++) s[p + k] = j.pattern[k] + ipix_t'($urandom % 64);
      end
      // reference scan
      e = j;
      err = new[ns + 1];
      for (int i = 0; i <= ns; i++) begin
        err[i] = 0;
        for (int k = 0; k < 5; k++) begin
          longint d;
          d = longint'(s[i + k]) - longint'(j.pattern[k]);
          err[i] += err_t'((d * d) >> 8);
        end
      end
      e.best_err = err[0]; e.best_idx = 0; e.second_err = '1; e.pre_ok = 0; e.post_ok = 0;
      for (int i = 1; i <= ns; i++) begin
        if (err[i] < e.best_err) begin
          if (i > e.best_idx + 1 && e.best_err < e.second_err) e.second_err = e.best_err;
          e.best_err = err[i]; e.best_idx = 16'(i); e.err_pre = err[i-1]; e.pre_ok = 1; e.post_ok = 0;
        end else begin
          if (i == e.best_idx + 1) begin e.err_post = err[i]; e.post_ok = 1; end
          if (i > e.best_idx + 1 && err[i] < e.second_err) e.second_err = err[i];
        end
      end
      exp_q.push_back(e);
      meta_in = j; meta_valid = 1;
      #1;
      while (!meta_ready) begin @(posedge clk); #1; end
      @(posedge clk); #1;
      meta_valid = 0;
      if (j.st == ST_SCAN) begin
        t0 = $time;
        for (int i = 0; i < ns + 5; i++) begin
          is.v = s[i]; is.last = (i == ns + 4); is_valid = 1;
          #1;
          while (!is_ready) begin @(posedge clk); #1; end
          @(posedge clk); #1;
        end
        is_valid = 0;
        chk(($time - t0) / 10 == ns + 5, "one scan step per cycle");
      end
    end
    repeat (5) @(posedge clk);
    chk(n_out == 60, "all points");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
