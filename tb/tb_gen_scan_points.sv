// tb_gen_scan_points: scanned points must produce nsteps+5 samples at
// start + i*inc, one per cycle, the last flagged; skipped points must pass
// on the metadata channel one cycle after they are taken, with no samples.
module tb_gen_scan_points;
  import slam_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  logic in_valid, in_ready, meta_valid, meta_ready, smp_valid, smp_ready;
  job_t in_job, meta_job;
  sample_t smp;
  gen_scan_points dut (.*);

  job_t jq[$];
  int   si = 0, n_meta = 0, n_smp = 0, burst_gap = 0;
  int   last_smp_t = -1;
  bit   stall = 0;
  always @(posedge clk) if (rst_n) begin
    if (meta_valid && meta_ready) begin
      chk(meta_job.x == jq[n_meta].x, $sformatf("metadata order %0d %0d", meta_job.x, jq[n_meta].x));
      n_meta++;
    end
    if (smp_valid && smp_ready) begin
      job_t j;
      int k;
      // find the scanned job this sample belongs to
      j = jq[0]; k = 0;
      while (k < jq.size() - 1 && jq[k].st != ST_SCAN) k++;
      j = jq[k];
      chk(smp.x == j.start_x + fix_t'(si) * j.inc_x && smp.y == j.start_y + fix_t'(si) * j.inc_y,
          $sformatf("sample %0d position", si));
      chk(smp.last == (si == int'(j.nsteps) + 4), "last flag");
      if (!stall && last_smp_t >= 0 && si > 0 && ($time - last_smp_t) != 10) burst_gap++;
      last_smp_t = $time;
      n_smp++;
      si++;
      if (smp.last) begin si = 0; jq[k].st = ST_FAIL_OOB; end  // mark consumed
    end
  end

  int expect_smp = 0;
  initial begin
    in_valid = 0; in_job = '0; meta_ready = 1; smp_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    // a skipped point: metadata one cycle after it is taken
    in_job = '0; in_job.x = 16'd1; in_job.st = ST_SKIP_GRAD; jq.push_back(in_job);
    in_valid = 1; @(posedge clk); #1; in_valid = 0;
    chk(meta_valid && meta_job.x == 16'd1 && !smp_valid, "skip forwarded in one cycle");
    @(posedge clk); #1;
    for (int n = 0; n < 40; n++) begin
      job_t j;
      j = '0; j.x = 16'(n + 2);
      j.st = ($urandom % 2) ? ST_SCAN : ST_SKIP_GRAD;
      j.start_x = fix_t'($urandom % 2000000); j.start_y = fix_t'($urandom % 2000000);
      j.inc_x = fix_t'($urandom % 131072) - 65536; j.inc_y = fix_t'($urandom % 65536);
      j.nsteps = 16'($urandom % 20 + 1);
      if (j.st == ST_SCAN) expect_smp += int'(j.nsteps) + 5;
      jq.push_back(j);
      in_valid = 1; in_job = j;
      stall = (n >= 30);
      #1;
      while (!in_ready) begin
        @(posedge clk); #1;
        if (stall) begin smp_ready = ($urandom % 2); meta_ready = ($urandom % 2); #1; end
      end
      @(posedge clk); #1;
      in_valid = 0;
    end
    smp_ready = 1; meta_ready = 1;
    repeat (200) @(posedge clk);
    chk(n_meta == 41, "all metadata");
    chk(n_smp == expect_smp, $sformatf("sample count %0d vs %0d", n_smp, expect_smp));
    chk(burst_gap == 0, "one sample per cycle");
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
