// tb_depth_integration: random priors and observations through every
// branch (create, fuse, failed match on valid and invalid points,
// skipped); compares depth, variance, validity, blacklist and validity
// flag with a real-valued model of the update rules.
module tb_depth_integration;
  import slam_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  logic in_valid, in_ready, out_valid, out_ready, fused, created;
  job_t in_job, out_job;
  depth_integration dut (.*);

  function automatic real r24(fix_t v); return real'(v) / 16777216.0; endfunction
  function automatic bit near(real a, real b); return (a - b) < 1e-5 && (b - a) < 1e-5; endfunction

  initial begin
    int nf = 0, nc = 0, nd = 0;
    in_valid = 0; in_job = '0; out_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    for (int n = 0; n < 300; n++) begin
      job_t j;
      int sel, v;
      real id, vr, io, vo;
      j = '0;
      sel = $urandom % 5;
      j.st = (sel == 0) ? ST_SKIP_GRAD : (sel == 1) ? ST_FAIL_ERR : (sel == 2) ? ST_FAIL_UNIQ : ST_SCAN;
      j.pt.is_valid = $urandom % 2;
      j.pt.idepth = fix_t'($urandom % 30000000 + 100000);
      j.pt.idepth_var = fix_t'($urandom % 3000000 + 1000);
      j.pt.validity = 16'($urandom % 60);
      j.pt.blacklisted = 16'(-($urandom % 4));
      j.id_obs = fix_t'($urandom % 30000000 + 100000);
      j.var_obs = fix_t'($urandom % 3000000 + 1000);
      in_job = j; in_valid = 1;
      @(posedge clk); #1; in_valid = 0;
      id = r24(j.pt.idepth); vr = r24(j.pt.idepth_var); io = r24(j.id_obs); vo = r24(j.var_obs);
      chk(out_valid, "output");
      case (j.st)
        ST_SCAN: if (j.pt.is_valid) begin
          nf++;
          chk(fused, "fuse flagged");
          chk(near(r24(out_job.pt.idepth), (id * vo + io * vr) / (vr + vo)), "fused idepth");
          chk(near(r24(out_job.pt.idepth_var), vr * vo / (vr + vo)), "fused variance");
          v = j.pt.validity + 5; if (v > 50) v = 50;
          chk(out_job.pt.validity == 16'(v), "validity increment");
        end else begin
          nc++;
          chk(created && out_job.pt.is_valid, "created");
          chk(out_job.pt.idepth == j.id_obs && out_job.pt.idepth_var == j.var_obs && out_job.pt.validity == 5, "new hypothesis");
        end
        ST_SKIP_GRAD: chk(out_job.pt == j.pt, "skip unchanged");
        default: begin
          nd++;
          if (j.pt.is_valid) begin
            if (j.pt.validity >= 5)
              chk(out_job.pt.is_valid && out_job.pt.validity == j.pt.validity - 5, "validity decrement");
            else
              chk(!out_job.pt.is_valid && out_job.pt.blacklisted == j.pt.blacklisted - 1, "invalidated and blacklisted");
          end else
            chk(out_job.pt.blacklisted == j.pt.blacklisted - 1, "blacklist on failed creation");
        end
      endcase
    end
    chk(nf > 20 && nc > 20 && nd > 20, "all branches");
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
