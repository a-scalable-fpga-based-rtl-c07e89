// tb_epipolar_unit: random keypoints through the epipolar/5-point unit.
// Geometry uses M = identity and a sideways translation, so the projected
// line ends are exact in fixed point and the expected start, increment,
// step count, interval and robustness outcome are computed directly here.
// The keyframe cache is modelled by a function image with a one-cycle read
// latency; each pattern value is checked against bilinear interpolation
// at (u,v) + k*dir. Skipped points must pass unchanged in one cycle and
// scanned points must leave within 8 cycles of acceptance.
module tb_epipolar_unit;
  import slam_pkg::*;
  localparam int W = 64, H = 48;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL: %s", m); end
  endtask

  params_t prm;
  logic in_valid, in_ready, out_valid, out_ready, rd_en;
  job_t in_job, out_job;
  logic [15:0] rd_x, rd_y;
  pix_t [3:0] rd_win;
  epipolar_unit #(.IMG_W(W), .IMG_H(H), .MAX_STEPS(64)) dut (.*);

  function automatic pix_t img(int x, int y);
    return pix_t'((x * 37 + y * 11 + ((x * y) % 7) * 13) & 8'hff);
  endfunction
  always @(posedge clk)
    if (rd_en) rd_win <= {img(rd_x + 1, rd_y + 1), img(rd_x, rd_y + 1), img(rd_x + 1, rd_y), img(rd_x, rd_y)};

  job_t exp_q[$];
  int n_scan = 0, n_oob = 0, n_skip = 0;

  function automatic job_t expect_job(job_t j);
    job_t e;
    fix_t lo, hi, sd, fx, fy, nx, ny, dx, dy, len, dnx, dny, kn;
    int ns;
    bit ok;
    e = j;
    if (j.st != ST_SCAN) return e;
    if (j.pt.is_valid) begin
      sd = fsqrt(j.pt.idepth_var);
      lo = j.pt.idepth - 2 * sd; hi = j.pt.idepth + 2 * sd;
      if (lo < prm.id_min) lo = prm.id_min;
      if (hi > prm.id_max) hi = prm.id_max;
    end else begin lo = prm.id_min; hi = prm.id_max; end
    fx = (fix_t'(j.x) <<< 16) + fix_t'((64'(prm.t[0]) * 64'(lo)) >>> 24);
    fy = (fix_t'(j.y) <<< 16) + fix_t'((64'(prm.t[1]) * 64'(lo)) >>> 24);
    nx = (fix_t'(j.x) <<< 16) + fix_t'((64'(prm.t[0]) * 64'(hi)) >>> 24);
    ny = (fix_t'(j.y) <<< 16) + fix_t'((64'(prm.t[1]) * 64'(hi)) >>> 24);
    dx = nx - fx; dy = ny - fy;
    len = (fabs(dx) > fabs(dy)) ? fabs(dx) : fabs(dy);
    ns = (len + 65535) / 65536;
    if (ns < 1) ns = 1;
    if (ns > 64) ns = 64;
    ok = 1;
    if (fx < 3 * 65536 || nx < 3 * 65536 || fy < 3 * 65536 || ny < 3 * 65536) ok = 0;
    if (fx > (W - 4) * 65536 || nx > (W - 4) * 65536 || fy > (H - 4) * 65536 || ny > (H - 4) * 65536) ok = 0;
    if (j.x < 2 || j.y < 2 || j.x > W - 3 || j.y > H - 3) ok = 0;
    e.id_lo = lo; e.id_hi = hi; e.nsteps = 16'(ns);
    e.inc_x = dx / ns; e.inc_y = dy / ns;
    e.start_x = fx - 2 * e.inc_x; e.start_y = fy - 2 * e.inc_y;
    e.major_x = fabs(dx) >= fabs(dy);
    e.a_m = e.major_x ? (fix_t'(j.x) <<< 16) : (fix_t'(j.y) <<< 16);
    e.a_z = 32'sh0001_0000;
    e.b_m = e.major_x ? prm.t[0] : prm.t[1];
    e.b_z = prm.t[2];
    // keyframe direction (epi_x, epi_y) = (1, 0.5) normalised: (1, 0.5)
    dnx = 32'sh0001_0000; dny = 32'sh0000_8000;
    if (!ok) e.st = ST_FAIL_OOB;
    else
      for (int k = 0; k < 5; k++) begin
        fix_t px, py;
        pix_t [3:0] w;
        px = (fix_t'(j.x) <<< 16) + (k - 2) * dnx;
        py = (fix_t'(j.y) <<< 16) + (k - 2) * dny;
        w = {img(px[31:16] + 1, py[31:16] + 1), img(px[31:16], py[31:16] + 1),
             img(px[31:16] + 1, py[31:16]), img(px[31:16], py[31:16])};
        e.pattern[k] = bilerp(w, px[15:8], py[15:8]);
      end
    return e;
  endfunction

  int acc_cyc = 0, cyc = 0;
  always @(posedge clk) cyc++;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    job_t e;
    if (exp_q.size() == 0) chk(0, "unexpected output");
    else begin
      e = exp_q.pop_front();
      if (e.st == ST_SCAN) n_scan++; else if (e.st == ST_FAIL_OOB) n_oob++; else n_skip++;
      chk(out_job.st == e.st, $sformatf("status %0d exp %0d at (%0d,%0d)", out_job.st, e.st, e.x, e.y));
      if (e.st == ST_SCAN) begin
        chk(out_job == e, $sformatf("job fields at (%0d,%0d) ns %0d/%0d sx %h/%h pat0 %h/%h", e.x, e.y,
            out_job.nsteps, e.nsteps, out_job.start_x, e.start_x, out_job.pattern[0], e.pattern[0]));
        chk(cyc - acc_cyc <= 8, "scan latency");
      end else if (e.st != ST_FAIL_OOB) begin
        chk(out_job == e, "skipped job unchanged");
        chk(cyc - acc_cyc == 1, "skip latency");
      end
    end
  end
  always @(posedge clk) if (rst_n && in_valid && in_ready) acc_cyc = cyc;

  initial begin
    prm = '0;
    prm.m[0] = 32'sh0001_0000; prm.m[4] = 32'sh0001_0000; prm.m[8] = 32'sh0001_0000;
    prm.id_min = 32'sh0010_0000;  // 1/16
    prm.id_max = 32'sh0200_0000;  // 2
    prm.epi_x = 32'sh0001_0000; prm.epi_y = 32'sh0000_8000;
    in_valid = 0; in_job = '0; out_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    for (int n = 0; n < 400; n++) begin
      job_t j;
      j = '0;
      prm.t[0] = fix_t'(($urandom % (20 << 16)) - (4 << 16));
      prm.t[1] = fix_t'(($urandom % (4 << 16)) - (2 << 16));
      j.x = 16'($urandom % W); j.y = 16'($urandom % H);
      j.st = ($urandom % 4 == 0) ? ST_SKIP_GRAD : ST_SCAN;
      j.pt.is_valid = $urandom % 2;
      j.pt.idepth = fix_t'($urandom % (3 << 24));
      j.pt.idepth_var = fix_t'($urandom % (1 << 22));
      j.pt.validity = 16'($urandom);
      in_job = j; in_valid = 1;
      out_ready = ($urandom % 4 != 0);
      #1;
      while (!in_ready) begin @(posedge clk); #1; out_ready = ($urandom % 4 != 0); #1; end
      exp_q.push_back(expect_job(j));
      @(posedge clk); #1;
      in_valid = 0;
      // parameters are static while a point is in flight
      out_ready = 1;
      while (exp_q.size() > 0) begin @(posedge clk); #1; end
    end
    chk(n_scan > 50 && n_oob > 20 && n_skip > 50, $sformatf("coverage scan %0d oob %0d skip %0d", n_scan, n_oob, n_skip));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
