// tb_kp_grad_check: feeds a whole 16x8 keyframe of points in raster order
// with a random image behind a one-cycle-latency window model. Checks the
// 3x3 max gradient and the fitness decision of every point against a
// direct computation, and the rate of one point per 5 cycles inside a row.
module tb_kp_grad_check;
  import slam_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  localparam int W = 16, H = 8;
  params_t prm;
  logic in_valid, in_ready, out_valid, out_ready, rd_en;
  job_t in_job, out_job;
  logic [15:0] rd_x, rd_y;
  pix_t [3:0] rd_win;
  kp_grad_check #(.IMG_W(W), .IMG_H(H)) dut (.*);

  pix_t img [H][W];
  always @(posedge clk) if (rd_en) begin
    int cx, cy;
    cx = (rd_x > W - 2) ? W - 2 : int'(rd_x);
    cy = (rd_y > H - 2) ? H - 2 : int'(rd_y);
    rd_win <= {img[cy+1][cx+1], img[cy+1][cx], img[cy][cx+1], img[cy][cx]};
  end

  function automatic int grad(int x, int y);
    int a, b;
    if (x < 0 || y < 0 || x > W - 2 || y > H - 2) return 0;
    a = int'(img[y][x+1]) - int'(img[y][x]);
    b = int'(img[y+1][x]) - int'(img[y][x]);
    return (a < 0 ? -a : a) + (b < 0 ? -b : b);
  endfunction
  function automatic int maxgrad(int x, int y);
    int m = 0;
    for (int dy = -1; dy <= 1; dy++)
      for (int dx = -1; dx <= 1; dx++)
        if (x + dx >= 0 && x + dx < W && grad(x + dx, y + dy) > m) m = grad(x + dx, y + dy);
    return m;
  endfunction

  job_t pts [W*H];
  int n_out = 0, last_t = -1, slow = 0, n_scan = 0, n_skip = 0, n_mid = 0;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    int x, y, mg;
    status_e st;
    x = n_out % W; y = n_out / W;
    mg = maxgrad(x, y);
    chk(out_job.x == 16'(x) && out_job.y == 16'(y), "order");
    chk(int'(out_job.max_grad) == mg, $sformatf("max grad at (%0d,%0d): %0d vs %0d", x, y, out_job.max_grad, mg));
    if (pts[n_out].pt.is_valid) st = (mg >= 30) ? ST_SCAN : ST_SKIP_GRAD;
    else st = (mg >= 60 && pts[n_out].pt.blacklisted >= -2) ? ST_SCAN : ST_SKIP_GRAD;
    chk(out_job.st == st, "fitness decision");
    if (st == ST_SCAN) n_scan++; else n_skip++;
    if (mg >= 30 && mg < 60) n_mid++;
    if (last_t >= 0 && x > 0 && ($time - last_t) / 10 != 5) slow++;
    last_t = $time;
    n_out++;
  end

  initial begin
    prm = '0; prm.grad_update = 30; prm.grad_create = 60; prm.bl_min = -2;
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) img[y][x] = pix_t'($urandom % ((((x / 3 + y / 3) % 3) == 0) ? 12 : (((x / 3 + y / 3) % 3) == 1) ? 40 : 96) + ((x > 7) ? 100 : 0));
    for (int i = 0; i < W * H; i++) begin
      pts[i] = '0;
      pts[i].x = 16'(i % W); pts[i].y = 16'(i / W);
      pts[i].pt.is_valid = ($urandom % 2);
      pts[i].pt.blacklisted = 16'(-($urandom % 5));
    end
    in_valid = 0; in_job = '0; out_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    for (int i = 0; i < W * H; i++) begin
      in_valid = 1; in_job = pts[i];
      #1;
      while (!in_ready) begin @(posedge clk); #1; end
      @(posedge clk); #1;
    end
    in_valid = 0;
    repeat (20) @(posedge clk);
    chk(n_out == W * H, "all points");
    chk(slow == 0, $sformatf("5-cycle rate inside rows (%0d slow)", slow));
    chk(n_scan > 5 && n_skip > 5, "both decisions exercised");
    chk(n_mid > 5, $sformatf("gradients between the two thresholds (%0d)", n_mid));
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
