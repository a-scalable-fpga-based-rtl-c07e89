// tb_subpixel_interp: random windows and fractions; each result must match
// a real-valued bilinear interpolation to within one 8.8 LSB, with one
// result per cycle and the last flag and metadata carried along.
module tb_subpixel_interp;
  import slam_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  logic meta_in_valid, meta_in_ready, meta_out_valid, meta_out_ready;
  job_t meta_in, meta_out;
  logic win_valid, win_ready, is_valid, is_ready;
  window_t win;
  isample_t is;
  subpixel_interp dut (.*);

  window_t wq[$];
  int n = 0;
  always @(posedge clk) if (rst_n && is_valid && is_ready) begin
    window_t w;
    real fx, fy, v;
    w = wq.pop_front();
    fx = real'(w.fx) / 256.0; fy = real'(w.fy) / 256.0;
    v = (1 - fy) * ((1 - fx) * w.win[0] + fx * w.win[1]) + fy * ((1 - fx) * w.win[2] + fx * w.win[3]);
    chk((real'(is.v) / 256.0 - v) < 1.0/256 && (v - real'(is.v) / 256.0) < 1.0/256,
        $sformatf("interp %f vs %f", real'(is.v) / 256.0, v));
    chk(is.last == w.last, "last");
    n++;
  end

  initial begin
    win_valid = 0; win = '0; is_ready = 1; meta_in_valid = 0; meta_in = '0; meta_out_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    meta_in.x = 16'd7; meta_in_valid = 1;
    @(posedge clk); #1; meta_in_valid = 0;
    chk(meta_out_valid && meta_out.x == 16'd7, "metadata one cycle later");
    for (int i = 0; i < 500; i++) begin
      for (int d = 0; d < 4; d++) win.win[d] = pix_t'($urandom);
      win.fx = 8'($urandom); win.fy = 8'($urandom); win.last = $urandom % 2;
      if (i == 0) win.fx = 0;
      if (i == 1) begin win.fx = 8'hFF; win.fy = 8'hFF; end
      win_valid = 1;
      is_ready = (i < 400) ? 1'b1 : ($urandom % 2 == 1);
      #1;
      while (!win_ready) begin @(posedge clk); #1; is_ready = ($urandom % 2 == 1); #1; end
      wq.push_back(win);
      @(posedge clk); #1;
    end
    win_valid = 0; is_ready = 1;
    repeat (5) @(posedge clk);
    chk(n == 500, "all samples");
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
