// tb_cache_req_handler: random sample coordinates under random back-pressure
// against a one-cycle-latency window model of the frame cache; each
// window must hold the four pixels at the integer corner and the top 8
// fraction bits; metadata must pass in order.
module tb_cache_req_handler;
  import slam_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  localparam int W = 32, H = 16;
  logic meta_in_valid, meta_in_ready, meta_out_valid, meta_out_ready;
  job_t meta_in, meta_out;
  logic smp_valid, smp_ready, win_valid, win_ready, rd_en;
  sample_t smp;
  window_t win;
  logic [15:0] rd_x, rd_y;
  pix_t [3:0] rd_win;
  cache_req_handler dut (.*);

  function automatic pix_t img(int x, int y);
    return pix_t'(x * 13 + y * 57 + 5);
  endfunction
  always @(posedge clk) if (rd_en) begin
    int cx, cy;
    cx = (rd_x > W - 2) ? W - 2 : int'(rd_x);
    cy = (rd_y > H - 2) ? H - 2 : int'(rd_y);
    rd_win <= {img(cx+1, cy+1), img(cx, cy+1), img(cx+1, cy), img(cx, cy)};
  end

  sample_t sq[$];
  int n_win = 0, n_meta = 0;
  always @(posedge clk) if (rst_n) begin
    if (win_valid && win_ready) begin
      sample_t s;
      int x, y;
      s = sq.pop_front();
      x = s.x >>> 16; y = s.y >>> 16;
      chk(win.win == {img(x+1, y+1), img(x, y+1), img(x+1, y), img(x, y)}, "window pixels");
      chk(win.fx == s.x[15:8] && win.fy == s.y[15:8] && win.last == s.last, "fraction and last");
      n_win++;
    end
    if (meta_out_valid && meta_out_ready) begin
      chk(meta_out.x == 16'(n_meta), "metadata order");
      n_meta++;
    end
  end

  initial begin
    meta_in_valid = 0; meta_in = '0; smp_valid = 0; smp = '0; win_ready = 1; meta_out_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    fork
      for (int n = 0; n < 300; n++) begin
        smp.x = fix_t'($urandom % ((W - 1) * 65536));
        smp.y = fix_t'($urandom % ((H - 1) * 65536));
        smp.last = ($urandom % 7 == 0);
        smp_valid = 1;
        win_ready = ($urandom % 3 != 0);
        #1;
        while (!smp_ready) begin @(posedge clk); #1; win_ready = ($urandom % 3 != 0); #1; end
        sq.push_back(smp);
        @(posedge clk); #1;
        smp_valid = 0;
      end
      for (int n = 0; n < 20; n++) begin
        meta_in = '0; meta_in.x = 16'(n); meta_in_valid = 1;
        #2;
        while (!meta_in_ready) begin @(posedge clk); #2; end
        @(posedge clk); #2;
        meta_in_valid = 0;
      end
    join
    win_ready = 1;
    repeat (10) @(posedge clk);
    chk(n_win == 300 && n_meta == 20, "all windows and metadata");
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
