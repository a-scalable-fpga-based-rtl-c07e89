// tb_unpack_unit: streams 3 words per point and checks every field of the
// resulting map points, their raster coordinates, the one point per three
// cycles rate at full input speed and the restart on frame_start.
module tb_unpack_unit;
  import slam_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  localparam int W = 5, H = 3;
  logic frame_start, in_valid, in_ready, out_valid, out_ready;
  logic [63:0] in_data;
  job_t out_job;
  unpack_unit #(.IMG_W(W), .IMG_H(H)) dut (.*);

  function automatic logic [63:0] word(int p, int k);
    return {32'(p * 1000 + k * 10 + 1), 32'(p * 77 + k)};
  endfunction

  int n_out = 0;
  int last_t = -1, gaps_ok = 1;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    chk(out_job.pt.idepth == fix_t'(word(n_out, 0)[31:0]), "idepth");
    chk(out_job.pt.idepth_var == fix_t'(word(n_out, 0)[63:32]), "var");
    chk(out_job.pt.idepth_smoothed == fix_t'(word(n_out, 1)[31:0]), "smoothed");
    chk(out_job.pt.idepth_var_smoothed == fix_t'(word(n_out, 1)[63:32]), "var smoothed");
    chk(out_job.pt.validity == word(n_out, 2)[15:0], "validity");
    chk(out_job.pt.blacklisted == word(n_out, 2)[31:16], "blacklisted");
    chk(out_job.pt.is_valid == word(n_out, 2)[32], "is_valid");
    chk(out_job.x == 16'((n_out % (W * H)) % W) && out_job.y == 16'((n_out % (W * H)) / W), "coordinates");
    if (last_t >= 0 && n_out < W * H && ($time - last_t) / 10 != 3) gaps_ok = 0;
    last_t = $time;
    n_out++;
  end

  initial begin
    frame_start = 0; in_valid = 0; in_data = 0; out_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    frame_start = 1; @(posedge clk); #1; frame_start = 0;
    for (int p = 0; p < W * H; p++)
      for (int k = 0; k < 3; k++) begin
        in_valid = 1; in_data = word(p, k);
        @(posedge clk); #1;
      end
    in_valid = 0;
    repeat (3) @(posedge clk); #1;
    chk(gaps_ok == 1, "one point every 3 cycles");
    // second frame with back-pressure
    for (int p = W * H; p < 2 * W * H; p++)
      for (int k = 0; k < 3; k++) begin
        in_valid = 1; in_data = word(p, k);
        out_ready = ($urandom % 2) != 0;
        #1;
        while (!in_ready) begin @(posedge clk); #1; out_ready = ($urandom % 2) != 0; #1; end
        @(posedge clk); #1;
      end
    in_valid = 0; out_ready = 1;
    repeat (5) @(posedge clk);
    chk(n_out == 2 * W * H, "all points out");
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
