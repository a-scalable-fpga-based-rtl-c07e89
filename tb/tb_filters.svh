// Shared stimulus for the two window filters: a W x H map with random
// valid/invalid points streamed in raster order under random
// back-pressure; the including module checks each output point.
  import slam_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL: %s", m); end
  endtask
  localparam int W = 12, H = 7, N = W * H;
  map_point_t mp [2][N];                 // two frames
  logic in_valid, in_ready, out_valid, out_ready;
  map_point_t in_pt, out_pt;
  int n_out = 0;

  task automatic make_maps();
    for (int f = 0; f < 2; f++)
      for (int i = 0; i < N; i++) begin
        mp[f][i] = '0;
        mp[f][i].is_valid    = ($urandom % 3 != 0);
        mp[f][i].idepth      = fix_t'($urandom % 30000000 + 1000000);
        mp[f][i].idepth_var  = fix_t'($urandom % 1000000 + 1000);
        mp[f][i].validity    = 16'($urandom % 20);
        mp[f][i].blacklisted = 16'(-($urandom % 3));
      end
  endtask

  initial begin
    in_valid = 0; in_pt = '0; out_ready = 1;
    make_maps();
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    for (int f = 0; f < 2; f++)
      for (int i = 0; i < N; i++) begin
        in_pt = mp[f][i]; in_valid = 1;
        out_ready = (f == 0) ? 1'b1 : ($urandom % 3 != 0);
        #1;
        while (!in_ready) begin @(posedge clk); #1; out_ready = ($urandom % 3 != 0); #1; end
        @(posedge clk); #1;
        in_valid = 0;
      end
    out_ready = 1;
    repeat (3 * W) @(posedge clk);
    chk(n_out == 2 * N, $sformatf("all points out (%0d)", n_out));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
