// tb_pack_output: random map points into the pack/output controller with
// a write-channel model that applies random aw/w back-pressure and random
// response delays. Every written word is checked against the packing of
// the input points (3 words per point) at its byte address, each burst's
// length and last beat are checked, at most one burst may be outstanding,
// and done must follow the final response.
module tb_pack_output;
  import slam_pkg::*;
  localparam int NP = 150, BL = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL: %s", m); end
  endtask

  logic start, busy, done, in_valid, in_ready;
  logic [31:0] base, npoints;
  map_point_t in_pt;
  logic aw_valid, aw_ready, w_valid, w_ready, w_last, b_valid, b_ready;
  logic [31:0] aw_addr;
  logic [7:0] aw_len;
  logic [63:0] w_data;
  pack_output #(.BURST_LEN(BL), .FIFO_DEPTH(64)) dut (.*);

  map_point_t pts [NP];
  logic [63:0] exp_w [3 * NP];
  int wr_seen [3 * NP];
  // write channel model
  int outstanding = 0, beats_left = 0, waddr = 0, bursts = 0, bdelay = -1, ndone = 0;
  always @(posedge clk) if (rst_n) begin
    if (aw_valid && aw_ready) begin
      chk(outstanding == 0, "one burst outstanding");
      chk(aw_addr[2:0] == 0 && aw_addr >= 32'h8000_0000, "aligned address");
      waddr = (aw_addr - 32'h8000_0000) / 8;
      beats_left = aw_len + 1;
      chk(beats_left == BL || waddr + beats_left == 3 * NP, $sformatf("burst length %0d", beats_left));
      outstanding++; bursts++;
    end
    if (w_valid && w_ready) begin
      chk(beats_left > 0, "beat inside a burst");
      if (waddr < 3 * NP) begin
        chk(w_data == exp_w[waddr], $sformatf("word %0d", waddr));
        wr_seen[waddr]++;
      end
      chk(w_last == (beats_left == 1), "w_last");
      waddr++; beats_left--;
      if (beats_left == 0) bdelay = $urandom % 6;
    end
    if (b_valid && b_ready) begin outstanding--; end
    if (done) ndone++;
    #1;
    aw_ready = ($urandom % 3 != 0);
    w_ready  = ($urandom % 4 != 0);
    if (b_valid && b_ready) b_valid = 0;
    if (bdelay == 0) begin b_valid = 1; bdelay = -1; end
    else if (bdelay > 0) bdelay--;
  end

  initial begin
    int cyc;
    start = 0; base = 32'h8000_0000; npoints = NP; in_valid = 0; in_pt = '0;
    aw_ready = 0; w_ready = 0; b_valid = 0;
    for (int i = 0; i < NP; i++) begin
      pts[i] = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      exp_w[3*i]     = {pts[i].idepth_var, pts[i].idepth};
      exp_w[3*i + 1] = {pts[i].idepth_var_smoothed, pts[i].idepth_smoothed};
      exp_w[3*i + 2] = {pts[i].reserved, pts[i].is_valid, pts[i].blacklisted, pts[i].validity};
      wr_seen[3*i] = 0; wr_seen[3*i + 1] = 0; wr_seen[3*i + 2] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    start = 1; @(posedge clk); #1; start = 0;
    chk(busy, "busy after start");
    for (int i = 0; i < NP; i++) begin
      in_pt = pts[i]; in_valid = ($urandom % 4 != 0);
      #1;
      while (!(in_valid && in_ready)) begin @(posedge clk); #1; in_valid = 1; #1; end
      @(posedge clk); #1;
      in_valid = 0;
    end
    cyc = 0;
    while (!done && cyc < 5000) begin @(posedge clk); #1; cyc++; end
    @(posedge clk); #1;
    chk(ndone == 1, "done pulsed once");
    chk(outstanding == 0 && !busy, "idle at end");
    for (int i = 0; i < 3 * NP; i++) chk(wr_seen[i] == 1, $sformatf("word %0d written once", i));
    chk(bursts == (3 * NP + BL - 1) / BL, $sformatf("bursts %0d", bursts));
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
