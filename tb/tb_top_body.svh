// Shared body of the end-to-end testbenches of depth_mapper_top. The
// including module defines localparams W and H and instantiates the DUT
// as "dut" with the port names used here.
//
// Scene: the keyframe is pixel noise with a flat horizontal band (no
// gradient) and the camera frame is the keyframe shifted right by SHIFT
// pixels, which is what a sideways camera motion with K t = (SHIFT,0,0)
// produces for a fronto-parallel plane at inverse depth 1.0. A vertical
// strip of the frame is replaced by unrelated noise (an occlusion), so
// matches there fail. The initial map mixes confident priors, weak priors
// and empty points. After one map update the testbench checks every
// written point that the geometry allows to be matched, the number of
// words written, and counts each mechanism of the pipeline.
  import slam_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL: %s", m); end
  endtask

  localparam int N = W * H;
  localparam int SHIFT = 4;
  localparam int BAND0 = H / 2 - 2, BAND1 = H / 2 + 1;    // flat rows
  localparam int STRIP0 = W / 2, STRIP1 = W / 2 + 2;      // occluded frame columns
  localparam logic [31:0] KF_A = 32'h0000_0000, FR_A = 32'h0100_0000,
                          MI_A = 32'h0200_0000, MO_A = 32'h0300_0000;

  logic host_we, host_re, irq;
  logic [7:0] host_addr;
  logic [31:0] host_wdata, host_rdata;
  logic ar_valid, ar_ready, r_valid, r_ready, r_last;
  logic [31:0] ar_addr; logic [7:0] ar_len; logic [63:0] r_data;
  logic aw_valid, aw_ready, w_valid, w_ready, w_last, b_valid, b_ready;
  logic [31:0] aw_addr; logic [7:0] aw_len; logic [63:0] w_data;

  // ---------------- scene
  function automatic pix_t kf_pix(int x, int y);
    if (y >= BAND0 && y <= BAND1) return 8'd128;
    return pix_t'((x * 2654435761 + y * 40503 + ((x * y) << 3)) >> 7);
  endfunction
  function automatic pix_t fr_pix(int x, int y);
    if (x >= STRIP0 && x <= STRIP1 && !(y >= BAND0 && y <= BAND1)) return pix_t'((x * 977 + y * 3331) >> 2);
    return kf_pix(x - SHIFT, y);
  endfunction

  // ---------------- memory model (behavioural DRAM)
  logic [63:0] kf_mem [N/8], fr_mem [N/8], mi_mem [3*N], mo_mem [3*N];
  function automatic logic [63:0] rd_word(logic [31:0] a);
    int i;
    i = int'(a[23:0] >> 3);
    case (a[31:24])
      8'h00: return kf_mem[i];
      8'h01: return fr_mem[i];
      default: return mi_mem[i];
    endcase
  endfunction
  logic [31:0] rq_addr[$]; int rq_len[$]; int rbeat = 0;
  int n_rbursts = 0, n_wbursts = 0, n_wwords = 0;
  assign ar_ready = (rq_addr.size() < 4);
  // handshakes are sampled at the edge, model state changes 1 ns later
  always @(posedge clk) begin
    bit hr, ha;
    logic [31:0] aa; logic [7:0] al;
    hr = rst_n && r_valid && r_ready;
    ha = rst_n && ar_valid && ar_ready; aa = ar_addr; al = ar_len;
    #1;
    if (hr) begin
      if (rbeat == rq_len[0] - 1) begin rbeat = 0; void'(rq_addr.pop_front()); void'(rq_len.pop_front()); end
      else rbeat++;
    end
    if (ha) begin rq_addr.push_back(aa); rq_len.push_back(int'(al) + 1); n_rbursts++; end
    r_valid = 0; r_data = '0; r_last = 0;
    if (rq_addr.size() > 0) begin
      r_valid = 1;
      r_data  = rd_word(rq_addr[0] + 32'(rbeat * 8));
      r_last  = (rbeat == rq_len[0] - 1);
    end
  end
  logic [31:0] wa; int wbeat = 0, wlen = 0; bit wact = 0, bpend = 0;
  assign aw_ready = !wact && !bpend;
  assign w_ready  = wact;
  assign b_valid  = bpend;
  always @(posedge clk) begin
    bit hb, hw, haw, wl;
    logic [63:0] wd;
    logic [31:0] awa; logic [7:0] awl;
    hb = rst_n && b_valid && b_ready; hw = rst_n && w_valid && w_ready; haw = rst_n && aw_valid && aw_ready;
    wd = w_data; wl = w_last; awa = aw_addr; awl = aw_len;
    #1;
    if (hb) bpend = 0;
    if (hw) begin
      mo_mem[int'((wa - MO_A) >> 3) + wbeat] = wd;
      n_wwords++;
      chk(wl == (wbeat == wlen - 1), "w_last position");
      wbeat++;
      if (wbeat == wlen) begin wact = 0; bpend = 1; end
    end
    if (haw) begin wa = awa; wlen = int'(awl) + 1; wbeat = 0; wact = 1; n_wbursts++; end
  end

  // ---------------- host
  task automatic wr(int a, logic [31:0] d);
    host_addr = 8'(a); host_wdata = d; host_we = 1;
    @(posedge clk); #1; host_we = 0;
  endtask
  task automatic rd(int a, output logic [31:0] d);
    host_addr = 8'(a); host_re = 1;
    @(posedge clk); #1; host_re = 0; d = host_rdata;
  endtask

  // ---------------- mechanism counters
  int c_scan = 0, c_skip = 0, c_oob = 0, c_ferr = 0, c_funiq = 0, c_ref = 0, c_fuse = 0,
      c_create = 0, c_fill = 0, c_stall = 0, c_fast_skip = 0, c_steps = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.gc_valid && dut.gc_ready) begin
      if (dut.gc_job.st == ST_SCAN) c_scan++; else c_skip++;
    end
    if (dut.ep_valid && dut.ep_ready && dut.ep_job.st == ST_FAIL_OOB) c_oob++;
    if (dut.nd_valid && dut.nd_ready && dut.nd_job.st == ST_FAIL_ERR) c_ferr++;
    if (dut.nd_valid && dut.nd_ready && dut.nd_job.st == ST_FAIL_UNIQ) c_funiq++;
    if (dut.refined) c_ref++;
    if (dut.fused) c_fuse++;
    if (dut.created) c_create++;
    if (dut.filled) c_fill++;
    if (dut.ep_valid && !dut.ep_ready) c_stall++;
    if (dut.m1_valid && dut.m1_ready && dut.m1_job.st != ST_SCAN) c_fast_skip++;
    if (dut.is_valid && dut.is_ready) c_steps++;
  end

  function automatic fix_t q24(real v); return fix_t'($rtoi(v * 16777216.0)); endfunction
  function automatic real r24(fix_t v); return real'(v) / 16777216.0; endfunction

  initial begin
    logic [31:0] st, cyc;
    int t0, good = 0, bad = 0;
    host_we = 0; host_re = 0; host_addr = 0; host_wdata = 0; r_valid = 0; r_data = 0; r_last = 0;
    for (int i = 0; i < N / 8; i++)
      for (int b = 0; b < 8; b++) begin
        kf_mem[i][8*b +: 8] = kf_pix((i % (W/8)) * 8 + b, i / (W/8));
        fr_mem[i][8*b +: 8] = fr_pix((i % (W/8)) * 8 + b, i / (W/8));
      end
    for (int p = 0; p < N; p++) begin
      map_point_t m;
      int x, y;
      x = p % W; y = p / W;
      m = '0;
      if (y >= BAND0 - 1 && y <= BAND1 + 1) m.blacklisted = 0;           // empty
      else if ((x + y) % 4 == 0) begin
        m.is_valid = 1; m.idepth = q24(1.1); m.idepth_var = q24(0.01); m.validity = 10;
      end else if ((x + y) % 4 == 1) begin
        m.is_valid = 1; m.idepth = q24(0.9); m.idepth_var = q24(0.04); m.validity = 20;
      end
      mi_mem[3*p]     = {m.idepth_var, m.idepth};
      mi_mem[3*p + 1] = {m.idepth_var_smoothed, m.idepth_smoothed};
      mi_mem[3*p + 2] = {m.reserved, m.is_valid, m.blacklisted, m.validity};
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    wr(2, KF_A); wr(3, FR_A); wr(4, MI_A); wr(5, MO_A);
    wr(16, 32'h1_0000); wr(20, 32'h1_0000); wr(24, 32'h1_0000);      // M = I
    wr(25, 32'(SHIFT) << 16); wr(26, 0); wr(27, 0);                   // K t
    wr(28, 32'h1_0000); wr(29, 0); wr(30, 0);                         // keyframe line along +x
    wr(31, q24(0.5)); wr(32, q24(2.0));
    wr(33, 40); wr(34, 20); wr(35, 32'hFFFF_FFFD);
    wr(36, 5 * 102400); wr(37, q24(0.5)); wr(38, q24(0.1)); wr(39, 8);
    t0 = $time;
    wr(0, 32'h7);                                                     // load both caches, start
    while (!irq) @(posedge clk);
    #1;
    rd(1, st); rd(6, cyc);
    chk(st[1] == 1'b1 && st[0] == 1'b0, "status done");
    $display("INFO map update: %0d cycles for %0d points (%0d.%02d cycles/point incl. cache loads)",
             cyc, N, cyc / N, (cyc % N) * 100 / N);
    chk(n_wwords == 3 * N, $sformatf("words written %0d", n_wwords));
    // results
    for (int p = 0; p < N; p++) begin
      map_point_t m;
      int x, y;
      x = p % W; y = p / W;
      {m.idepth_var, m.idepth} = mo_mem[3*p];
      {m.idepth_var_smoothed, m.idepth_smoothed} = mo_mem[3*p + 1];
      {m.reserved, m.is_valid, m.blacklisted, m.validity} = mo_mem[3*p + 2];
      // points whose whole search lies in clean texture
      if (x >= 3 && x + 2 * SHIFT + 6 <= W - 4 && y >= 3 && y <= H - 4 &&
          (y < BAND0 - 2 || y > BAND1 + 2) && (x + 2 * SHIFT + 4 < STRIP0 || x - 2 > STRIP1) &&
          (x + y) % 4 != 1) begin   // weak 0.9 priors sample off-grid in pixel noise and may be rejected
        if (m.is_valid && r24(m.idepth) > 0.9 && r24(m.idepth) < 1.1) good++;
        else begin
          bad++;
          if (bad < 5) $display("INFO point (%0d,%0d) valid=%0d idepth=%f", x, y, m.is_valid, r24(m.idepth));
        end
      end
      // the smoothed value is a weighted mean of the valid 3x3 neighbours
      // as written out, so it must lie within their range
      if (m.is_valid) begin
        fix_t lo_n, hi_n;
        lo_n = m.idepth; hi_n = m.idepth;
        for (int dy = -1; dy <= 1; dy++)
          for (int dx = -1; dx <= 1; dx++)
            if (x + dx >= 0 && x + dx < W && y + dy >= 0 && y + dy < H) begin
              logic [63:0] w2;
              fix_t nd;
              w2 = mo_mem[3 * ((y + dy) * W + x + dx) + 2];
              nd = fix_t'(mo_mem[3 * ((y + dy) * W + x + dx)][31:0]);
              if (w2[32]) begin
                if (nd < lo_n) lo_n = nd;
                if (nd > hi_n) hi_n = nd;
              end
            end
        chk(m.idepth_smoothed >= lo_n && m.idepth_smoothed <= hi_n,
            $sformatf("smoothed depth %f at (%0d,%0d)", r24(m.idepth_smoothed), x, y));
      end
      if (!m.is_valid) chk(m.idepth_smoothed == -ID_ONE, "smoothed -1 for invalid");
    end
    $display("INFO matched points %0d good, %0d off", good, bad);
    chk(good > 0 && bad * 10 <= good, "depth recovered (90% within 10%)");
    $display("INFO scans=%0d skips=%0d oob=%0d fail_err=%0d fail_uniq=%0d refined=%0d fused=%0d created=%0d filled=%0d fifo_stall=%0d fast_skip=%0d scan_steps=%0d rbursts=%0d wbursts=%0d",
             c_scan, c_skip, c_oob, c_ferr, c_funiq, c_ref, c_fuse, c_create, c_fill, c_stall, c_fast_skip, c_steps, n_rbursts, n_wbursts);
    chk(c_scan > 0, "epipolar scans happened");
    chk(c_skip > 0, "gradient skips happened");
    chk(c_oob > 0, "out-of-frame rejections happened");
    chk(c_ferr + c_funiq > 0, "match rejections happened");
    chk(c_ref > 0, "sub-pixel refinements happened");
    chk(c_fuse > 0, "fusions happened");
    chk(c_create > 0, "creations happened");
    chk(c_fill > 0, "gap fills happened");
    chk(c_fast_skip > 0, "single-cycle forwarding through the fast pipeline happened");
    chk(n_rbursts > 0 && n_wbursts > 0, "burst traffic");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (40 * N + 20000) @(posedge clk);
    $display("INFO v/r q1 %0d%0d m1 %0d%0d s %0d%0d wn %0d%0d is %0d%0d lp %0d%0d q2 %0d%0d nd %0d%0d di %0d%0d fg %0d%0d rg %0d%0d lpuscan %0d", dut.q1_valid, dut.q1_ready, dut.m1_valid, dut.m1_ready, dut.s_valid, dut.s_ready, dut.wn_valid, dut.wn_ready, dut.is_valid, dut.is_ready, dut.lp_valid, dut.lp_ready, dut.q2_valid, dut.q2_ready, dut.nd_valid, dut.nd_ready, dut.di_valid, dut.di_ready, dut.fg_valid, dut.fg_ready, dut.rg_valid, dut.rg_ready, dut.u_lpu.scanning);
    $display("INFO pack busy %0d ws %0d level %0d holding %0d left %0d", dut.u_pack.busy, dut.u_pack.ws, dut.u_pack.level, dut.u_pack.holding, dut.u_pack.left);
    $display("INFO aw %0d%0d wact %0d bpend %0d dut.aw_ready %0d", aw_valid, aw_ready, wact, bpend, dut.aw_ready);
    $display("INFO timeout: ctrl state %0d, scans %0d skips %0d words %0d", dut.u_ctrl.cs, c_scan, c_skip, n_wwords);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
