// tb_ctrl_regs: host register file and sequencer. Writes random values to
// every parameter register, reads them back and checks the decoded params
// bundle; then runs map updates for every combination of the load flags
// against stub memory controllers with random completion delays, checking
// the order of read jobs (destination, base, word count), the writer
// start, STATUS, irq and the CYCLES counter.
module tb_ctrl_regs;
  import slam_pkg::*;
  localparam int W = 16, H = 8, NPIX = W * H;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL: %s", m); end
  endtask

  logic host_we, host_re, irq;
  logic [7:0] host_addr;
  logic [31:0] host_wdata, host_rdata;
  params_t prm;
  logic rd_start, rd_done, frame_start, wr_start, wr_done, busy;
  logic [31:0] rd_base, rd_nwords, wr_base, wr_npoints;
  logic [1:0] rd_dest;
  ctrl_regs #(.IMG_W(W), .IMG_H(H)) dut (.*);

  task automatic wr(int a, logic [31:0] d);
    host_addr = 8'(a); host_wdata = d; host_we = 1;
    @(posedge clk); #1; host_we = 0;
  endtask
  task automatic rd(int a, output logic [31:0] d);
    host_addr = 8'(a); host_re = 1;
    @(posedge clk); #1; host_re = 0;
    d = host_rdata;
  endtask

  // stub controllers: done after a random delay; each job is logged
  int jobs_dest[$], jobs_base[$], jobs_n[$];
  int wr_starts = 0, frame_starts = 0, irqs = 0;
  always @(posedge clk) if (rst_n) begin
    if (rd_start) begin jobs_dest.push_back(rd_dest); jobs_base.push_back(rd_base); jobs_n.push_back(rd_nwords); end
    if (wr_start) begin
      wr_starts++;
      chk(wr_base == 32'h5000_0000 && wr_npoints == NPIX, "writer job");
    end
    if (frame_start) frame_starts++;
    if (irq) irqs++;
  end
  int rd_cnt = -1, wr_cnt = -1;
  always @(posedge clk) begin
    rd_done <= (rd_cnt == 0);
    wr_done <= (wr_cnt == 0);
    if (rd_start) rd_cnt <= $urandom % 20 + 1; else if (rd_cnt >= 0) rd_cnt <= rd_cnt - 1;
    if (wr_start) wr_cnt <= $urandom % 40 + 60; else if (wr_cnt >= 0) wr_cnt <= wr_cnt - 1;
  end

  logic [31:0] v [64];
  initial begin
    logic [31:0] d;
    host_we = 0; host_re = 0; host_addr = 0; host_wdata = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    // registers and decode
    for (int a = 2; a < 40; a++) if (a != 6 && (a < 7 || a > 15)) begin
      v[a] = $urandom; wr(a, v[a]);
    end
    for (int a = 2; a < 40; a++) if (a != 6 && (a < 7 || a > 15)) begin
      rd(a, d); chk(d == v[a], $sformatf("readback reg %0d", a));
    end
    for (int i = 0; i < 9; i++) chk(prm.m[i] == v[16 + i], "prm.m");
    for (int i = 0; i < 3; i++) chk(prm.t[i] == v[25 + i], "prm.t");
    chk(prm.epi_x == v[28] && prm.epi_y == v[29] && prm.epi_z == v[30], "prm.epi");
    chk(prm.id_min == v[31] && prm.id_max == v[32], "prm.id range");
    chk(prm.grad_create == v[33][15:0] && prm.grad_update == v[34][15:0], "prm.grad");
    chk(prm.bl_min == v[35][15:0] && prm.max_err == v[36] && prm.sigma2 == v[37], "prm misc");
    chk(prm.var_init == v[38] && prm.fill_thresh == v[39][15:0], "prm fill");
    rd(1, d); chk(d == 0, "STATUS idle after reset");
    // addresses
    wr(2, 32'h1000_0000); wr(3, 32'h2000_0000); wr(4, 32'h3000_0000); wr(5, 32'h5000_0000);
    wr(6, 32'hdead_beef); rd(6, d); chk(d == 0, "CYCLES is read-only");
    // map updates for each flag combination
    for (int f = 0; f < 8; f++) begin
      int ncyc, nj, ws, fs, iq;
      bit lk, lf;
      lk = f[0]; lf = f[1];
      jobs_dest.delete(); jobs_base.delete(); jobs_n.delete();
      ws = wr_starts; fs = frame_starts; iq = irqs;
      wr(0, {29'd0, lf, lk, 1'b1});
      ncyc = 1;
      rd(1, d); chk(d[0] == 1'b1, "STATUS busy");
      while (!irq && ncyc < 1000) begin @(posedge clk); #1; ncyc++; end
      @(posedge clk); #1;
      nj = 1 + lk + lf;
      chk(jobs_dest.size() == nj, $sformatf("read jobs %0d", jobs_dest.size()));
      if (jobs_dest.size() == nj) begin
        int i;
        i = 0;
        if (lk) begin chk(jobs_dest[i] == 1 && jobs_base[i] == 32'h1000_0000 && jobs_n[i] == NPIX / 8, "kf job"); i++; end
        if (lf) begin chk(jobs_dest[i] == 2 && jobs_base[i] == 32'h2000_0000 && jobs_n[i] == NPIX / 8, "frame job"); i++; end
        chk(jobs_dest[i] == 0 && jobs_base[i] == 32'h3000_0000 && jobs_n[i] == 3 * NPIX, "map job");
      end
      chk(wr_starts == ws + 1 && frame_starts == fs + 1 && irqs == iq + 1, "one writer start, frame start, irq");
      rd(1, d); chk(d[1:0] == 2'b10, "STATUS done, not busy");
      rd(6, d); chk(d > 60 && d < 200, $sformatf("CYCLES %0d", d));
      chk(!busy, "busy low");
      // a start with bit 0 clear does nothing
      wr(0, 32'h6);
      repeat (3) @(posedge clk); #1;
      chk(!busy, "no start without CTRL.start");
    end
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
