// tb_frame_cache: loads a 32x8 test image through the 64-bit write port and
// reads random 2x2 windows from two ports, comparing every pixel with the
// image formula; also checks clamping at the right and bottom border.
module tb_frame_cache;
  import slam_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  localparam int W = 32, H = 8;
  logic wr_en;
  logic [31:0] wr_addr;
  logic [63:0] wr_data;
  logic [1:0] rd_en;
  logic [1:0][15:0] rd_x, rd_y;
  pix_t [1:0][3:0] rd_win;
  frame_cache #(.IMG_W(W), .IMG_H(H), .NRD(2)) dut (.*);

  function automatic pix_t img(int x, int y);
    return pix_t'(x * 37 + y * 101 + (x ^ y));
  endfunction

  initial begin
    int xs [2], ys [2];
    wr_en = 0; rd_en = 0; rd_x = '0; rd_y = '0; wr_addr = 0; wr_data = 0;
    @(posedge clk);
    for (int a = 0; a < W * H / 8; a++) begin
      wr_en = 1; wr_addr = a;
      for (int b = 0; b < 8; b++) wr_data[8*b +: 8] = img((a % (W/8)) * 8 + b, a / (W/8));
      @(posedge clk); #1;
    end
    wr_en = 0;
    for (int n = 0; n < 300; n++) begin
      for (int p = 0; p < 2; p++) begin
        xs[p] = $urandom % W; ys[p] = $urandom % H;
        rd_x[p] = 16'(xs[p]); rd_y[p] = 16'(ys[p]);
      end
      rd_en = 2'b11;
      @(posedge clk); #1;
      rd_en = 0;
      for (int p = 0; p < 2; p++) begin
        int cx, cy;
        cx = (xs[p] > W - 2) ? W - 2 : xs[p];
        cy = (ys[p] > H - 2) ? H - 2 : ys[p];
        for (int d = 0; d < 4; d++)
          chk(rd_win[p][d] == img(cx + d % 2, cy + d / 2), $sformatf("win p%0d (%0d,%0d) d%0d", p, xs[p], ys[p], d));
      end
      @(posedge clk); #1;
      chk(rd_win[0][0] == img((xs[0] > W-2) ? W-2 : xs[0], (ys[0] > H-2) ? H-2 : ys[0]), "held without rd_en");
    end
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
