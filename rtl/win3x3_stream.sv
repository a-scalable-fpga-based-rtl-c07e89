// win3x3_stream: sliding 3x3 window over a raster-order stream of map
// points, built from row buffers so that a filter can look at a
// neighbourhood without leaving the streaming interface.
//
// Four rows are kept in a ring (row slot = y mod 4). The window of output
// pixel i = (ox, oy) is complete once input i + IMG_W + 1 (or the last
// pixel of the frame) has been written; input is accepted as long as it is
// less than two rows ahead of the output, which keeps the three rows the
// window needs from being overwritten. Output therefore lags input by one
// row and one pixel, and the last row is flushed without further input.
// mask marks the window positions that lie inside the image; win index is
// (dy+1)*3 + (dx+1). When the last pixel of a frame has left, both
// counters restart for the next frame. Output is combinational from the
// row buffers (one window per cycle).
module win3x3_stream
  import slam_pkg::*;
#(
  parameter int IMG_W = 640,
  parameter int IMG_H = 480
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  output logic       in_ready,
  input  map_point_t in_pt,
  output logic       out_valid,
  input  logic       out_ready,
  output map_point_t win [9],
  output logic [8:0] mask
);
  localparam int N  = IMG_W * IMG_H;
  localparam int XW = $clog2(IMG_W);
  map_point_t rows [4][IMG_W];
  logic [31:0] in_cnt, out_cnt;
  logic [15:0] ix, iy, ox, oy;
  logic [31:0] need;

  assign need      = (out_cnt + 32'(IMG_W) + 32'd2 < 32'(N)) ? out_cnt + 32'(IMG_W) + 32'd2 : 32'(N);
  assign in_ready  = (in_cnt < 32'(N)) && (in_cnt < out_cnt + 32'(2 * IMG_W));
  assign out_valid = (out_cnt < 32'(N)) && (in_cnt >= need);

  always_comb
    for (int dy = -1; dy <= 1; dy++)
      for (int dx = -1; dx <= 1; dx++) begin
        logic signed [17:0] xx, yy;
        logic in_img;
        xx = 18'(signed'({2'b0, ox})) + 18'(dx);
        yy = 18'(signed'({2'b0, oy})) + 18'(dy);
        in_img = xx >= 0 && yy >= 0 && xx < 18'(IMG_W) && yy < 18'(IMG_H);
        mask[(dy+1)*3 + dx+1] = in_img;
        win[(dy+1)*3 + dx+1]  = in_img ? rows[yy[1:0]][in_img ? xx[XW-1:0] : '0] : '0;
      end

  always_ff @(posedge clk)
    if (in_valid && in_ready) rows[iy[1:0]][ix[XW-1:0]] <= in_pt;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      in_cnt <= '0; out_cnt <= '0; ix <= '0; iy <= '0; ox <= '0; oy <= '0;
    end else begin
      if (in_valid && in_ready) begin
        in_cnt <= in_cnt + 1;
        if (ix == 16'(IMG_W - 1)) begin ix <= '0; iy <= iy + 1'b1; end
        else ix <= ix + 1'b1;
      end
      if (out_valid && out_ready) begin
        if (out_cnt == 32'(N - 1)) begin
          out_cnt <= '0; in_cnt <= '0; ix <= '0; iy <= '0; ox <= '0; oy <= '0;
        end else begin
          out_cnt <= out_cnt + 1;
          if (ox == 16'(IMG_W - 1)) begin ox <= '0; oy <= oy + 1'b1; end
          else ox <= ox + 1'b1;
        end
      end
    end
endmodule
