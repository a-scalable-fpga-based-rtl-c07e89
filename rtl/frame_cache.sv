// frame_cache: on-chip copy of one 8-bit grey image (keyframe or camera
// frame) that delivers a 2x2 pixel window per read port and cycle.
//
// The image is split into four banks by the parity of x and y, so the four
// pixels of any 2x2 window lie in four different banks and are read in one
// cycle. Each bank word holds four pixels of a row (every second pixel),
// so one 64-bit write of eight consecutive pixels updates one word in each
// of the two banks of that row's parity. The reference design partitions
// its HLS arrays cyclically in two dimensions; the factor of two and the
// word layout here are this design's choice.
//
// Write: wr_en, wr_addr = index of the 64-bit word in raster order
// (IMG_W/8 words per row), wr_data pixel 0 in bits 7:0.
// Read: rd_en[p], rd_x[p], rd_y[p] (integer top-left corner, clamped to
// [0,IMG_W-2]x[0,IMG_H-2]); rd_win[p] is valid one cycle later and held
// until the next read of that port. rd_win index = dy*2 + dx.
module frame_cache
  import slam_pkg::*;
#(
  parameter int IMG_W = 640,
  parameter int IMG_H = 480,
  parameter int NRD   = 1
) (
  input  logic clk,
  input  logic wr_en,
  input  logic [31:0] wr_addr,
  input  logic [63:0] wr_data,
  input  logic [NRD-1:0]        rd_en,
  input  logic [NRD-1:0] [15:0] rd_x,
  input  logic [NRD-1:0] [15:0] rd_y,
  output pix_t [NRD-1:0] [3:0]  rd_win
);
  localparam int WPR   = IMG_W / 8;            // bank words per row
  localparam int BWORDS = WPR * ((IMG_H + 1) / 2);
  localparam int BA    = $clog2(BWORDS);

  logic [31:0] bank [4][BWORDS];               // [ypar*2+xpar]

  // write: word w covers row wy, pixels wx*8 .. wx*8+7
  logic [31:0] wy, wx;
  logic [BA-1:0] wa;
  assign wy = wr_addr / WPR;
  assign wx = wr_addr % WPR;
  assign wa = BA'((wy >> 1) * WPR + wx);

  always_ff @(posedge clk)
    if (wr_en) begin
      bank[{wy[0], 1'b0}][wa] <= {wr_data[55:48], wr_data[39:32], wr_data[23:16], wr_data[7:0]};
      bank[{wy[0], 1'b1}][wa] <= {wr_data[63:56], wr_data[47:40], wr_data[31:24], wr_data[15:8]};
    end

  for (genvar p = 0; p < NRD; p++) begin : g_rd
    logic [15:0] cx, cy;
    always_comb begin
      cx = (rd_x[p] > 16'(IMG_W - 2)) ? 16'(IMG_W - 2) : rd_x[p];
      cy = (rd_y[p] > 16'(IMG_H - 2)) ? 16'(IMG_H - 2) : rd_y[p];
    end
    always_ff @(posedge clk)
      if (rd_en[p])
        for (int dy = 0; dy < 2; dy++)
          for (int dx = 0; dx < 2; dx++) begin
            logic [15:0] px, py;
            logic [31:0] word;
            px = cx + 16'(dx);
            py = cy + 16'(dy);
            word = bank[{py[0], px[0]}][BA'(32'(py >> 1) * WPR + 32'(px >> 3))];
            rd_win[p][dy*2+dx] <= word[8*px[2:1] +: 8];
          end
  end
endmodule
