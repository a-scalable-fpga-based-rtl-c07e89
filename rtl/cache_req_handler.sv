// cache_req_handler: turns each sample coordinate of the scan into one
// 2x2 window read of the camera frame cache (the integer part of the
// coordinate is the window corner) and forwards the four pixels with the
// top 8 fractional bits of x and y. One window per cycle; the cache
// answers one cycle after the request, so the output register and the
// cache's read register advance together and back-pressure simply holds
// both. The metadata of the point passes through a register slice.
module cache_req_handler
  import slam_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    meta_in_valid,
  output logic    meta_in_ready,
  input  job_t    meta_in,
  output logic    meta_out_valid,
  input  logic    meta_out_ready,
  output job_t    meta_out,
  input  logic    smp_valid,
  output logic    smp_ready,
  input  sample_t smp,
  output logic    win_valid,
  input  logic    win_ready,
  output window_t win,
  // camera frame cache read port
  output logic        rd_en,
  output logic [15:0] rd_x,
  output logic [15:0] rd_y,
  input  pix_t [3:0]  rd_win
);
  logic [7:0] fx, fy;
  logic       last;

  assign smp_ready = !win_valid || win_ready;
  assign rd_en     = smp_valid && smp_ready;
  assign rd_x      = (smp.x < 0) ? 16'd0 : smp.x[31:16];
  assign rd_y      = (smp.y < 0) ? 16'd0 : smp.y[31:16];
  assign win.win   = rd_win;
  assign win.fx    = fx;
  assign win.fy    = fy;
  assign win.last  = last;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      win_valid <= 1'b0; fx <= '0; fy <= '0; last <= 1'b0;
    end else if (smp_ready) begin
      win_valid <= smp_valid;
      if (smp_valid) begin
        fx   <= (smp.x < 0) ? 8'd0 : smp.x[15:8];
        fy   <= (smp.y < 0) ? 8'd0 : smp.y[15:8];
        last <= smp.last;
      end
    end

  reg_slice #(.T(job_t)) u_meta (
    .clk, .rst_n,
    .in_valid(meta_in_valid), .in_ready(meta_in_ready), .in_data(meta_in),
    .out_valid(meta_out_valid), .out_ready(meta_out_ready), .out_data(meta_out)
  );
endmodule
