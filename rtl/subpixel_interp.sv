// subpixel_interp: subpixel intensity calculation. Bilinear interpolation
// of the 2x2 window at the fractional position (8-bit weights):
//   v = (1-fy)((1-fx)p00 + fx p10) + fy((1-fx)p01 + fx p11)
// giving an 8.8 fixed-point intensity, one per cycle with one cycle of
// latency. The metadata channel passes through a register slice.
module subpixel_interp
  import slam_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     meta_in_valid,
  output logic     meta_in_ready,
  input  job_t     meta_in,
  output logic     meta_out_valid,
  input  logic     meta_out_ready,
  output job_t     meta_out,
  input  logic     win_valid,
  output logic     win_ready,
  input  window_t  win,
  output logic     is_valid,
  input  logic     is_ready,
  output isample_t is
);
  assign win_ready = !is_valid || is_ready;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      is_valid <= 1'b0; is <= '0;
    end else if (win_ready) begin
      is_valid <= win_valid;
      if (win_valid) begin
        is.v    <= bilerp(win.win, win.fx, win.fy);
        is.last <= win.last;
      end
    end

  reg_slice #(.T(job_t)) u_meta (
    .clk, .rst_n,
    .in_valid(meta_in_valid), .in_ready(meta_in_ready), .in_data(meta_in),
    .out_valid(meta_out_valid), .out_ready(meta_out_ready), .out_data(meta_out)
  );
endmodule
