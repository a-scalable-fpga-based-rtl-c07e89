// regularize_filter: second regularisation filter. For every valid map
// point it computes smoothed inverse depth and variance over the valid
// points of its 3x3 window (itself included), weighted by validity + 1:
//   id_s  = sum(w_i * id_i)  / sum(w_i)
//   var_s = sum(w_i * var_i) / sum(w_i)
// and stores them in the separate smoothed fields, leaving the depth
// itself untouched. Invalid points get smoothed values of -1. Streaming,
// one point per cycle, output one row and one pixel behind the input.
// Window size and weights are this design's choice.
module regularize_filter
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
  output map_point_t out_pt
);
  logic       w_valid, w_ready;
  map_point_t win [9];
  logic [8:0] mask;
  map_point_t r;

  win3x3_stream #(.IMG_W(IMG_W), .IMG_H(IMG_H)) u_win (
    .clk, .rst_n, .in_valid, .in_ready, .in_pt,
    .out_valid(w_valid), .out_ready(w_ready), .win, .mask
  );

  always_comb begin
    logic signed [63:0] sw, swd, swv, w;
    sw = '0; swd = '0; swv = '0; w = '0;
    for (int i = 0; i < 9; i++)
      if (mask[i] && win[i].is_valid) begin
        w   = 64'(win[i].validity) + 64'sd1;
        if (w < 1) w = 64'sd1;
        sw  = sw  + w;
        swd = swd + w * 64'(win[i].idepth);
        swv = swv + w * 64'(win[i].idepth_var);
      end
    r = win[4];
    if (win[4].is_valid) begin
      r.idepth_smoothed     = fix_t'(swd / sw);
      r.idepth_var_smoothed = fix_t'(swv / sw);
    end else begin
      r.idepth_smoothed     = -ID_ONE;
      r.idepth_var_smoothed = -ID_ONE;
    end
  end

  assign w_ready = !out_valid || out_ready;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      out_valid <= 1'b0; out_pt <= '0;
    end else if (w_ready) begin
      out_valid <= w_valid;
      if (w_valid) out_pt <= r;
    end
endmodule
