// fill_gaps_filter: first regularisation filter. An invalid map point that
// is not blacklisted (blacklisted >= bl_min) and whose valid 3x3
// neighbours carry enough confidence (sum of their validity counters above
// fill_thresh) is filled with the validity-weighted average of their
// inverse depths:
//   id = sum(w_i * id_i) / sum(w_i),  w_i = validity_i,
// gets variance var_init, validity 0 and becomes valid. All other points
// pass unchanged. The decision uses the unfiltered neighbours (the window
// sees the input stream, not the output), so fills do not cascade.
// Streaming, one point per cycle, output one row and one pixel behind the
// input (row buffers in win3x3_stream). Window size and weights are this
// design's choice.
module fill_gaps_filter
  import slam_pkg::*;
#(
  parameter int IMG_W = 640,
  parameter int IMG_H = 480
) (
  input  logic       clk,
  input  logic       rst_n,
  input  params_t    prm,
  input  logic       in_valid,
  output logic       in_ready,
  input  map_point_t in_pt,
  output logic       out_valid,
  input  logic       out_ready,
  output map_point_t out_pt,
  output logic       filled        // statistics pulse
);
  logic       w_valid, w_ready;
  map_point_t win [9];
  logic [8:0] mask;
  map_point_t r;
  logic       fl;

  win3x3_stream #(.IMG_W(IMG_W), .IMG_H(IMG_H)) u_win (
    .clk, .rst_n, .in_valid, .in_ready, .in_pt,
    .out_valid(w_valid), .out_ready(w_ready), .win, .mask
  );

  always_comb begin
    logic signed [63:0] sw, swd;
    sw  = '0;
    swd = '0;
    for (int i = 0; i < 9; i++)
      if (i != 4 && mask[i] && win[i].is_valid && win[i].validity > 0) begin
        sw  = sw  + 64'(win[i].validity);
        swd = swd + 64'(win[i].validity) * 64'(win[i].idepth);
      end
    r  = win[4];
    fl = 1'b0;
    if (!win[4].is_valid && win[4].blacklisted >= prm.bl_min &&
        sw > 64'(prm.fill_thresh)) begin
      fl           = 1'b1;
      r.idepth     = fix_t'(swd / sw);
      r.idepth_var = prm.var_init;
      r.validity   = '0;
      r.is_valid   = 1'b1;
    end
  end

  assign w_ready = !out_valid || out_ready;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      out_valid <= 1'b0; out_pt <= '0; filled <= 1'b0;
    end else begin
      filled <= 1'b0;
      if (w_ready) begin
        out_valid <= w_valid;
        if (w_valid) begin
          out_pt <= r;
          filled <= fl;
        end
      end
    end
endmodule
