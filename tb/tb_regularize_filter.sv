// tb_regularize_filter: two random maps through the filter; every output
// point is compared with a direct weighted 3x3 average.
module tb_regularize_filter;
`include "tb_filters.svh"
  regularize_filter #(.IMG_W(W), .IMG_H(H)) dut (.*);
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    int f, i, x, y;
    longint sw, swd, swv;
    map_point_t c, e;
    f = n_out / N; i = n_out % N; x = i % W; y = i / W;
    c = mp[f][i]; e = c; sw = 0; swd = 0; swv = 0;
    for (int dy = -1; dy <= 1; dy++)
      for (int dx = -1; dx <= 1; dx++)
        if (x + dx >= 0 && x + dx < W && y + dy >= 0 && y + dy < H) begin
          map_point_t q;
          q = mp[f][(y + dy) * W + x + dx];
          if (q.is_valid) begin
            sw += q.validity + 1; swd += longint'(q.validity + 1) * q.idepth; swv += longint'(q.validity + 1) * q.idepth_var;
          end
        end
    if (c.is_valid) begin e.idepth_smoothed = fix_t'(swd / sw); e.idepth_var_smoothed = fix_t'(swv / sw); end
    else begin e.idepth_smoothed = -ID_ONE; e.idepth_var_smoothed = -ID_ONE; end
    chk(out_pt == e, $sformatf("point %0d,%0d frame %0d", x, y, f));
    n_out++;
  end
endmodule
