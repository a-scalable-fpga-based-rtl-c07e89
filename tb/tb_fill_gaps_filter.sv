// tb_fill_gaps_filter: two random maps through the filter; every output
// point is compared with a direct 3x3 computation of the fill rule on the
// unfiltered input.
module tb_fill_gaps_filter;
`include "tb_filters.svh"
  params_t prm;
  logic filled;
  initial begin prm = '0; prm.bl_min = -1; prm.fill_thresh = 12; prm.var_init = 32'sd1677721; end
  fill_gaps_filter #(.IMG_W(W), .IMG_H(H)) dut (.*);
  int n_fill = 0;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    int f, i, x, y;
    longint sw, swd;
    map_point_t c, e;
    f = n_out / N; i = n_out % N; x = i % W; y = i / W;
    c = mp[f][i]; e = c; sw = 0; swd = 0;
    for (int dy = -1; dy <= 1; dy++)
      for (int dx = -1; dx <= 1; dx++)
        if ((dx != 0 || dy != 0) && x + dx >= 0 && x + dx < W && y + dy >= 0 && y + dy < H) begin
          map_point_t q;
          q = mp[f][(y + dy) * W + x + dx];
          if (q.is_valid && q.validity > 0) begin sw += q.validity; swd += longint'(q.validity) * q.idepth; end
        end
    if (!c.is_valid && c.blacklisted >= -1 && sw > 12) begin
      e.idepth = fix_t'(swd / sw); e.idepth_var = 32'sd1677721; e.validity = 0; e.is_valid = 1;
      n_fill++;
    end
    chk(out_pt == e, $sformatf("point %0d,%0d frame %0d", x, y, f));
    n_out++;
  end
  final chk(n_fill > 3, "fills happened");
endmodule
