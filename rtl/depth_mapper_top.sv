// depth_mapper_top: semi-dense depth estimation coprocessor. One map
// update refines the inverse depth of every point of a keyframe by
// searching along its epipolar line in the current camera frame.
//
// Dataflow (one map point at a time, in raster order):
//   mem_rd_ctrl (64-bit burst reads) -> unpack_unit (1 point / 3 words)
//   -> kp_grad_check (1 point / 5 cycles) -> epipolar_unit
//   -> FIFO -> fast-rate pipeline: gen_scan_points -> cache_req_handler
//      -> subpixel_interp -> lpu (one scan step per cycle)
//   -> FIFO -> new_depth_calc -> subpixel_stereo -> depth_integration
//   -> fill_gaps_filter -> regularize_filter -> pack_output (burst writes)
// Two on-chip image caches serve the scan: the keyframe cache (read by the
// gradient check and the 5-point pattern) and the camera frame cache (read
// by the cache request handler). Both are burst-loaded through the input
// memory controller before the map stream when the host asks for it.
// Points that need no scan travel through every unit in one cycle, which
// is what lets the fast-rate pipeline run far below the worst-case load.
//
// Interfaces: host slave bus and irq (see ctrl_regs), an AXI4-style read
// master for the input DMA and a write master for the output DMA, both
// 64 bits wide. All units share one clock.
module depth_mapper_top
  import slam_pkg::*;
#(
  parameter int IMG_W = 640,
  parameter int IMG_H = 480
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        host_we,
  input  logic        host_re,
  input  logic [7:0]  host_addr,
  input  logic [31:0] host_wdata,
  output logic [31:0] host_rdata,
  output logic        irq,
  output logic        ar_valid,
  input  logic        ar_ready,
  output logic [31:0] ar_addr,
  output logic [7:0]  ar_len,
  input  logic        r_valid,
  output logic        r_ready,
  input  logic [63:0] r_data,
  input  logic        r_last,
  output logic        aw_valid,
  input  logic        aw_ready,
  output logic [31:0] aw_addr,
  output logic [7:0]  aw_len,
  output logic        w_valid,
  input  logic        w_ready,
  output logic [63:0] w_data,
  output logic        w_last,
  input  logic        b_valid,
  output logic        b_ready
);
  params_t prm;
  logic rd_start, rd_done, rd_busy, wr_start, wr_done, wr_busy, frame_start, busy;
  logic [31:0] rd_base, rd_nwords, wr_base, wr_npoints;
  logic [1:0]  rd_dest;

  ctrl_regs #(.IMG_W(IMG_W), .IMG_H(IMG_H)) u_ctrl (
    .clk, .rst_n, .host_we, .host_re, .host_addr, .host_wdata, .host_rdata, .irq,
    .prm, .rd_start, .rd_base, .rd_nwords, .rd_done, .rd_dest, .frame_start,
    .wr_start, .wr_base, .wr_npoints, .wr_done, .busy
  );

  // ---------------- input memory controller and its three destinations
  logic        w64_valid, w64_ready;
  logic [63:0] w64;
  logic [31:0] cache_wa;
  logic        up_in_ready;

  mem_rd_ctrl u_rd (
    .clk, .rst_n, .start(rd_start), .base(rd_base), .nwords(rd_nwords),
    .busy(rd_busy), .done(rd_done),
    .ar_valid, .ar_ready, .ar_addr, .ar_len, .r_valid, .r_ready, .r_data, .r_last,
    .out_valid(w64_valid), .out_ready(w64_ready), .out_data(w64)
  );
  assign w64_ready = (rd_dest == 2'd0) ? up_in_ready : 1'b1;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) cache_wa <= '0;
    else if (rd_start) cache_wa <= '0;
    else if (w64_valid && w64_ready && rd_dest != 2'd0) cache_wa <= cache_wa + 1;

  logic [1:0]        kf_en;
  logic [1:0] [15:0] kf_x, kf_y;
  pix_t [1:0] [3:0]  kf_win;
  logic [15:0]       g_x, g_y, e_x, e_y;
  logic              g_en, e_en;

  assign kf_en = {e_en, g_en};
  assign kf_x  = {e_x, g_x};
  assign kf_y  = {e_y, g_y};

  frame_cache #(.IMG_W(IMG_W), .IMG_H(IMG_H), .NRD(2)) u_kf_cache (
    .clk, .wr_en(w64_valid && rd_dest == 2'd1), .wr_addr(cache_wa), .wr_data(w64),
    .rd_en(kf_en), .rd_x(kf_x), .rd_y(kf_y), .rd_win(kf_win)
  );

  logic        fr_en;
  logic [15:0] fr_x, fr_y;
  pix_t [0:0] [3:0] fr_win;
  frame_cache #(.IMG_W(IMG_W), .IMG_H(IMG_H), .NRD(1)) u_fr_cache (
    .clk, .wr_en(w64_valid && rd_dest == 2'd2), .wr_addr(cache_wa), .wr_data(w64),
    .rd_en(fr_en), .rd_x(fr_x), .rd_y(fr_y), .rd_win(fr_win)
  );

  // ---------------- slow-rate input stage
  logic up_valid, up_ready, q0_valid, q0_ready, gc_valid, gc_ready, ep_valid, ep_ready;
  job_t up_job, q0_job, gc_job, ep_job;

  unpack_unit #(.IMG_W(IMG_W), .IMG_H(IMG_H)) u_unpack (
    .clk, .rst_n, .frame_start,
    .in_valid(w64_valid && rd_dest == 2'd0), .in_ready(up_in_ready), .in_data(w64),
    .out_valid(up_valid), .out_ready(up_ready), .out_job(up_job)
  );

  stream_fifo #(.T(job_t), .DEPTH(8)) u_q0 (
    .clk, .rst_n, .in_valid(up_valid), .in_ready(up_ready), .in_data(up_job),
    .out_valid(q0_valid), .out_ready(q0_ready), .out_data(q0_job), .level()
  );

  kp_grad_check #(.IMG_W(IMG_W), .IMG_H(IMG_H)) u_grad (
    .clk, .rst_n, .prm,
    .in_valid(q0_valid), .in_ready(q0_ready), .in_job(q0_job),
    .out_valid(gc_valid), .out_ready(gc_ready), .out_job(gc_job),
    .rd_en(g_en), .rd_x(g_x), .rd_y(g_y), .rd_win(kf_win[0])
  );

  epipolar_unit #(.IMG_W(IMG_W), .IMG_H(IMG_H)) u_epi (
    .clk, .rst_n, .prm,
    .in_valid(gc_valid), .in_ready(gc_ready), .in_job(gc_job),
    .out_valid(ep_valid), .out_ready(ep_ready), .out_job(ep_job),
    .rd_en(e_en), .rd_x(e_x), .rd_y(e_y), .rd_win(kf_win[1])
  );

  // ---------------- large FIFO into the fast-rate pipeline
  logic q1_valid, q1_ready;
  job_t q1_job;
  stream_fifo #(.T(job_t), .DEPTH(64)) u_q1 (
    .clk, .rst_n, .in_valid(ep_valid), .in_ready(ep_ready), .in_data(ep_job),
    .out_valid(q1_valid), .out_ready(q1_ready), .out_data(q1_job), .level()
  );

  // ---------------- fast-rate pipeline
  logic m1_valid, m1_ready, m2_valid, m2_ready, m3_valid, m3_ready;
  job_t m1_job, m2_job, m3_job;
  logic s_valid, s_ready, wn_valid, wn_ready, is_valid, is_ready;
  sample_t  smp;
  window_t  win;
  isample_t isamp;

  gen_scan_points u_gen (
    .clk, .rst_n, .in_valid(q1_valid), .in_ready(q1_ready), .in_job(q1_job),
    .meta_valid(m1_valid), .meta_ready(m1_ready), .meta_job(m1_job),
    .smp_valid(s_valid), .smp_ready(s_ready), .smp
  );

  cache_req_handler u_creq (
    .clk, .rst_n,
    .meta_in_valid(m1_valid), .meta_in_ready(m1_ready), .meta_in(m1_job),
    .meta_out_valid(m2_valid), .meta_out_ready(m2_ready), .meta_out(m2_job),
    .smp_valid(s_valid), .smp_ready(s_ready), .smp,
    .win_valid(wn_valid), .win_ready(wn_ready), .win,
    .rd_en(fr_en), .rd_x(fr_x), .rd_y(fr_y), .rd_win(fr_win[0])
  );

  subpixel_interp u_interp (
    .clk, .rst_n,
    .meta_in_valid(m2_valid), .meta_in_ready(m2_ready), .meta_in(m2_job),
    .meta_out_valid(m3_valid), .meta_out_ready(m3_ready), .meta_out(m3_job),
    .win_valid(wn_valid), .win_ready(wn_ready), .win,
    .is_valid, .is_ready, .is(isamp)
  );

  logic lp_valid, lp_ready;
  job_t lp_job;
  lpu u_lpu (
    .clk, .rst_n,
    .meta_valid(m3_valid), .meta_ready(m3_ready), .meta_in(m3_job),
    .is_valid, .is_ready, .is(isamp),
    .out_valid(lp_valid), .out_ready(lp_ready), .out_job(lp_job)
  );

  // ---------------- large FIFO out of the fast-rate pipeline
  logic q2_valid, q2_ready;
  job_t q2_job;
  stream_fifo #(.T(job_t), .DEPTH(64)) u_q2 (
    .clk, .rst_n, .in_valid(lp_valid), .in_ready(lp_ready), .in_data(lp_job),
    .out_valid(q2_valid), .out_ready(q2_ready), .out_data(q2_job), .level()
  );

  // ---------------- depth update and filters
  logic nd_valid, nd_ready, ss_valid, ss_ready, di_valid, di_ready;
  job_t nd_job, ss_job, di_job;
  logic refined, fused, created, filled;

  new_depth_calc u_newd (
    .clk, .rst_n, .prm, .in_valid(q2_valid), .in_ready(q2_ready), .in_job(q2_job),
    .out_valid(nd_valid), .out_ready(nd_ready), .out_job(nd_job)
  );

  subpixel_stereo u_sub (
    .clk, .rst_n, .in_valid(nd_valid), .in_ready(nd_ready), .in_job(nd_job),
    .out_valid(ss_valid), .out_ready(ss_ready), .out_job(ss_job), .refined
  );

  depth_integration u_integ (
    .clk, .rst_n, .in_valid(ss_valid), .in_ready(ss_ready), .in_job(ss_job),
    .out_valid(di_valid), .out_ready(di_ready), .out_job(di_job), .fused, .created
  );

  logic fg_valid, fg_ready, rg_valid, rg_ready;
  map_point_t fg_pt, rg_pt;

  fill_gaps_filter #(.IMG_W(IMG_W), .IMG_H(IMG_H)) u_fill (
    .clk, .rst_n, .prm, .in_valid(di_valid), .in_ready(di_ready), .in_pt(di_job.pt),
    .out_valid(fg_valid), .out_ready(fg_ready), .out_pt(fg_pt), .filled
  );

  regularize_filter #(.IMG_W(IMG_W), .IMG_H(IMG_H)) u_reg (
    .clk, .rst_n, .in_valid(fg_valid), .in_ready(fg_ready), .in_pt(fg_pt),
    .out_valid(rg_valid), .out_ready(rg_ready), .out_pt(rg_pt)
  );

  pack_output u_pack (
    .clk, .rst_n, .start(wr_start), .base(wr_base), .npoints(wr_npoints),
    .busy(wr_busy), .done(wr_done),
    .in_valid(rg_valid), .in_ready(rg_ready), .in_pt(rg_pt),
    .aw_valid, .aw_ready, .aw_addr, .aw_len, .w_valid, .w_ready, .w_data, .w_last,
    .b_valid, .b_ready
  );
endmodule
