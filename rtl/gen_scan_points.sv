// gen_scan_points: first unit of the fast-rate pipeline. For each map
// point it passes the point's metadata on the metadata channel; for a
// point marked ST_SCAN it then emits nsteps+5 sample coordinates along the
// epipolar line, start + i*inc, one per cycle, the last one flagged. These
// are the pre-computed cache accesses of the scan: the later units act
// only on the data that comes back.
//
// Timing: one cycle to take a point (its metadata leaves one cycle
// later); a skipped point therefore costs one cycle, a scanned one
// nsteps+6. Back-pressure on either output stalls the unit.
module gen_scan_points
  import slam_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  output logic    in_ready,
  input  job_t    in_job,
  output logic    meta_valid,
  input  logic    meta_ready,
  output job_t    meta_job,
  output logic    smp_valid,
  input  logic    smp_ready,
  output sample_t smp
);
  logic        gen;
  fix_t        px, py, ix, iy;
  logic [16:0] left;

  assign in_ready  = !gen && (!meta_valid || meta_ready);
  assign smp_valid = gen;
  assign smp.x     = px;
  assign smp.y     = py;
  assign smp.last  = (left == 17'd1);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      gen <= 1'b0; px <= '0; py <= '0; ix <= '0; iy <= '0; left <= '0;
      meta_valid <= 1'b0; meta_job <= '0;
    end else begin
      if (meta_valid && meta_ready) meta_valid <= 1'b0;
      if (in_valid && in_ready) begin
        meta_valid <= 1'b1;
        meta_job   <= in_job;
        if (in_job.st == ST_SCAN) begin
          gen  <= 1'b1;
          px   <= in_job.start_x;
          py   <= in_job.start_y;
          ix   <= in_job.inc_x;
          iy   <= in_job.inc_y;
          left <= 17'(in_job.nsteps) + 17'd5;
        end
      end
      if (gen && smp_ready) begin
        px   <= px + ix;
        py   <= py + iy;
        left <= left - 1'b1;
        if (left == 17'd1) gen <= 1'b0;
      end
    end
endmodule
