// unpack_unit: turns the 64-bit word stream of the input memory controller
// into keyframe map points. Each point is 24 bytes, three words, so one
// keypoint leaves every 3 cycles at full input rate. The unit also numbers
// the points in raster order and attaches their pixel coordinates (x, y),
// which the later units need for cache accesses and windows.
//
// Word order (this design's choice): word 0 = {idepth_var, idepth}, word 1
// = {idepth_var_smoothed, idepth_smoothed}, word 2 = {reserved/is_valid,
// blacklisted, validity}, lowest field in the low bits. The coordinate
// counter restarts with frame_start.
module unpack_unit
  import slam_pkg::*;
#(
  parameter int IMG_W = 640,
  parameter int IMG_H = 480
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        frame_start,
  input  logic        in_valid,
  output logic        in_ready,
  input  logic [63:0] in_data,
  output logic        out_valid,
  input  logic        out_ready,
  output job_t        out_job
);
  logic [1:0]  phase;
  logic [63:0] w0, w1;
  logic [15:0] cx, cy;

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      phase <= '0; out_valid <= 1'b0; cx <= '0; cy <= '0;
      w0 <= '0; w1 <= '0; out_job <= '0;
    end else begin
      if (frame_start) begin
        phase <= '0; cx <= '0; cy <= '0;
      end
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready && !frame_start) begin
        case (phase)
          2'd0: begin w0 <= in_data; phase <= 2'd1; end
          2'd1: begin w1 <= in_data; phase <= 2'd2; end
          default: begin
            phase <= 2'd0;
            out_valid <= 1'b1;
            out_job <= '0;
            out_job.pt.idepth              <= w0[31:0];
            out_job.pt.idepth_var          <= w0[63:32];
            out_job.pt.idepth_smoothed     <= w1[31:0];
            out_job.pt.idepth_var_smoothed <= w1[63:32];
            out_job.pt.validity            <= in_data[15:0];
            out_job.pt.blacklisted         <= in_data[31:16];
            out_job.pt.is_valid            <= in_data[32];
            out_job.pt.reserved            <= in_data[63:33];
            out_job.x <= cx;
            out_job.y <= cy;
            if (cx == 16'(IMG_W - 1)) begin
              cx <= '0;
              cy <= (cy == 16'(IMG_H - 1)) ? '0 : cy + 1'b1;
            end else cx <= cx + 1'b1;
          end
        endcase
      end
    end
endmodule
