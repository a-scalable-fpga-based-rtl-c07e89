// kp_grad_check: keypoint and gradient check. For each keyframe point
// arriving in raster order it computes, on the fly, the largest intensity
// gradient in the 3x3 neighbourhood of the pixel and decides whether the
// point is worth an epipolar scan.
//
// Gradient of a pixel = |I(x+1,y)-I(x,y)| + |I(x,y+1)-I(x,y)|, taken from
// one 2x2 window read of the keyframe cache. The unit keeps the column
// maxima of the three columns x-1, x, x+1; for each new point only column
// x+1 is read (three window reads, rows y-1..y+1), at the start of a row
// columns 0 and 1 (six reads). Pixels whose forward neighbour lies outside
// the image count as gradient 0. Rate: one point per 5 cycles inside a row
// (accept, 3 reads, last read returns with the result), 8 cycles for the first point of a row.
//
// Fitness (LSD-SLAM style): a valid point is scanned if its max gradient
// reaches grad_update; an invalid one if it reaches grad_create and its
// blacklist counter is at least bl_min. Other points are marked
// ST_SKIP_GRAD and still forwarded, as later stages need every point.
// The gradient formula, neighbourhood size and criteria are this design's
// choice; the reference design names the function only.
module kp_grad_check
  import slam_pkg::*;
#(
  parameter int IMG_W = 640,
  parameter int IMG_H = 480
) (
  input  logic        clk,
  input  logic        rst_n,
  input  params_t     prm,
  input  logic        in_valid,
  output logic        in_ready,
  input  job_t        in_job,
  output logic        out_valid,
  input  logic        out_ready,
  output job_t        out_job,
  // keyframe cache read port
  output logic        rd_en,
  output logic [15:0] rd_x,
  output logic [15:0] rd_y,
  input  pix_t [3:0]  rd_win
);
  typedef enum logic [1:0] {S_IDLE, S_READ} state_e;
  state_e      state;
  job_t        job;
  logic [2:0]  k;           // read issue index
  logic [2:0]  nreads;
  logic [15:0] cm [3];      // column maxima x-1, x, x+1
  logic [15:0] cur;         // running column maximum
  logic        cap;         // a read returns this cycle
  logic        cap_ok;      // its pixel has a forward neighbour
  logic [1:0]  cap_row;     // row index 0..2 of the returning read
  logic signed [17:0] rr;
  logic [15:0] col, g, g_new, mg;

  assign in_ready = (state == S_IDLE) && (!out_valid || out_ready);

  always_comb begin
    col  = (job.x == 0) ? ((k < 3) ? 16'd0 : 16'd1) : job.x + 16'd1;
    rr   = 18'(signed'({2'b0, job.y})) - 18'sd1 + 18'(k % 3);
    rd_en = (state == S_READ) && (k < nreads);
    rd_x = col;
    rd_y = (rr < 0) ? 16'd0 : rr[15:0];
  end

  function automatic logic [15:0] absd(pix_t a, pix_t b);
    return (a > b) ? 16'(a - b) : 16'(b - a);
  endfunction

  always_comb begin
    g     = absd(rd_win[1], rd_win[0]) + absd(rd_win[2], rd_win[0]);
    g_new = (cap && cap_ok && g > cur) ? g : cur;
    // maximum over columns x-1, x (registered) and x+1 (arriving now)
    mg    = cm[1];
    if (cm[2] > mg) mg = cm[2];
    if (g_new > mg) mg = g_new;
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      state <= S_IDLE; job <= '0; k <= '0; nreads <= '0; cur <= '0;
      cap <= 1'b0; cap_ok <= 1'b0; cap_row <= '0;
      cm[0] <= '0; cm[1] <= '0; cm[2] <= '0;
      out_valid <= 1'b0; out_job <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      cap <= rd_en;
      cap_ok <= (rr >= 0) && (rr <= 18'(IMG_H - 2)) && (col <= 16'(IMG_W - 2));
      cap_row <= 2'(k % 3);
      case (state)
        S_IDLE: if (in_valid && in_ready) begin
          job    <= in_job;
          k      <= '0;
          cur    <= '0;
          nreads <= (in_job.x == 0) ? 3'd6 : 3'd3;
          if (in_job.x == 0) cm[2] <= '0;   // column -1 of the new row
          state  <= S_READ;
        end
        S_READ: begin
          if (k < nreads) k <= k + 1'b1;
          if (cap) begin
            if (cap_row == 2'd2) begin
              cm[0] <= cm[1]; cm[1] <= cm[2]; cm[2] <= g_new;
              cur   <= '0;
            end else cur <= g_new;
          end
          if (cap && cap_row == 2'd2 && k == nreads) begin
            // last column arrived: decide and emit
            out_valid <= 1'b1;
            out_job   <= job;
            out_job.max_grad <= mg;
            if (job.pt.is_valid)
              out_job.st <= (mg >= prm.grad_update) ? ST_SCAN : ST_SKIP_GRAD;
            else
              out_job.st <= (mg >= prm.grad_create && job.pt.blacklisted >= prm.bl_min)
                            ? ST_SCAN : ST_SKIP_GRAD;
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
endmodule
