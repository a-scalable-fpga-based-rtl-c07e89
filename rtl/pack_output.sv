// pack_output: pack and output controller. Reverses the input stage: each
// 24-byte map point is split into three 64-bit words (same layout as
// unpack_unit reads) and the words are written to off-chip memory with
// burst writes on a simplified AXI4 write channel (aw*/w*/b*).
//
// A job is started with start, base (byte address) and npoints. Words
// collect in a FIFO; a burst of BURST_LEN beats (or the remainder at the
// end) is issued once all its words are present, so the W channel streams
// without gaps. One burst is outstanding at a time: the next address is
// issued after the write response. done pulses after the last response.
// Burst length and the one-outstanding policy are this design's choices.
module pack_output
  import slam_pkg::*;
#(
  parameter int BURST_LEN  = 16,
  parameter int FIFO_DEPTH = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [31:0] base,
  input  logic [31:0] npoints,
  output logic        busy,
  output logic        done,
  input  logic        in_valid,
  output logic        in_ready,
  input  map_point_t  in_pt,
  // AXI4 write (subset)
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
  localparam int LW = $clog2(FIFO_DEPTH) + 1;
  // ---- pack: one point -> three words
  map_point_t hold;
  logic       holding;
  logic [1:0] ph;
  logic [63:0] word;
  logic       f_in_ready, f_out_valid, f_pop;
  logic [LW-1:0] level;

  always_comb
    case (ph)
      2'd0:    word = {hold.idepth_var, hold.idepth};
      2'd1:    word = {hold.idepth_var_smoothed, hold.idepth_smoothed};
      default: word = {hold.reserved, hold.is_valid, hold.blacklisted, hold.validity};
    endcase

  assign in_ready = !holding;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      hold <= '0; holding <= 1'b0; ph <= '0;
    end else if (!holding) begin
      if (in_valid) begin hold <= in_pt; holding <= 1'b1; ph <= '0; end
    end else if (f_in_ready) begin
      ph <= ph + 1'b1;
      if (ph == 2'd2) holding <= 1'b0;
    end

  stream_fifo #(.T(logic [63:0]), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n,
    .in_valid(holding), .in_ready(f_in_ready), .in_data(word),
    .out_valid(f_out_valid), .out_ready(f_pop), .out_data(w_data), .level
  );

  // ---- burst writer
  typedef enum logic [1:0] {W_IDLE, W_ADDR, W_DATA, W_RESP} wst_e;
  wst_e        ws;
  logic [31:0] left, addr, blen;
  logic [7:0]  beat;

  assign blen     = (left < 32'(BURST_LEN)) ? left : 32'(BURST_LEN);
  assign aw_valid = (ws == W_ADDR);
  assign aw_addr  = addr;
  assign aw_len   = 8'(blen - 1);
  assign w_valid  = (ws == W_DATA) && f_out_valid;
  assign w_last   = (32'(beat) == blen - 1);
  assign f_pop    = w_valid && w_ready;
  assign b_ready  = (ws == W_RESP);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      ws <= W_IDLE; left <= '0; addr <= '0; beat <= '0; busy <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      case (ws)
        W_IDLE: begin
          if (start && !busy) begin
            busy <= (npoints != 0);
            done <= (npoints == 0);
            left <= npoints * 3;
            addr <= base;
          end else if (busy && 32'(level) >= blen) ws <= W_ADDR;
        end
        W_ADDR: if (aw_ready) begin ws <= W_DATA; beat <= '0; end
        W_DATA: if (f_pop) begin
          beat <= beat + 1'b1;
          if (w_last) ws <= W_RESP;
        end
        default: if (b_valid) begin
          left <= left - blen;
          addr <= addr + (blen << 3);
          ws   <= W_IDLE;
          if (left == blen) begin busy <= 1'b0; done <= 1'b1; end
        end
      endcase
    end
endmodule
