// mem_rd_ctrl: input memory controller. Reads a contiguous region of
// off-chip memory with full-speed bursts and delivers it as a stream of
// 64-bit words, one per cycle.
//
// A read job is started with start (one cycle) together with base (byte
// address, 8-byte aligned) and nwords (number of 64-bit words). The
// controller issues bursts of up to BURST_LEN beats on a simplified AXI4
// read channel (ar*/r*), keeping several bursts in flight as long as the
// internal FIFO has room for every beat already requested, so the R
// channel is never throttled by the controller and the bus can stream one
// beat per cycle. done pulses when the last word has left the FIFO.
// Burst length, FIFO depth and the credit scheme are this design's choice;
// the reference design only specifies burst reads and 64 bits per cycle.
module mem_rd_ctrl #(
  parameter int BURST_LEN  = 16,
  parameter int FIFO_DEPTH = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [31:0] base,
  input  logic [31:0] nwords,
  output logic        busy,
  output logic        done,
  // AXI4 read address / data (subset)
  output logic        ar_valid,
  input  logic        ar_ready,
  output logic [31:0] ar_addr,
  output logic [7:0]  ar_len,
  input  logic        r_valid,
  output logic        r_ready,
  input  logic [63:0] r_data,
  input  logic        r_last,
  // word stream
  output logic        out_valid,
  input  logic        out_ready,
  output logic [63:0] out_data
);
  localparam int LW = $clog2(FIFO_DEPTH) + 1;
  logic [31:0] req_left;       // words not yet requested
  logic [31:0] out_left;       // words not yet delivered
  logic [31:0] addr;
  logic [31:0] inflight;       // beats requested but not yet received
  logic [LW-1:0] level;
  logic [31:0] blen;
  logic fifo_in_ready, pop;

  assign blen     = (req_left < 32'(BURST_LEN)) ? req_left : 32'(BURST_LEN);
  assign ar_valid = busy && (req_left != 0) &&
                    (32'(level) + inflight + blen <= 32'(FIFO_DEPTH));
  assign ar_addr  = addr;
  assign ar_len   = 8'(blen - 1);
  assign r_ready  = fifo_in_ready;
  assign pop      = out_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; req_left <= '0; out_left <= '0;
      addr <= '0; inflight <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy     <= (nwords != 0);
        done     <= (nwords == 0);
        req_left <= nwords;
        out_left <= nwords;
        addr     <= base;
        inflight <= '0;
      end else begin
        if (ar_valid && ar_ready) begin
          req_left <= req_left - blen;
          addr     <= addr + (blen << 3);
        end
        inflight <= inflight + ((ar_valid && ar_ready) ? blen : 32'd0)
                             - ((r_valid && r_ready) ? 32'd1 : 32'd0);
        if (pop) begin
          out_left <= out_left - 1;
          if (out_left == 1) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
      end
    end

  stream_fifo #(.T(logic [63:0]), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n,
    .in_valid(r_valid), .in_ready(fifo_in_ready), .in_data(r_data),
    .out_valid, .out_ready, .out_data, .level
  );

  // credit scheme: the FIFO never refuses a beat that was requested
  a_no_drop: assert property (@(posedge clk) disable iff (!rst_n) r_valid |-> r_ready);
endmodule
