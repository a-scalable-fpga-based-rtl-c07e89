// stream_fifo: synchronous valid/ready FIFO used as the elastic buffer
// between processing units. The units of the pipeline run at different and
// data-dependent rates; these buffers let them work asynchronously and hide
// the latency of variable-length epipolar scans.
//
// Interface: in_valid/in_ready/in_data accepts a word when both are high;
// out_valid/out_ready/out_data presents the oldest word. First-word
// latency is one cycle (write, then visible). Full throughput of one word
// per cycle, also when full and read in the same cycle. Depth is a power
// of two; the reference design only says the buffers are large, so 64 is
// this design's default.
module stream_fifo #(
  parameter type T     = logic [31:0],
  parameter int  DEPTH = 64
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  T     in_data,
  output logic out_valid,
  input  logic out_ready,
  output T     out_data,
  output logic [$clog2(DEPTH):0] level
);
  localparam int AW = $clog2(DEPTH);
  T mem [DEPTH];
  logic [AW:0] wp, rp;
  logic push, pop;

  assign level     = wp - rp;
  assign in_ready  = (level != (AW+1)'(DEPTH));
  assign out_valid = (level != '0);
  assign out_data  = mem[rp[AW-1:0]];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  always_ff @(posedge clk) if (push) mem[wp[AW-1:0]] <= in_data;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      wp <= '0; rp <= '0;
    end else begin
      if (push) wp <= wp + 1'b1;
      if (pop)  rp <= rp + 1'b1;
    end

  // a producer must hold its word until it is taken
  property p_hold;
    @(posedge clk) disable iff (!rst_n) in_valid && !in_ready |=> in_valid;
  endproperty
  a_hold: assert property (p_hold);
endmodule
