// reg_slice: one-entry valid/ready pipeline register. Carries the
// metadata of a map point through a unit of the fast-rate pipeline
// alongside that unit's sample stream. Latency one cycle; accepts a new
// word in the cycle the held word is taken, so it sustains one word per
// cycle.
module reg_slice #(
  parameter type T = logic [31:0]
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  T     in_data,
  output logic out_valid,
  input  logic out_ready,
  output T     out_data
);
  assign in_ready = !out_valid || out_ready;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) out_data <= in_data;
    end
endmodule
