// tb_depth_mapper_full: the same end-to-end map update as
// tb_depth_mapper_top, with the coprocessor at its default 640x480 size.
module tb_depth_mapper_full;
  localparam int W = 640, H = 480;
  depth_mapper_top dut (.*);
`include "tb_top_body.svh"
endmodule
