// tb_depth_mapper_top: end-to-end test of one map update on a reduced
// 64x24 image (see tb_top_body.svh for the scene and the checks).
module tb_depth_mapper_top;
  localparam int W = 64, H = 24;
  depth_mapper_top #(.IMG_W(W), .IMG_H(H)) dut (.*);
`include "tb_top_body.svh"
endmodule
