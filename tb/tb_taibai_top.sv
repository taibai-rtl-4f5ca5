// tb_taibai_top: end-to-end test of the chip on a reduced 3 x 2 mesh with
// reduced memories (see tb_top_body.svh for the network, the stimulus and the
// checks). The same body can drive a larger mesh; the default 11 x 12 chip
// is too large to build for simulation in reasonable time.
`include "tb_check.svh"
module tb_taibai_top;
  import taibai_pkg::*;
  `TB_COUNTERS
  localparam int MX = 3, MY = 2;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  taibai_top #(.MESH_X(MX), .MESH_Y(MY), .IMEM_WORDS(128), .DMEM_WORDS(4096),
               .FIN_DT_DEPTH(2048), .FIN_IT_DEPTH(1024), .FOUT_DT_DEPTH(2048),
               .FOUT_IT_DEPTH(256)) dut (.*);
  `include "tb_top_body.svh"
endmodule
