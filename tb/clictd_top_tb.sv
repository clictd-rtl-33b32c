// clictd_top_tb: end-to-end test of the chip's digital part on a reduced
// 3 x 8 pixel matrix (the logic of every pixel and column is the same as at
// full size). See clictd_top_tb_body.svh for what is driven and checked.
module clictd_top_tb;
  localparam int NC = 3;
  localparam int NR = 8;

  `include "tb/clictd_top_tb_body.svh"

  clictd_top #(.NCOLS(NC), .NROWS(NR)) dut (.*);
endmodule
