// clictd_top_full_tb: end-to-end test of the chip's digital part at its full
// size, 16 columns x 128 pixels x 8 sub-pixels, with the top's default
// parameters. See clictd_top_tb_body.svh for what is driven and checked.
module clictd_top_full_tb;
  localparam int NC = clictd_pkg::N_COLS;
  localparam int NR = clictd_pkg::N_ROWS;

  `include "tb/clictd_top_tb_body.svh"

  clictd_top dut (.*);
endmodule
