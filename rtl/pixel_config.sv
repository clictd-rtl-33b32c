// pixel_config: configuration register of one pixel.
//
// Holds, for each of the eight sub-pixels, a mask bit and the 3-bit code of
// the front-end threshold tuning DAC (pix_cfg_t, 32 bits). The registers of
// all pixels form one shift chain clocked by the 40 MHz readout clock: while
// `cfg_shift` is high the word moves one bit per cycle towards the MSB,
// entering at `cfg_in` (bit 0) and leaving at `cfg_out` (bit 31).
// Reset clears it (nothing masked, tuning code 0). The mask bits and the 3-bit
// tuning DAC are the published chip's; the serial loading scheme and the
// word layout are this implementation's choice, since the paper does not say
// how the matrix is configured.
module pixel_config
  import clictd_pkg::*;
(
  input  logic     clk,        // readout / configuration clock
  input  logic     rst_n,
  input  logic     cfg_shift,
  input  logic     cfg_in,
  output logic     cfg_out,
  output pix_cfg_t cfg
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         cfg <= '0;
    else if (cfg_shift) cfg <= {cfg[CFG_W-2:0], cfg_in};
  end

  assign cfg_out = cfg[CFG_W-1];
endmodule
