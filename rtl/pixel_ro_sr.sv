// pixel_ro_sr: compressing readout shift register of one pixel.
//
// On `load` the register takes the pixel's flag (1 = a sub-pixel was hit in
// the frame) and its 21-bit data word. The registers of all pixels are
// chained; each `shift` cycle moves the chain one bit towards the periphery.
// A hit pixel is 22 bits long in the chain: it sends its flag, then the data
// word LSB first, then passes on what came from upstream. A pixel without a
// hit bypasses its data bits and is one bit long, sending only its 0 flag.
// This gives the published chip's compression: the frame data leave the chip
// only for pixels that saw a particle, and one bit for every other pixel. The
// bit order and the bypass structure are this implementation's choice.
module pixel_ro_sr
  import clictd_pkg::*;
(
  input  logic      clk,       // 40 MHz readout clock
  input  logic      rst_n,
  input  logic      load,
  input  logic      shift,
  input  logic      flag_in,   // pixel was hit
  input  pix_data_t data_in,
  input  logic      ser_in,    // from the upstream pixel
  output logic      ser_out    // towards the periphery
);
  logic              long_q;   // this pixel's segment is 22 bits long
  logic              head;     // bit presented to the downstream pixel
  logic [DATA_W-1:0] body;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      long_q <= 1'b0;
      head   <= 1'b0;
      body   <= '0;
    end else if (load) begin
      long_q <= flag_in;
      head   <= flag_in;
      body   <= data_in;
    end else if (shift) begin
      if (long_q) begin
        head <= body[0];
        body <= {ser_in, body[DATA_W-1:1]};
      end else begin
        head <= ser_in;
      end
    end
  end

  assign ser_out = head;
endmodule
