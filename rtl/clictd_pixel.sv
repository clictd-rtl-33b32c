// clictd_pixel: digital logic of one 300 um x 30 um CLICTD pixel.
//
// Combines the configuration register (mask and tuning codes), the hit /
// ToA / ToT measurement on the gated 100 MHz clock and the compressing
// readout shift register on the 40 MHz clock. The measurement results are
// static once the frame has closed, so the readout register samples them
// across the clock boundary without synchronisers; the readout must only be
// started after the shutter has closed. The tuning codes leave the block for
// the analog front-ends; the discriminator outputs come back in.
module clictd_pixel
  import clictd_pkg::*;
(
  input  logic                         clk,          // 100 MHz
  input  logic                         clk_ro,       // 40 MHz
  input  logic                         rst_n,
  // acquisition control, from the periphery
  input  logic                         acq,
  input  logic                         frame_start,
  input  logic                         tot_tick,
  input  acq_mode_e                    mode,
  // analog front-ends
  input  logic [N_SUB-1:0]             disc,
  output logic [N_SUB-1:0][TUNE_W-1:0] tune,
  // configuration chain
  input  logic                         cfg_shift,
  input  logic                         cfg_in,
  output logic                         cfg_out,
  // readout chain
  input  logic                         ro_load,
  input  logic                         ro_shift,
  input  logic                         ro_in,
  output logic                         ro_out,
  output logic                         clk_active
);
  pix_cfg_t  cfg;
  pix_data_t data;

  pixel_config u_cfg (
    .clk       (clk_ro),
    .rst_n     (rst_n),
    .cfg_shift (cfg_shift),
    .cfg_in    (cfg_in),
    .cfg_out   (cfg_out),
    .cfg       (cfg)
  );

  assign tune = cfg.tune;

  pixel_measure u_meas (
    .clk         (clk),
    .rst_n       (rst_n),
    .acq         (acq),
    .frame_start (frame_start),
    .tot_tick    (tot_tick),
    .mode        (mode),
    .disc        (disc),
    .mask        (cfg.mask),
    .hits        (data.hits),
    .toa         (data.toa),
    .tot         (data.tot),
    .clk_active  (clk_active)
  );

  pixel_ro_sr u_sr (
    .clk     (clk_ro),
    .rst_n   (rst_n),
    .load    (ro_load),
    .shift   (ro_shift),
    .flag_in (|data.hits),
    .data_in (data),
    .ser_in  (ro_in),
    .ser_out (ro_out)
  );
endmodule
