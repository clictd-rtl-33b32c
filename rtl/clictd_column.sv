// clictd_column: one column of CLICTD pixels.
//
// NROWS pixels (128 in the chip) share the acquisition and readout control
// lines. Their configuration registers and their readout registers are each
// chained: row 0 is nearest the periphery, so its readout bits leave the
// column first, and `ro_in` feeds the far end (row NROWS-1). The configuration
// chain runs the other way: `cfg_in` enters row 0 and `cfg_out` leaves row
// NROWS-1. `clk_active` reports which pixels currently run their gated clock.
// The 128 pixels per column are the chip's; the chain directions and the row
// order are this implementation's choice.
module clictd_column
  import clictd_pkg::*;
#(
  parameter int unsigned NROWS = N_ROWS
) (
  input  logic                                    clk,
  input  logic                                    clk_ro,
  input  logic                                    rst_n,
  input  logic                                    acq,
  input  logic                                    frame_start,
  input  logic                                    tot_tick,
  input  acq_mode_e                               mode,
  input  logic [NROWS-1:0][N_SUB-1:0]             disc,
  output logic [NROWS-1:0][N_SUB-1:0][TUNE_W-1:0] tune,
  input  logic                                    cfg_shift,
  input  logic                                    cfg_in,
  output logic                                    cfg_out,
  input  logic                                    ro_load,
  input  logic                                    ro_shift,
  input  logic                                    ro_in,
  output logic                                    ro_out,
  output logic [NROWS-1:0]                        clk_active
);
  logic [NROWS:0] cfg_chain;
  logic [NROWS:0] ro_chain;

  assign cfg_chain[0]     = cfg_in;
  assign cfg_out          = cfg_chain[NROWS];
  assign ro_chain[NROWS]  = ro_in;
  assign ro_out           = ro_chain[0];

  for (genvar r = 0; r < NROWS; r++) begin : g_row
    clictd_pixel u_pix (
      .clk         (clk),
      .clk_ro      (clk_ro),
      .rst_n       (rst_n),
      .acq         (acq),
      .frame_start (frame_start),
      .tot_tick    (tot_tick),
      .mode        (mode),
      .disc        (disc[r]),
      .tune        (tune[r]),
      .cfg_shift   (cfg_shift),
      .cfg_in      (cfg_chain[r]),
      .cfg_out     (cfg_chain[r+1]),
      .ro_load     (ro_load),
      .ro_shift    (ro_shift),
      .ro_in       (ro_chain[r+1]),
      .ro_out      (ro_chain[r]),
      .clk_active  (clk_active[r])
    );
  end
endmodule
