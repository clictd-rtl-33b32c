// clictd_top: digital part of the CLICTD monolithic pixel sensor chip.
//
// A matrix of NCOLS x NROWS pixels (16 x 128 in the chip), each split into
// eight sub-pixels with their own analog front-end, plus the periphery that
// synchronises the shutter, generates the ToT time base and reads the matrix
// out serially at 40 MHz with one bit per empty pixel.
//
// The analog front-ends are outside this block: their discriminator outputs
// arrive on `disc` and their 3-bit threshold tuning codes leave on `tune`.
// Operating cycle: load the configuration through cfg_in/cfg_shift
// (32 bits per pixel, the last pixel's word first), open the shutter for a
// frame, close it, then pulse ro_start and collect ro_data while ro_valid is
// high until ro_done. Stream order: column 0 row 0 first, then up column 0,
// then column 1, and so on. Each pixel sends a flag bit; a hit pixel follows
// it with {hits[7:0], toa[7:0], tot[4:0]} LSB first.
// The matrix size, the two clock rates, the per-pixel measurement and the
// compressed serial readout follow the published chip. The single chain
// through all columns, the configuration chain and the global settings as
// plain ports (the chip's slow-control interface is not modelled) are this
// implementation's choices.
module clictd_top
  import clictd_pkg::*;
#(
  parameter int unsigned NCOLS = N_COLS,
  parameter int unsigned NROWS = N_ROWS
) (
  input  logic                                               clk,     // 100 MHz
  input  logic                                               clk_ro,  // 40 MHz
  input  logic                                               rst_n,
  input  logic                                               shutter,
  input  acq_mode_e                                          mode,
  input  logic [RANGE_W-1:0]                                 tot_range,
  input  logic [NCOLS-1:0][NROWS-1:0][N_SUB-1:0]             disc,
  output logic [NCOLS-1:0][NROWS-1:0][N_SUB-1:0][TUNE_W-1:0] tune,
  input  logic                                               cfg_shift,
  input  logic                                               cfg_in,
  output logic                                               cfg_out,
  input  logic                                               ro_start,
  output logic                                               ro_data,
  output logic                                               ro_valid,
  output logic                                               ro_busy,
  output logic                                               ro_done,
  output logic [15:0]                                        ro_n_hit,
  output logic [NCOLS-1:0][NROWS-1:0]                        clk_active
);
  logic acq, frame_start, tot_tick;
  logic ro_load, ro_shift;
  logic [NCOLS:0] cfg_chain;
  logic [NCOLS:0] ro_chain;

  acq_ctrl u_acq (
    .clk         (clk),
    .rst_n       (rst_n),
    .shutter     (shutter),
    .tot_range   (tot_range),
    .acq         (acq),
    .frame_start (frame_start),
    .tot_tick    (tot_tick)
  );

  assign cfg_chain[0]     = cfg_in;
  assign cfg_out          = cfg_chain[NCOLS];
  assign ro_chain[NCOLS]  = 1'b0;

  for (genvar c = 0; c < NCOLS; c++) begin : g_col
    clictd_column #(.NROWS(NROWS)) u_col (
      .clk         (clk),
      .clk_ro      (clk_ro),
      .rst_n       (rst_n),
      .acq         (acq),
      .frame_start (frame_start),
      .tot_tick    (tot_tick),
      .mode        (mode),
      .disc        (disc[c]),
      .tune        (tune[c]),
      .cfg_shift   (cfg_shift),
      .cfg_in      (cfg_chain[c]),
      .cfg_out     (cfg_chain[c+1]),
      .ro_load     (ro_load),
      .ro_shift    (ro_shift),
      .ro_in       (ro_chain[c+1]),
      .ro_out      (ro_chain[c]),
      .clk_active  (clk_active[c])
    );
  end

  readout_ctrl #(.NPIX(NCOLS * NROWS)) u_ro (
    .clk        (clk_ro),
    .rst_n      (rst_n),
    .start      (ro_start),
    .ser_in     (ro_chain[0]),
    .ro_load    (ro_load),
    .ro_shift   (ro_shift),
    .dout       (ro_data),
    .dout_valid (ro_valid),
    .busy       (ro_busy),
    .done       (ro_done),
    .n_hit_pix  (ro_n_hit)
  );

  // The readout samples the pixel counters without synchronisers: it must not
  // be started while a frame is open.
  a_ro_after_frame: assert property (@(posedge clk_ro) disable iff (!rst_n)
                                     ro_start |-> !acq && !shutter);
endmodule
