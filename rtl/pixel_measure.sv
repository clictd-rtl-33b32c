// pixel_measure: on-pixel hit, ToA and ToT logic of one CLICTD pixel.
//
// The eight sub-pixel discriminator outputs are masked and sampled on the
// 100 MHz acquisition clock. During a frame (`acq`):
//   * each sub-pixel sets its own hit flag when its sampled output is high;
//   * the eight outputs are combined by an OR, and the combined signal drives
//     the timing measurement:
//       MODE_TOA_TOT - `toa` counts clock cycles (10 ns bins) from the first
//                      sampled hit to the end of the frame, saturating at 255;
//                      `tot` counts the ToT strobes (`tot_tick`) seen while
//                      the OR is high, summed over all hits in the frame and
//                      saturating at 31;
//       MODE_COUNT   - {toa,tot} form one 13-bit counter of rising edges of
//                      the OR, saturating at 8191.
// `frame_start` clears flags and counters. The counters sit on a gated clock
// that only runs during frame_start and, within a frame, from the first hit on;
// outside the frame the counters hold their values for readout.
// The hit flags, the OR, the 8-bit ToA, the 5-bit ToT, the masking and the
// clock gating follow the published chip. Sampling the discriminators
// synchronously, the ToA reference (end of frame), saturation and the
// photon-counting register layout are this implementation's choices.
module pixel_measure
  import clictd_pkg::*;
(
  input  logic             clk,          // 100 MHz acquisition clock
  input  logic             rst_n,
  input  logic             acq,          // frame open
  input  logic             frame_start,  // clear strobe, first cycle of frame
  input  logic             tot_tick,     // ToT counting strobe
  input  acq_mode_e        mode,
  input  logic [N_SUB-1:0] disc,         // discriminator outputs
  input  logic [N_SUB-1:0] mask,         // 1 = sub-pixel masked
  output logic [N_SUB-1:0] hits,         // per sub-pixel hit flags
  output logic [TOA_W-1:0] toa,
  output logic [TOT_W-1:0] tot,
  output logic             clk_active    // gated clock enable, for monitoring
);
  logic [N_SUB-1:0] disc_q;
  logic             or_q, or_d;
  logic             hit_any;
  logic             gclk;
  logic [CNT_W-1:0] cnt;

  assign or_q    = |disc_q;
  assign hit_any = |hits;

  // Ungated part: sampling, OR history and hit flags.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      disc_q <= '0;
      or_d   <= 1'b0;
      hits   <= '0;
    end else begin
      disc_q <= disc & ~mask;
      or_d   <= or_q;
      if (frame_start)  hits <= '0;
      else if (acq)     hits <= hits | disc_q;
    end
  end

  assign clk_active = frame_start | (acq & (or_q | hit_any));

  clock_gate u_cg (
    .clk     (clk),
    .en      (clk_active),
    .test_en (1'b0),
    .gclk    (gclk)
  );

  // Gated part: ToA / ToT counters (or the photon counter).
  assign cnt = {toa, tot};

  always_ff @(posedge gclk or negedge rst_n) begin
    if (!rst_n) begin
      toa <= '0;
      tot <= '0;
    end else if (frame_start) begin
      toa <= '0;
      tot <= '0;
    end else if (acq) begin
      if (mode == MODE_COUNT) begin
        if (or_q && !or_d && cnt != '1) {toa, tot} <= cnt + 1'b1;
      end else begin
        if ((or_q || hit_any) && toa != '1)  toa <= toa + 1'b1;
        if (or_q && tot_tick && tot != '1)   tot <= tot + 1'b1;
      end
    end
  end
endmodule
