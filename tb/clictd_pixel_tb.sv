// clictd_pixel_tb: self-checking test of one complete pixel.
// Configures the pixel through its chain and checks the tuning codes and the
// word leaving at cfg_out; then runs frames with one or two pulses on chosen
// sub-pixels and reads the pixel through its readout register. Expected
// values come from closed formulas (see clictd_column_tb): ToA = L - s - 1
// for a first pulse driven from frame cycle s in a frame of L cycles, ToT =
// the cycles in which any unmasked pulse is high, with a strobe on every cycle, one count per pulse
// in counting mode. Checks the one-bit output of an empty or fully masked
// pixel and that upstream bits follow the pixel's own bits.
module clictd_pixel_tb;
  import clictd_pkg::*;

  logic clk = 0, clk_ro = 0, rst_n = 0;
  logic acq = 0, frame_start = 0, tot_tick = 0;
  acq_mode_e mode = MODE_TOA_TOT;
  logic [N_SUB-1:0] disc = '0;
  logic [N_SUB-1:0][TUNE_W-1:0] tune;
  logic cfg_shift = 0, cfg_in = 0, cfg_out;
  logic ro_load = 0, ro_shift = 0, ro_in = 0, ro_out;
  logic clk_active;
  int checks = 0, failures = 0;
  pix_cfg_t cfg_w;

  clictd_pixel dut (.*);

  always #5    clk    = ~clk;
  always #12.5 clk_ro = ~clk_ro;

  task automatic chk(input longint got, input longint exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s got %0d exp %0d", what, got, exp);
    end
  endtask

  task automatic configure(input pix_cfg_t w, input pix_cfg_t old);
    for (int b = CFG_W - 1; b >= 0; b--) begin
      @(negedge clk_ro);
      chk(cfg_out, old[b], "cfg_out");
      cfg_shift = 1; cfg_in = w[b];
    end
    @(negedge clk_ro) cfg_shift = 0;
    chk(tune, w.tune, "tune");
    cfg_w = w;
  endtask

  // Two pulses: sub-pixel a from s1 for w1 cycles, sub-pixel b from s2 for w2.
  task automatic frame(input acq_mode_e md, input int len, input int a, input int s1,
                       input int w1, input int b, input int s2, input int w2);
    bit exp_q[$];
    logic [N_SUB-1:0] h;
    pix_data_t w;
    int first;
    mode = md;
    @(negedge clk) begin acq = 1; frame_start = 1; tot_tick = 1; end
    for (int c = 0; c < len; c++) begin
      @(negedge clk);
      frame_start = 0;
      disc = '0;
      if (a >= 0 && c >= s1 && c < s1 + w1) disc[a] = 1'b1;
      if (b >= 0 && c >= s2 && c < s2 + w2) disc[b] = 1'b1;
    end
    @(negedge clk) begin acq = 0; tot_tick = 0; disc = '0; end
    h = '0;
    first = len;
    if (a >= 0 && !cfg_w.mask[a]) begin h[a] = 1; first = s1; end
    if (b >= 0 && !cfg_w.mask[b]) begin h[b] = 1; if (s2 < first) first = s2; end
    exp_q.push_back(|h);
    if (|h) begin
      int ww = 0, np = 0;
      bit ua = (a >= 0 && !cfg_w.mask[a]), ub = (b >= 0 && !cfg_w.mask[b]);
      // ToT integrates the union of the pulses (cycles where the OR is high)
      for (int c = 0; c < len - 1; c++)
        if ((ua && c >= s1 && c < s1 + w1) || (ub && c >= s2 && c < s2 + w2)) ww++;
      // counting mode: one count per separate pulse
      np = (ua && ub && (s2 <= s1 + w1) && (s1 <= s2 + w2)) ? 1 : int'(ua) + int'(ub);
      w.hits = h;
      if (md == MODE_COUNT) {w.toa, w.tot} = CNT_W'(np);
      else begin
        w.toa = TOA_W'((len - first - 1) > 255 ? 255 : len - first - 1);
        w.tot = TOT_W'(ww > 31 ? 31 : ww);
      end
      for (int k = 0; k < DATA_W; k++) exp_q.push_back(w[k]);
    end
    exp_q.push_back(1); exp_q.push_back(0); exp_q.push_back(1);
    @(negedge clk_ro) ro_load = 1;
    @(negedge clk_ro) ro_load = 0;
    for (int k = 0; k < exp_q.size(); k++) begin
      chk(ro_out, exp_q[k], "stream bit");
      ro_in = (k < 3) ? ~k[0] : 1'b0;
      ro_shift = 1;
      @(negedge clk_ro);
      ro_shift = 0;
    end
  endtask

  initial begin
    pix_cfg_t c1, c2;
    repeat (3) @(negedge clk);
    rst_n = 1;
    c1 = pix_cfg_t'($urandom); c1.mask = 8'h00;
    configure(c1, '0);
    // separate pulses on two sub-pixels: ToT integrates both
    frame(MODE_TOA_TOT, 150, 2, 30, 7, 5, 90, 9);
    // overlapping pulses: OR counts the union once
    frame(MODE_TOA_TOT, 150, 1, 40, 10, 6, 45, 12);
    // long pulse: ToT saturates, long frame: ToA saturates
    frame(MODE_TOA_TOT, 400, 3, 20, 50, -1, 0, 0);
    // no pulse
    frame(MODE_TOA_TOT, 60, -1, 0, 0, -1, 0, 0);
    // counting mode, two separate pulses
    frame(MODE_COUNT, 120, 0, 10, 3, 7, 50, 3);
    // masks: sub-pixel 4 masked, 0 not
    c2 = pix_cfg_t'($urandom); c2.mask = 8'h10;
    configure(c2, c1);
    frame(MODE_TOA_TOT, 100, 4, 10, 5, -1, 0, 0);   // masked only: empty
    frame(MODE_TOA_TOT, 100, 4, 10, 5, 0, 30, 6);   // only sub-pixel 0 counts
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
