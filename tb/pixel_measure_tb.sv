// pixel_measure_tb: self-checking test of the pixel hit / ToA / ToT logic.
// Runs frames in both modes with random discriminator pulses on random
// sub-pixels and random masks. A cycle-level reference, written from the
// block's specification, predicts the hit flags, the ToA (cycles from the
// first sampled hit to the end of the frame), the integral ToT (ToT strobes
// seen while any unmasked sub-pixel is high) and, in counting mode, the number
// of rising edges of the combined signal. Checks after every frame, checks
// that the values hold outside the frame, that saturation works, and that the
// gated clock is really stopped for most of the time.
module pixel_measure_tb;
  import clictd_pkg::*;

  logic clk = 0, rst_n = 0;
  logic acq = 0, frame_start = 0, tot_tick = 0;
  acq_mode_e mode = MODE_TOA_TOT;
  logic [N_SUB-1:0] disc = '0, mask = '0;
  logic [N_SUB-1:0] hits;
  logic [TOA_W-1:0] toa;
  logic [TOT_W-1:0] tot;
  logic clk_active;
  int checks = 0, failures = 0;
  int n_clk = 0, n_gclk = 0;

  // reference state
  logic [N_SUB-1:0] r_disc_q = '0;
  logic             r_or_d = 0;
  int r_first, r_toa, r_tot, r_cnt, r_cyc;
  logic [N_SUB-1:0] r_hits;

  pixel_measure dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) n_clk++;
  int n_gclk_idle = 0;
  always @(posedge dut.gclk) begin
    n_gclk++;
    if (!acq && !frame_start) n_gclk_idle++;
  end

  // Reference: what the pixel sees at each rising edge.
  always @(posedge clk) if (rst_n) begin
    logic or_q;
    or_q = |r_disc_q;
    if (frame_start) begin
      r_hits = '0; r_first = -1; r_toa = 0; r_tot = 0; r_cnt = 0; r_cyc = 0;
    end else if (acq) begin
      r_cyc++;
      r_hits |= r_disc_q;
      if (or_q && r_first < 0) r_first = r_cyc;
      if (r_first >= 0 && r_toa < 255) r_toa++;
      if (or_q && tot_tick && r_tot < 31) r_tot++;
      if (or_q && !r_or_d && r_cnt < 8191) r_cnt++;
    end
    r_or_d   = or_q;
    r_disc_q = disc & ~mask;
  end

  task automatic chk(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s got %0d exp %0d", what, got, exp);
    end
  endtask

  task automatic check_frame();
    chk(hits, r_hits, "hits");
    if (mode == MODE_COUNT) chk({toa, tot}, r_cnt, "count");
    else begin
      chk(toa, r_toa, "toa");
      chk(tot, r_tot, "tot");
    end
  endtask

  // One frame of `len` cycles; pulses drawn at random. p = ToT prescale.
  task automatic frame(input int len, input int p, input int n_pulses, input int max_w);
    int start[16], width[16], sub[16];
    for (int i = 0; i < n_pulses; i++) begin
      start[i] = $urandom_range(0, len - 1);
      width[i] = $urandom_range(1, max_w);
      sub[i]   = $urandom_range(0, N_SUB - 1);
    end
    @(negedge clk) begin acq = 1; frame_start = 1; end
    for (int c = 0; c < len; c++) begin
      @(negedge clk);
      frame_start = 0;
      tot_tick = ((c + 1) % p == 0);
      disc = '0;
      for (int i = 0; i < n_pulses; i++)
        if (c >= start[i] && c < start[i] + width[i]) disc[sub[i]] = 1'b1;
    end
    @(negedge clk) begin acq = 0; tot_tick = 0; disc = '0; end
    repeat (3) @(negedge clk);
    check_frame();
    // hits outside the frame must not change anything
    disc = '1;
    repeat (5) @(negedge clk);
    disc = '0;
    repeat (2) @(negedge clk);
    check_frame();
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    // directed: one 10-cycle hit on sub-pixel 3 starting at frame cycle 20,
    // 100-cycle frame, strobe every 2 cycles -> seen by the counters on
    // frame cycles 20..29, so ToA 81 and ToT 5.
    @(negedge clk) begin acq = 1; frame_start = 1; end
    for (int c = 0; c < 100; c++) begin
      @(negedge clk);
      frame_start = 0;
      tot_tick = ((c + 1) % 2 == 0);
      disc = (c >= 18 && c < 28) ? 8'h08 : 8'h00;
    end
    @(negedge clk) begin acq = 0; tot_tick = 0; disc = '0; end
    repeat (3) @(negedge clk);
    chk(hits, 8'h08, "directed hits");
    chk(toa, 81, "directed toa");
    chk(tot, 5, "directed tot");
    // random frames, both modes, random masks
    for (int f = 0; f < 60; f++) begin
      mode = (f % 3 == 2) ? MODE_COUNT : MODE_TOA_TOT;
      mask = ($urandom_range(0, 3) == 0) ? 8'($urandom) : '0;
      frame($urandom_range(20, 400), 2 * $urandom_range(1, 8), $urandom_range(0, 6), 40);
    end
    // saturation: long frame with a long pulse and many short ones
    mask = '0;
    mode = MODE_TOA_TOT;
    frame(600, 2, 3, 300);
    chk(toa, 255, "toa saturates");
    mode = MODE_COUNT;
    frame(3000, 2, 16, 1);
    // empty frame
    frame(50, 2, 0, 1);
    chk(hits, 0, "empty hits");
    // clock gating must be visible
    checks++;
    chk(n_gclk_idle, 0, "gated clock idle outside frames");
    if (!(n_gclk < n_clk)) begin failures++; $display("FAIL gating %0d/%0d", n_gclk, n_clk); end
    $display("gated clock edges %0d of %0d", n_gclk, n_clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
