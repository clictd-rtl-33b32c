// Shared body of the end-to-end testbenches of clictd_top. The including
// module declares NC and NR and instantiates the top as `dut`, connected to
// the signals declared here.
//
// Sequence: reset; load a random configuration (masks and tuning codes) into
// every pixel and check the tuning outputs; run frames in ToA/ToT and photon
// counting mode with random discriminator pulses; after each frame read the
// matrix out and compare every bit of the serial stream with a reference
// model written from the specification. The reference tracks, cycle by
// cycle, the synchronised shutter, the ToT strobe and each pixel's flags and
// counters. Counts how often each mechanism happened and fails if one never
// did: compressed (1-bit) pixels, full pixels, masked pulses, integrated
// multi-pulse ToT, ToA and ToT saturation, counting mode, several ToT ranges,
// clock gating, configuration load.

  import clictd_pkg::*;

  localparam int NPIX = NC * NR;

  logic clk = 0, clk_ro = 0, rst_n = 0, shutter = 0;
  acq_mode_e mode = MODE_TOA_TOT;
  logic [RANGE_W-1:0] tot_range = '0;
  logic [NC-1:0][NR-1:0][N_SUB-1:0] disc = '0;
  logic [NC-1:0][NR-1:0][N_SUB-1:0][TUNE_W-1:0] tune;
  logic cfg_shift = 0, cfg_in = 0, cfg_out;
  logic ro_start = 0, ro_data, ro_valid, ro_busy, ro_done;
  logic [15:0] ro_n_hit;
  logic [NC-1:0][NR-1:0] clk_active;

  int checks = 0, failures = 0;

  always #5    clk    = ~clk;      // 100 MHz
  always #12.5 clk_ro = ~clk_ro;   // 40 MHz

  // ---------------- configuration image ----------------
  pix_cfg_t cfg_img [NPIX];

  // ---------------- stimulus: pulse list ----------------
  int pl_pix[$], pl_sub[$], pl_start[$], pl_len[$];
  int tcyc;   // cycle index since the shutter opened (negedge driven)

  // ---------------- reference model ----------------
  logic [2:0] r_sh = '0;      // shutter as seen by the three flops
  logic r_acq_d = 0;
  int   r_fcyc, r_cyc = 0;
  logic [N_SUB-1:0] r_dq [NPIX];
  logic             r_od [NPIX];
  logic [N_SUB-1:0] r_hits [NPIX];
  int               r_toa [NPIX], r_tot [NPIX], r_cnt [NPIX];
  bit               r_started [NPIX];

  // mechanism counters
  int m_short = 0, m_long = 0, m_masked = 0, m_multi = 0, m_toa_sat = 0,
      m_tot_sat = 0, m_count = 0, m_gated = 0, m_cfg = 0;
  bit m_range_seen [8] = '{default: 1'b0};

  always @(posedge clk) if (rst_n) begin
    logic acq, fs, tick;
    int p;
    acq  = r_sh[2];
    fs   = acq && !r_acq_d;
    r_cyc++;
    if (fs) r_fcyc = r_cyc;
    p    = 2 * (int'(tot_range) + 1);
    tick = acq && r_acq_d && !fs && ((r_cyc - r_fcyc) % p == 0);
    for (int k = 0; k < NPIX; k++) begin
      logic or_q;
      logic [N_SUB-1:0] d;
      or_q = |r_dq[k];
      if (fs) begin
        r_hits[k] = '0; r_toa[k] = 0; r_tot[k] = 0; r_cnt[k] = 0; r_started[k] = 0;
      end else if (acq) begin
        r_hits[k] |= r_dq[k];
        if (or_q) r_started[k] = 1;
        if (mode == MODE_COUNT) begin
          if (or_q && !r_od[k] && r_cnt[k] < 8191) r_cnt[k]++;
        end else begin
          if (r_started[k] && r_toa[k] < 255) r_toa[k]++;
          if (or_q && tick && r_tot[k] < 31) r_tot[k]++;
        end
      end
      r_od[k] = or_q;
      d = disc[k / NR][k % NR];
      r_dq[k] = d & ~cfg_img[k].mask;
    end
    r_acq_d = acq;
    r_sh    = {r_sh[1:0], shutter};
    if (acq) for (int k = 0; k < NPIX; k++) if (!clk_active[k / NR][k % NR]) m_gated++;
  end

  task automatic chk(input longint got, input longint exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 15) $display("FAIL %s got %0d exp %0d", what, got, exp);
    end
  endtask

  // ---------------- configuration load ----------------
  task automatic load_config();
    for (int k = 0; k < NPIX; k++) begin
      cfg_img[k] = pix_cfg_t'($urandom);
      if ($urandom_range(0, 3) != 0) cfg_img[k].mask = '0;
    end
    cfg_img[0].mask[0] = 1'b1;   // pixel 0, sub-pixel 0 is always masked
    for (int k = NPIX - 1; k >= 0; k--)
      for (int b = CFG_W - 1; b >= 0; b--) begin
        @(negedge clk_ro) begin cfg_shift = 1; cfg_in = cfg_img[k][b]; end
      end
    @(negedge clk_ro) cfg_shift = 0;
    for (int k = 0; k < NPIX; k++)
      for (int s = 0; s < N_SUB; s++)
        chk(tune[k / NR][k % NR][s], cfg_img[k].tune[s], "tune code");
    m_cfg++;
  endtask

  // ---------------- one frame ----------------
  task automatic run_frame(input acq_mode_e md, input int rng, input int len,
                           input int nhitpix, input int maxw, input int npulse);
    bit got[$];
    int cyc, pos, nh;
    mode = md;
    tot_range = RANGE_W'(rng);
    m_range_seen[rng] = 1;
    if (md == MODE_COUNT) m_count++;
    pl_pix.delete(); pl_sub.delete(); pl_start.delete(); pl_len.delete();
    // one pulse on the masked sub-pixel 0 of pixel 0 in every frame
    pl_pix.push_back(0); pl_sub.push_back(0); pl_start.push_back(10); pl_len.push_back(5);
    m_masked++;
    for (int h = 0; h < nhitpix; h++) begin
      int pix = $urandom_range(0, NPIX - 1);
      int np  = $urandom_range(1, npulse);
      for (int q = 0; q < np; q++) begin
        int sub = $urandom_range(0, N_SUB - 1);
        pl_pix.push_back(pix);
        pl_sub.push_back(sub);
        pl_start.push_back($urandom_range(4, len - 4));
        pl_len.push_back($urandom_range(1, maxw));
        if (cfg_img[pix].mask[sub]) m_masked++;
      end
    end
    @(negedge clk) shutter = 1;
    for (tcyc = 0; tcyc < len + 8; tcyc++) begin
      @(negedge clk);
      if (tcyc == len) shutter = 0;
      disc = '0;
      for (int i = 0; i < pl_pix.size(); i++)
        if (tcyc >= pl_start[i] && tcyc < pl_start[i] + pl_len[i])
          disc[pl_pix[i] / NR][pl_pix[i] % NR][pl_sub[i]] = 1'b1;
    end
    disc = '0;
    repeat (4) @(negedge clk);
    // readout
    @(negedge clk_ro) ro_start = 1;
    @(negedge clk_ro) ro_start = 0;
    cyc = 1;
    while (!ro_done && cyc < 200000) begin
      @(posedge clk_ro);
      #1;
      if (ro_valid) got.push_back(ro_data);
      cyc++;
    end
    // compare with the model
    pos = 0; nh = 0;
    for (int k = 0; k < NPIX; k++) begin
      logic flag;
      pix_data_t w;
      flag = |r_hits[k];
      chk(got[pos], flag, "flag bit");
      pos++;
      if (flag) begin
        nh++;
        m_long++;
        w.hits = r_hits[k];
        if (md == MODE_COUNT) {w.toa, w.tot} = CNT_W'(r_cnt[k]);
        else begin
          w.toa = TOA_W'(r_toa[k]);
          w.tot = TOT_W'(r_tot[k]);
          if (r_toa[k] == 255) m_toa_sat++;
          if (r_tot[k] == 31) m_tot_sat++;
        end
        for (int b = 0; b < DATA_W; b++) chk(got[pos + b], w[b], "data bit");
        pos += DATA_W;
      end else m_short++;
    end
    chk(got.size(), pos, "stream length");
    chk(got.size(), NPIX + DATA_W * nh, "compressed length");
    chk(cyc, 2 + NPIX + DATA_W * nh, "readout cycles at 40 MHz");
    chk(ro_n_hit, nh, "hit pixel count");
    // pixels with more than one pulse integrate ToT
    for (int i = 0; i < pl_pix.size(); i++)
      for (int j = i + 1; j < pl_pix.size(); j++)
        if (pl_pix[i] == pl_pix[j] && md == MODE_TOA_TOT) m_multi++;
  endtask

  task automatic need(input int n, input string what);
    checks++;
    if (n == 0) begin failures++; $display("FAIL mechanism never happened: %s", what); end
    else $display("mechanism %-28s %0d", what, n);
  endtask

  initial begin
    int nrng = 0;
    for (int k = 0; k < NPIX; k++) begin
      r_dq[k] = '0; r_od[k] = 0; r_hits[k] = '0;
      r_toa[k] = 0; r_tot[k] = 0; r_cnt[k] = 0; r_started[k] = 0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_config();
    // ToA/ToT frames at low occupancy, several ToT ranges
    run_frame(MODE_TOA_TOT, 0, 120, (NPIX + 19) / 20, 40, 3);
    run_frame(MODE_TOA_TOT, 3, 200, (NPIX + 9) / 10, 60, 4);
    // long frame, long pulses: ToA and ToT saturate
    run_frame(MODE_TOA_TOT, 0, 400, (NPIX + 19) / 20, 150, 2);
    // photon counting
    run_frame(MODE_COUNT, 7, 300, (NPIX + 9) / 10, 5, 6);
    // empty frame
    run_frame(MODE_TOA_TOT, 1, 60, 0, 1, 1);
    foreach (m_range_seen[i]) if (m_range_seen[i]) nrng++;
    need(m_cfg, "configuration load");
    need(m_short, "compressed empty pixel");
    need(m_long, "full hit pixel");
    need(m_masked, "masked pulse");
    need(m_multi, "integrated multi-pulse ToT");
    need(m_toa_sat, "ToA saturation");
    need(m_tot_sat, "ToT saturation");
    need(m_count, "photon counting frame");
    need(nrng > 1 ? nrng : 0, "ToT ranges used");
    need(m_gated, "gated pixel clock cycles");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
