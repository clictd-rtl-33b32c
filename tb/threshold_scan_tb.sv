// threshold_scan_tb: fluorescence threshold scan in photon-counting mode on a
// reduced 2 x 8 pixel matrix. The analog front-end is replaced by a simple
// behavioural rule in the testbench: a photon depositing Q electrons gives a
// 5-cycle discriminator pulse on a random sub-pixel if Q exceeds the
// threshold. Two targets are emulated with K-alpha lines at 6.4 keV (iron)
// and 8.04 keV (copper), i.e. 1768 and 2221 electrons at 3.62 eV per pair.
// For each threshold step (64 electrons, 4 steps of a 16-electron DAC) one
// frame is taken and the counts of all pixels are read out. Checks every
// pixel's count against the number of photons above threshold, and that the
// differentiated occupancy curve peaks at the line of the target.
module threshold_scan_tb;
  import clictd_pkg::*;

  localparam int NC = 2, NR = 8, NPIX = NC * NR;
  localparam int TH0 = 1024, TH_STEP = 64, NSTEP = 24;

  logic clk = 0, clk_ro = 0, rst_n = 0, shutter = 0;
  acq_mode_e mode = MODE_COUNT;
  logic [RANGE_W-1:0] tot_range = '0;
  logic [NC-1:0][NR-1:0][N_SUB-1:0] disc = '0;
  logic [NC-1:0][NR-1:0][N_SUB-1:0][TUNE_W-1:0] tune;
  logic cfg_shift = 0, cfg_in = 0, cfg_out;
  logic ro_start = 0, ro_data, ro_valid, ro_busy, ro_done;
  logic [15:0] ro_n_hit;
  logic [NC-1:0][NR-1:0] clk_active;
  int checks = 0, failures = 0;

  clictd_top #(.NCOLS(NC), .NROWS(NR)) dut (.*);

  always #5    clk    = ~clk;
  always #12.5 clk_ro = ~clk_ro;

  task automatic chk(input longint got, input longint exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s got %0d exp %0d", what, got, exp);
    end
  endtask

  // One frame at threshold th; returns the summed count of all pixels.
  task automatic frame(input int th, input int q_line, output int total);
    localparam int NPH = 12;
    int q [NPIX][NPH];
    int sub [NPIX][NPH];
    int expc [NPIX];
    bit got[$];
    int pos;
    for (int k = 0; k < NPIX; k++) begin
      expc[k] = 0;
      for (int i = 0; i < NPH; i++) begin
        // line charge with +-32 e- spread, or a flat background photon
        q[k][i]   = ($urandom_range(0, 4) == 0) ? $urandom_range(500, 2600)
                                                : q_line + $urandom_range(0, 64) - 32;
        sub[k][i] = $urandom_range(0, N_SUB - 1);
        if (q[k][i] > th) expc[k]++;
      end
    end
    @(negedge clk) shutter = 1;
    for (int t = 0; t < 20 + NPH * 12; t++) begin
      @(negedge clk);
      disc = '0;
      for (int k = 0; k < NPIX; k++)
        for (int i = 0; i < NPH; i++)
          if (q[k][i] > th && t >= 10 + 12 * i && t < 15 + 12 * i)
            disc[k / NR][k % NR][sub[k][i]] = 1'b1;
    end
    shutter = 0;
    repeat (8) @(negedge clk);
    @(negedge clk_ro) ro_start = 1;
    @(negedge clk_ro) ro_start = 0;
    while (!ro_done) begin
      @(posedge clk_ro);
      #1;
      if (ro_valid) got.push_back(ro_data);
    end
    pos = 0;
    total = 0;
    for (int k = 0; k < NPIX; k++) begin
      int cnt = 0;
      if (got[pos]) begin
        pix_data_t w;
        for (int b = 0; b < DATA_W; b++) w[b] = got[pos + 1 + b];
        cnt = int'({w.toa, w.tot});
        pos += 1 + DATA_W;
      end else pos++;
      chk(cnt, expc[k], "photon count");
      total += cnt;
    end
  endtask

  task automatic scan(input int q_line, input string name);
    int occ [NSTEP];
    int best = 0, best_i = 0;
    for (int i = 0; i < NSTEP; i++) frame(TH0 + i * TH_STEP, q_line, occ[i]);
    // derivative of the occupancy curve
    for (int i = 0; i + 1 < NSTEP; i++)
      if (occ[i] - occ[i + 1] > best) begin best = occ[i] - occ[i + 1]; best_i = i; end
    $display("%s: spectrum peak between %0d and %0d e-", name,
             TH0 + best_i * TH_STEP, TH0 + (best_i + 1) * TH_STEP);
    checks++;
    if (!(q_line + 32 > TH0 + best_i * TH_STEP && q_line - 32 < TH0 + (best_i + 1) * TH_STEP)) begin
      failures++;
      $display("FAIL %s peak not at the line", name);
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    scan(1768, "iron 6.4 keV");
    scan(2221, "copper 8.04 keV");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
