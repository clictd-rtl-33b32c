// clictd_column_tb: self-checking test of one full 128-pixel column.
// Loads a configuration word into every pixel through the chain, runs frames
// in which random rows receive one discriminator pulse each on a random
// sub-pixel, and reads the column out through its readout chain. Expected
// values come from closed formulas: with the pulse driven for w cycles from
// frame cycle s, a frame of L cycles and a ToT strobe on every cycle, the
// pixel reports ToA = L - s - 1 and ToT = w (two cycles of sampling delay);
// in counting mode it reports one count per pulse. Masked sub-pixels must
// leave the pixel empty. Checks the configuration outputs, every stream bit,
// the stream length and the passing on of upstream bits at ro_in.
module clictd_column_tb;
  import clictd_pkg::*;

  localparam int NR = N_ROWS;

  logic clk = 0, clk_ro = 0, rst_n = 0;
  logic acq = 0, frame_start = 0, tot_tick = 0;
  acq_mode_e mode = MODE_TOA_TOT;
  logic [NR-1:0][N_SUB-1:0] disc = '0;
  logic [NR-1:0][N_SUB-1:0][TUNE_W-1:0] tune;
  logic cfg_shift = 0, cfg_in = 0, cfg_out;
  logic ro_load = 0, ro_shift = 0, ro_in = 0, ro_out;
  logic [NR-1:0] clk_active;
  int checks = 0, failures = 0;

  pix_cfg_t cfg_img [NR];
  int s_of [NR], w_of [NR], sub_of [NR];

  clictd_column dut (.*);

  always #5    clk    = ~clk;
  always #12.5 clk_ro = ~clk_ro;

  task automatic chk(input longint got, input longint exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s got %0d exp %0d", what, got, exp);
    end
  endtask

  task automatic frame(input acq_mode_e md, input int len);
    bit exp_q[$];
    mode = md;
    for (int r = 0; r < NR; r++) begin
      s_of[r]   = ($urandom_range(0, 4) == 0) ? $urandom_range(0, len - 60) : -1;
      w_of[r]   = $urandom_range(1, 40);
      sub_of[r] = $urandom_range(0, N_SUB - 1);
    end
    @(negedge clk) begin acq = 1; frame_start = 1; tot_tick = 1; end
    for (int c = 0; c < len; c++) begin
      @(negedge clk);
      frame_start = 0;
      disc = '0;
      for (int r = 0; r < NR; r++)
        if (s_of[r] >= 0 && c >= s_of[r] && c < s_of[r] + w_of[r]) disc[r][sub_of[r]] = 1'b1;
    end
    @(negedge clk) begin acq = 0; tot_tick = 0; disc = '0; end
    // expected stream, row 0 first
    for (int r = 0; r < NR; r++) begin
      bit hit = (s_of[r] >= 0) && !cfg_img[r].mask[sub_of[r]];
      exp_q.push_back(hit);
      if (hit) begin
        pix_data_t w;
        w.hits = N_SUB'(1) << sub_of[r];
        if (md == MODE_COUNT) {w.toa, w.tot} = CNT_W'(1);
        else begin
          w.toa = TOA_W'(len - s_of[r] - 1);
          w.tot = TOT_W'(w_of[r] > 31 ? 31 : w_of[r]);
        end
        for (int b = 0; b < DATA_W; b++) exp_q.push_back(w[b]);
      end
    end
    for (int k = 0; k < 6; k++) exp_q.push_back(k[1]);
    @(negedge clk_ro) ro_load = 1;
    @(negedge clk_ro) ro_load = 0;
    for (int k = 0; k < exp_q.size(); k++) begin
      chk(ro_out, exp_q[k], "stream bit");
      ro_in = (k < 6) ? k[1] : 1'b0;   // appears after the column's bits
      ro_shift = 1;
      @(negedge clk_ro);
      ro_shift = 0;
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < NR; r++) begin
      cfg_img[r] = pix_cfg_t'($urandom);
      if ($urandom_range(0, 3) != 0) cfg_img[r].mask = '0;
    end
    for (int r = NR - 1; r >= 0; r--)
      for (int b = CFG_W - 1; b >= 0; b--)
        @(negedge clk_ro) begin cfg_shift = 1; cfg_in = cfg_img[r][b]; end
    @(negedge clk_ro) cfg_shift = 0;
    for (int r = 0; r < NR; r++) chk(tune[r], cfg_img[r].tune, "tune codes");
    frame(MODE_TOA_TOT, 200);
    frame(MODE_TOA_TOT, 120);
    frame(MODE_COUNT, 150);
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
