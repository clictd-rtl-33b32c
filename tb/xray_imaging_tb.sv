// xray_imaging_tb: imaging run on a reduced matrix (2 x 16 pixels, 256
// sub-pixels). An "object" absorbs X-rays over a region of the sensor: in
// each of NFRAMES acquisitions every sub-pixel outside the object is hit with
// probability 60 % and inside it with 5 %. After every frame the serial stream
// is decoded and the hit flags are summed per sub-pixel, as for an X-ray
// image. The summed image must equal the number of frames in which each
// sub-pixel was actually hit, and the object must appear as a region of low
// counts. Frames are 300 cycles instead of the 4 ms used on the real chip:
// the hit flags do not depend on the frame length.
module xray_imaging_tb;
  import clictd_pkg::*;

  localparam int NC = 2, NR = 16, NPIX = NC * NR, NFRAMES = 40;

  logic clk = 0, clk_ro = 0, rst_n = 0, shutter = 0;
  acq_mode_e mode = MODE_TOA_TOT;
  logic [RANGE_W-1:0] tot_range = 3'd2;
  logic [NC-1:0][NR-1:0][N_SUB-1:0] disc = '0;
  logic [NC-1:0][NR-1:0][N_SUB-1:0][TUNE_W-1:0] tune;
  logic cfg_shift = 0, cfg_in = 0, cfg_out;
  logic ro_start = 0, ro_data, ro_valid, ro_busy, ro_done;
  logic [15:0] ro_n_hit;
  logic [NC-1:0][NR-1:0] clk_active;
  int checks = 0, failures = 0;

  int img_exp [NPIX][N_SUB];
  int img_got [NPIX][N_SUB];

  clictd_top #(.NCOLS(NC), .NROWS(NR)) dut (.*);

  always #5    clk    = ~clk;
  always #12.5 clk_ro = ~clk_ro;

  function automatic bit in_object(int pix, int sub);
    // the object covers rows 4..11 of column 0 and sub-pixels 2..5 of column 1
    int c = pix / NR, r = pix % NR;
    return (c == 0 && r >= 4 && r < 12) || (c == 1 && sub >= 2 && sub < 6);
  endfunction

  task automatic chk(input longint got, input longint exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s got %0d exp %0d", what, got, exp);
    end
  endtask

  initial begin
    int lo_sum = 0, lo_n = 0, hi_sum = 0, hi_n = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < NPIX; k++)
      for (int s = 0; s < N_SUB; s++) begin img_exp[k][s] = 0; img_got[k][s] = 0; end
    for (int f = 0; f < NFRAMES; f++) begin
      logic [NC-1:0][NR-1:0][N_SUB-1:0] hit_now;
      int st [NPIX][N_SUB];
      bit got[$];
      int pos;
      got.delete();
      for (int k = 0; k < NPIX; k++)
        for (int s = 0; s < N_SUB; s++) begin
          hit_now[k / NR][k % NR][s] = ($urandom_range(0, 99) < (in_object(k, s) ? 5 : 60));
          st[k][s] = $urandom_range(5, 250);
          if (hit_now[k / NR][k % NR][s]) img_exp[k][s]++;
        end
      @(negedge clk) shutter = 1;
      for (int t = 0; t < 300; t++) begin
        @(negedge clk);
        for (int k = 0; k < NPIX; k++)
          for (int s = 0; s < N_SUB; s++)
            disc[k / NR][k % NR][s] = hit_now[k / NR][k % NR][s] && t >= st[k][s] && t < st[k][s] + 20;
      end
      shutter = 0;
      disc = '0;
      repeat (8) @(negedge clk);
      @(negedge clk_ro) ro_start = 1;
      @(negedge clk_ro) ro_start = 0;
      while (!ro_done) begin
        @(posedge clk_ro);
        #1;
        if (ro_valid) got.push_back(ro_data);
      end
      // decode the stream
      pos = 0;
      for (int k = 0; k < NPIX; k++) begin
        if (got[pos]) begin
          pix_data_t w;
          for (int b = 0; b < DATA_W; b++) w[b] = got[pos + 1 + b];
          for (int s = 0; s < N_SUB; s++) if (w.hits[s]) img_got[k][s]++;
          pos += 1 + DATA_W;
        end else pos++;
      end
      chk(pos, got.size(), "stream decodes to its end");
    end
    for (int k = 0; k < NPIX; k++)
      for (int s = 0; s < N_SUB; s++) begin
        chk(img_got[k][s], img_exp[k][s], "image count");
        if (in_object(k, s)) begin lo_sum += img_got[k][s]; lo_n++; end
        else begin hi_sum += img_got[k][s]; hi_n++; end
      end
    $display("mean counts: object %0d/%0d, open %0d/%0d", lo_sum, lo_n, hi_sum, hi_n);
    checks++;
    if (!(lo_sum * hi_n * 4 < hi_sum * lo_n)) begin failures++; $display("FAIL object not visible"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
