// acq_ctrl_tb: self-checking test of the shutter synchroniser and ToT time base.
// Opens frames of random length with every ToT range code and checks, cycle
// by cycle, that acq follows the shutter three cycles late, that frame_start
// marks exactly the first acq cycle, and that tot_tick fires every
// 2*(range+1) cycles within the frame and nowhere else.
module acq_ctrl_tb;
  import clictd_pkg::*;

  logic clk = 0, rst_n = 0, shutter = 0;
  logic [RANGE_W-1:0] tot_range = '0;
  logic acq, frame_start, tot_tick;
  int checks = 0, failures = 0;
  int cyc = 0;
  logic [3:0] sh_hist = '0;   // shutter value sampled at the last edges
  int f_cyc = -1;             // cycle index of frame_start
  bit prev_acq = 0;

  acq_ctrl dut (.*);

  always #5 clk = ~clk;

  task automatic chk(input logic got, input logic exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL cyc %0d %s got %0b exp %0b", cyc, what, got, exp);
    end
  endtask

  // Reference: evaluate after every rising edge.
  always @(negedge clk) if (rst_n) begin
    logic exp_acq, exp_fs, exp_tick;
    int p;
    cyc++;
    exp_acq = sh_hist[2];
    exp_fs  = exp_acq && !prev_acq;
    if (exp_fs) f_cyc = cyc;
    p = 2 * (int'(tot_range) + 1);
    exp_tick = exp_acq && prev_acq && (cyc > f_cyc) && ((cyc - f_cyc) % p == 0);
    chk(acq, exp_acq, "acq");
    chk(frame_start, exp_fs, "frame_start");
    chk(tot_tick, exp_tick, "tot_tick");
    prev_acq = exp_acq;
  end

  // Shutter history, sampled like the synchroniser does.
  always @(posedge clk) if (rst_n) sh_hist <= {sh_hist[2:0], shutter};

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int r = 0; r < 8; r++) begin
      @(negedge clk) tot_range = RANGE_W'(r);
      repeat (4) @(negedge clk);
      shutter = 1;
      repeat (40 + $urandom_range(0, 60)) @(negedge clk);
      shutter = 0;
      repeat (3 + $urandom_range(0, 6)) @(negedge clk);
    end
    repeat (5) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
