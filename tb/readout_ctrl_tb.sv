// readout_ctrl_tb: self-checking test of the serial readout sequencer.
// A behavioural model of the matrix chain stands in for the pixels: on
// ro_load it builds the compressed stream of NPIX random pixels (0 for an
// empty pixel, 1 plus 21 data bits for a hit one) and presents the next bit
// on every ro_shift cycle. Checks that dout reproduces the stream bit for bit,
// that the sequencer stops exactly at the end of the last pixel, that a frame
// takes 1 + NPIX + 21*hits cycles of the 40 MHz clock from start to done, and
// the reported number of hit pixels. Occupancies from empty to full.
module readout_ctrl_tb;
  import clictd_pkg::*;

  localparam int NPIX = 40;

  logic clk = 0, rst_n = 0, start = 0, ser_in;
  logic ro_load, ro_shift, dout, dout_valid, busy, done;
  logic [15:0] n_hit_pix;
  int checks = 0, failures = 0;

  bit stream[$];
  int pos = 0;
  int nhit;

  readout_ctrl #(.NPIX(NPIX)) dut (.*);

  always #12.5 clk = ~clk;   // 40 MHz

  // chain model
  assign ser_in = (pos < stream.size()) ? stream[pos] : 1'b0;
  always @(posedge clk) begin
    if (ro_load) pos <= 0;
    else if (ro_shift) pos <= pos + 1;
  end

  task automatic chk(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s got %0d exp %0d", what, got, exp);
    end
  endtask

  task automatic run_frame(input int occ_pct);
    bit got[$];
    int cycles;
    stream.delete();
    nhit = 0;
    for (int p = 0; p < NPIX; p++) begin
      bit h = ($urandom_range(0, 99) < occ_pct);
      stream.push_back(h);
      if (h) begin
        nhit++;
        for (int b = 0; b < DATA_W; b++) stream.push_back(1'($urandom));
      end
    end
    // junk behind the last pixel must never be sent
    for (int k = 0; k < 30; k++) stream.push_back(1'b1);
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    cycles = 1;
    while (!done) begin
      @(posedge clk);
      #1;
      if (dout_valid) got.push_back(dout);
      cycles++;
      if (cycles > 5000) break;
    end
    chk(got.size(), stream.size() - 30, "bits sent");
    for (int k = 0; k < got.size() && k < stream.size(); k++) chk(got[k], stream[k], "bit");
    chk(cycles, 1 + NPIX + DATA_W * nhit + 1, "cycles start..done");
    chk(n_hit_pix, nhit, "hit pixels");
    @(negedge clk);
    chk(busy, 0, "idle after done");
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    run_frame(0);
    run_frame(100);
    for (int f = 0; f < 20; f++) run_frame($urandom_range(0, 100));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
