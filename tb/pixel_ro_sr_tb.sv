// pixel_ro_sr_tb: self-checking test of the compressing readout register.
// Chains NP registers as in a column, loads random hit / no-hit pixels with
// random data and shifts the chain out. The expected stream is built
// independently: per pixel, nearest first, a 0 bit for an empty pixel, or a
// 1 bit followed by its 21 data bits LSB first; after the last pixel the
// bits fed in at the far end. Also checks the stream length, i.e. that an
// empty pixel costs exactly one bit.
module pixel_ro_sr_tb;
  import clictd_pkg::*;

  localparam int NP = 6;

  logic clk = 0, rst_n = 0, load = 0, shift = 0;
  logic [NP-1:0] flag;
  pix_data_t     data [NP];
  logic [NP:0]   chain;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  for (genvar i = 0; i < NP; i++) begin : g
    pixel_ro_sr u (.clk(clk), .rst_n(rst_n), .load(load), .shift(shift),
                   .flag_in(flag[i]), .data_in(data[i]),
                   .ser_in(chain[i+1]), .ser_out(chain[i]));
  end

  logic tail = 0;
  assign chain[NP] = tail;

  task automatic chk(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s got %0d exp %0d", what, got, exp);
    end
  endtask

  initial begin
    bit exp_q[$];
    int n;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 30; t++) begin
      exp_q.delete();
      for (int i = 0; i < NP; i++) begin
        flag[i] = ($urandom_range(0, 2) == 0);
        data[i] = pix_data_t'($urandom);
        exp_q.push_back(flag[i]);
        if (flag[i]) for (int b = 0; b < DATA_W; b++) exp_q.push_back(data[i][b]);
      end
      n = exp_q.size();
      // trailing pattern from the far end
      for (int k = 0; k < 8; k++) exp_q.push_back(k[0]);
      @(negedge clk) load = 1;
      @(negedge clk) load = 0;
      for (int k = 0; k < exp_q.size(); k++) begin
        chk(chain[0], exp_q[k], "stream bit");
        tail  = (k < 8) ? k[0] : 1'b0;   // appears at output n shifts later
        shift = 1;
        @(negedge clk);
        shift = 0;
      end
      chk(n, NP + DATA_W * $countones(flag), "stream length");
    end
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
