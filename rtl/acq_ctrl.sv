// acq_ctrl: shutter synchronisation and ToT time base of the periphery.
//
// The external shutter is synchronised to the 100 MHz acquisition clock with
// two flip-flops. `acq` is high during the frame; `frame_start` is a one-cycle
// strobe, coincident with the first `acq` cycle, that clears all pixels.
// `tot_tick` is a one-cycle strobe every P = 2*(tot_range+1) clock cycles
// during the frame (20 ns to 160 ns), so that the 5-bit ToT counter in the
// pixels covers 32*P*10 ns = 0.64 us to 5.12 us. The published chip offers a
// ToT range programmable from 0.6 us to 4.8 us (a factor of 8, as here); the
// exact prescaler values are this implementation's choice.
// Latency: shutter edge to acq edge is 3 clock cycles.
module acq_ctrl
  import clictd_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               shutter,      // asynchronous, high = frame open
  input  logic [RANGE_W-1:0] tot_range,    // ToT range select
  output logic               acq,          // frame open, synchronous
  output logic               frame_start,  // first cycle of the frame
  output logic               tot_tick      // ToT counting strobe
);
  logic       sh_s1, sh_s2;
  logic [3:0] pre_cnt;
  logic [3:0] pre_max;

  assign pre_max = {tot_range, 1'b1};   // 2*(tot_range+1) - 1

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sh_s1       <= 1'b0;
      sh_s2       <= 1'b0;
      acq         <= 1'b0;
      frame_start <= 1'b0;
    end else begin
      sh_s1       <= shutter;
      sh_s2       <= sh_s1;
      acq         <= sh_s2;
      frame_start <= sh_s2 & ~acq;
    end
  end

  // Prescaler: restarts with every frame, counts only while acq is high.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pre_cnt  <= '0;
      tot_tick <= 1'b0;
    end else if (!(sh_s2 & acq)) begin
      pre_cnt  <= '0;
      tot_tick <= 1'b0;
    end else if (pre_cnt == pre_max) begin
      pre_cnt  <= '0;
      tot_tick <= 1'b1;
    end else begin
      pre_cnt  <= pre_cnt + 4'd1;
      tot_tick <= 1'b0;
    end
  end
endmodule
