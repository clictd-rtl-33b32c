// readout_ctrl: serial readout sequencer of the periphery (40 MHz).
//
// After `start` it pulses `ro_load` for one cycle, so that every pixel copies
// its frame data into its readout register, and then holds `ro_shift` high,
// moving the matrix chain one bit per 40 MHz cycle. Each bit arriving at
// `ser_in` is sent out on `dout` one cycle later with `dout_valid` high. The
// stream is self-delimiting: a 0 flag is a whole pixel, a 1 flag is followed
// by DATA_W data bits. The sequencer parses it the same way, counts NPIX
// pixels and then stops, pulsing `done`. One frame therefore takes
// 1 + NPIX + DATA_W*(hit pixels) cycles from `start` to the last bit shifted.
// The 40 MHz serial output and the one-bit-per-empty-pixel compression follow
// the published chip; the handshake (start/busy/done) is this
// implementation's choice.
module readout_ctrl
  import clictd_pkg::*;
#(
  parameter int unsigned NPIX = N_COLS * N_ROWS
) (
  input  logic        clk,          // 40 MHz readout clock
  input  logic        rst_n,
  input  logic        start,        // begin reading the matrix
  input  logic        ser_in,       // head of the matrix readout chain
  output logic        ro_load,
  output logic        ro_shift,
  output logic        dout,
  output logic        dout_valid,
  output logic        busy,
  output logic        done,
  output logic [15:0] n_hit_pix     // hit pixels in the last frame read
);
  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_SHIFT} state_e;

  localparam int unsigned PCW = $clog2(NPIX + 1);

  state_e      state;
  logic [PCW-1:0] pix_cnt;
  logic [4:0]  data_left;
  logic        pix_end;

  assign ro_load  = (state == S_LOAD);
  assign ro_shift = (state == S_SHIFT);
  assign busy     = (state != S_IDLE);

  // Current bit closes a pixel: a 0 flag, or the last data bit.
  assign pix_end = (data_left == 5'd0) ? !ser_in : (data_left == 5'd1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      pix_cnt    <= '0;
      data_left  <= '0;
      dout       <= 1'b0;
      dout_valid <= 1'b0;
      done       <= 1'b0;
      n_hit_pix  <= '0;
    end else begin
      done       <= 1'b0;
      dout_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (start) state <= S_LOAD;
        S_LOAD: begin
          state     <= S_SHIFT;
          pix_cnt   <= '0;
          data_left <= '0;
          n_hit_pix <= '0;
        end
        S_SHIFT: begin
          dout       <= ser_in;
          dout_valid <= 1'b1;
          if (data_left == 5'd0) begin
            if (ser_in) begin
              data_left <= 5'(DATA_W);
              n_hit_pix <= n_hit_pix + 16'd1;
            end
          end else begin
            data_left <= data_left - 5'd1;
          end
          if (pix_end) begin
            pix_cnt <= pix_cnt + 1'b1;
            if (pix_cnt == PCW'(NPIX - 1)) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A new readout may only be requested while idle.
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n)
                                 start |-> state == S_IDLE);
endmodule
