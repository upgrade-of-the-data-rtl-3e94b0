// awg_sequencer: sweep timing of the AWG.
//
// The profile reflectometers sweep their VCOs periodically: in the paper's
// setup a 40 us sweep followed by 10 us dead time, started by the trigger that
// the trigger & clock manager (TCM) has delayed to align it with the rest of the
// machine. This block turns that into a waveform read address. After an arm
// command it waits for a rising edge of trig_in; it then steps rd_addr by one
// every clock (one sample per DAC clock, 250 MSPS) from 0 to last_addr, wraps
// to 0 and repeats. The dead time is part of the stored waveform, so one
// period is last_addr+1 samples. Playback ends after num_sweeps periods, or
// never if num_sweeps is 0, or at a stop command. While not playing, rd_addr
// rests at 0 so the outputs hold the first sample of the sweep. All channels
// share this one address so the five VCOs sweep in step. The arm/stop protocol,
// the sweep count and the shared address are this design's own choices.
//
// Interface: arm and stop are one-clock strobes (stop wins); trig_in is
// asynchronous and passes a two-flop synchroniser. sweep_start is high on the
// clock where rd_addr is 0 in each period; sweeps_done counts finished periods
// of the current train.
// Timing: the first clock edge that samples trig_in high loads the first
// synchroniser flop; 2 edges later the sequencer is playing with rd_addr = 0 of
// the first period, and sweep_start is high in that clock. Reset is synchronous, active high.
module awg_sequencer #(
  parameter int unsigned DEPTH = 16384,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          trig_in,
  input  logic          arm,
  input  logic          stop,
  input  logic [AW-1:0] last_addr,
  input  logic [31:0]   num_sweeps,
  output logic [AW-1:0] rd_addr,
  output logic          armed,
  output logic          playing,
  output logic          sweep_start,
  output logic [31:0]   sweeps_done
);

  typedef enum logic [1:0] {S_IDLE, S_ARMED, S_PLAY} state_e;
  state_e state;

  logic trig_s1, trig_s2, trig_s3, trig_rise;

  always_ff @(posedge clk) begin
    if (rst) {trig_s1, trig_s2, trig_s3} <= '0;
    else     {trig_s1, trig_s2, trig_s3} <= {trig_in, trig_s1, trig_s2};
  end
  assign trig_rise = trig_s2 & ~trig_s3;

  always_ff @(posedge clk) begin
    if (rst) begin
      state       <= S_IDLE;
      rd_addr     <= '0;
      sweeps_done <= '0;
    end else if (stop) begin
      state   <= S_IDLE;
      rd_addr <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (arm) state <= S_ARMED;
        S_ARMED: if (trig_rise) begin
          state       <= S_PLAY;
          rd_addr     <= '0;
          sweeps_done <= '0;
        end
        S_PLAY: begin
          if (rd_addr == last_addr) begin
            rd_addr     <= '0;
            sweeps_done <= sweeps_done + 32'd1;
            if (num_sweeps != 0 && sweeps_done + 32'd1 == num_sweeps) state <= S_IDLE;
          end else begin
            rd_addr <= rd_addr + AW'(1);
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign armed       = (state == S_ARMED);
  assign playing     = (state == S_PLAY);
  assign sweep_start = playing && (rd_addr == '0);

  // The address never leaves the programmed period while playing.
  a_addr_in_period: assert property (@(posedge clk) disable iff (rst)
    playing |-> rd_addr <= last_addr);

endmodule
