// dpm_window: selects the share of the profile-reflectometer data that is sent
// to the Data Processing Module (DPM).
//
// The DPM cannot process the full stream, so, as in the paper, only 50 us of
// data out of every 1 ms goes to it. At the paper's 62.5 MSPS (250 MSPS
// decimated by 4) that is the first WINDOW = 3125 samples of every
// PERIOD = 62500. Counting is in samples (in_valid beats), not clock cycles, so
// the selection holds whatever the clock-to-sample ratio. Counting starts at
// the trigger: the first valid sample at or after a trig pulse (the same clock
// included) is sample 0 of window 0. Before the first trigger nothing passes.
// A new trigger restarts the count. Where this selection sits in the system
// and its trigger alignment are this design's choices.
//
// Interface: one word of LANES samples, SAMPLE_W bits each (2 bytes, as in the
// paper's data-rate formula), per in_valid beat. Outputs: out_valid marks a
// sample inside a window, out_first its first sample, out_index the window
// number since the trigger. Timing: outputs are registered, one clock after
// the input. Reset is synchronous, active high.
module dpm_window #(
  parameter int unsigned LANES    = 10,
  parameter int unsigned SAMPLE_W = 16,
  parameter int unsigned PERIOD   = 62500,
  parameter int unsigned WINDOW   = 3125
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                trig,
  input  logic                in_valid,
  input  logic [SAMPLE_W-1:0] in_data [LANES],
  output logic                out_valid,
  output logic                out_first,
  output logic [31:0]         out_index,
  output logic [SAMPLE_W-1:0] out_data [LANES]
);

  localparam int unsigned PW = $clog2(PERIOD);

  logic          active;
  logic [PW-1:0] pos;
  logic [31:0]   idx;

  logic          cur_active;
  logic [PW-1:0] cur_pos;
  logic [31:0]   cur_idx;

  always_comb begin
    cur_active = active | trig;
    cur_pos    = trig ? '0 : pos;
    cur_idx    = trig ? '0 : idx;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      active    <= 1'b0;
      pos       <= '0;
      idx       <= '0;
      out_valid <= 1'b0;
      out_first <= 1'b0;
      out_index <= '0;
    end else begin
      active    <= cur_active;
      pos       <= cur_pos;
      idx       <= cur_idx;
      out_valid <= 1'b0;
      out_first <= 1'b0;
      if (cur_active && in_valid) begin
        out_valid <= (cur_pos < PW'(WINDOW));
        out_first <= (cur_pos == '0);
        out_index <= cur_idx;
        if (cur_pos == PW'(PERIOD - 1)) begin
          pos <= '0;
          idx <= cur_idx + 32'd1;
        end else begin
          pos <= cur_pos + PW'(1);
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) out_data <= in_data;
  end

endmodule
