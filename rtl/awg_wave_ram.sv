// awg_wave_ram: waveform memory of one AWG channel, held in FPGA block RAM.
//
// The paper stores the downloaded waveform in the FPGA's internal memory; the
// organisation here is this design's own: a simple dual-port RAM with one write
// port (fed by the USB command decoder) and one read port (stepped by the sweep
// sequencer at the DAC clock rate). The default depth, 16384 words, holds one
// 50 us sweep period (40 us sweep + 10 us dead time) at 250 MSPS.
//
// Timing: a write happens at the clock edge where we is high; rdata shows the
// word at raddr one clock after raddr is presented (registered read). Reading
// an address on the same edge it is written returns the old word. Contents are
// not reset.
module awg_wave_ram #(
  parameter int unsigned DEPTH = 16384,
  parameter int unsigned WIDTH = 14,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
