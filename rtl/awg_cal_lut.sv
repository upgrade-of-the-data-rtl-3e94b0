// awg_cal_lut: calibration look-up table of one AWG channel.
//
// The paper builds a look-up table holding a calibration curve into the FPGA so
// that the non-linearity of the DAC, the amplifiers and the VCO is compensated:
// the ideal sweep code is replaced by the DAC code that produces the intended
// frequency. Here the table is indexed by the full 14-bit ideal code, one entry
// per code, with no interpolation (this design's choice). With cal_en low the
// code passes through unchanged; that is the state after reset, so the output
// is defined before a table has been downloaded (also this design's choice).
//
// Timing: code_out follows code_in (and cal_en) by exactly one clock in both
// modes. Table writes take effect at the clock edge where we is high.
module awg_cal_lut #(
  parameter int unsigned ADDR_W = 14,
  parameter int unsigned WIDTH  = 14
) (
  input  logic              clk,
  input  logic              we,
  input  logic [ADDR_W-1:0] waddr,
  input  logic [WIDTH-1:0]  wdata,
  input  logic              cal_en,
  input  logic [ADDR_W-1:0] code_in,
  output logic [WIDTH-1:0]  code_out
);

  logic [WIDTH-1:0] table_q [2**ADDR_W];
  logic [WIDTH-1:0] lut_rd;
  logic             cal_en_q;
  logic [WIDTH-1:0] bypass_q;

  always_ff @(posedge clk) begin
    if (we) table_q[waddr] <= wdata;
    lut_rd   <= table_q[code_in];
    cal_en_q <= cal_en;
    bypass_q <= WIDTH'(code_in);
  end

  assign code_out = cal_en_q ? lut_rd : bypass_q;

endmodule
