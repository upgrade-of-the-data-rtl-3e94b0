// dacs_top: the digital logic that the reflectometry data acquisition and
// control system (DACS) develops itself, gathered in one top.
//
// Two parts, on separate clocks, with the bought-in parts of the system at the
// ports:
//  * awg: the five-channel sweep generator FPGA. Its USB byte port faces the
//    USB interface chip, trig_awg comes from the delay lines of the trigger &
//    clock manager, dac_data drives the three dual DACs, clocked by clk_awg,
//    the 250 MHz cleaned clock.
//  * dpm_window: selects 50 us of every 1 ms of the digitizer stream
//    (dig_valid/dig_data at 62.5 MSPS) for the Data Processing Module, whose
//    neural network takes dpm_valid/dpm_data/dpm_first/dpm_index.
// The two parts share nothing but this top; see each module for its timing.
module dacs_top
  import awg_pkg::*;
(
  // AWG board
  input  logic        clk_awg,
  input  logic        rst_awg,
  input  logic [7:0]  usb_data,
  input  logic        usb_valid,
  output logic        usb_ready,
  input  logic        trig_awg,
  output code_t       dac_data [NUM_DAC_CHIPS][2],
  output awg_status_t awg_status,
  // DPM front end
  input  logic        clk_dpm,
  input  logic        rst_dpm,
  input  logic        trig_dpm,
  input  logic        dig_valid,
  input  logic [15:0] dig_data [10],
  output logic        dpm_valid,
  output logic        dpm_first,
  output logic [31:0] dpm_index,
  output logic [15:0] dpm_data [10]
);

  awg u_awg (
    .clk(clk_awg), .rst(rst_awg),
    .usb_data, .usb_valid, .usb_ready,
    .trig_in(trig_awg),
    .dac_data,
    .status(awg_status)
  );

  dpm_window u_dpm (
    .clk(clk_dpm), .rst(rst_dpm),
    .trig(trig_dpm),
    .in_valid(dig_valid), .in_data(dig_data),
    .out_valid(dpm_valid), .out_first(dpm_first), .out_index(dpm_index),
    .out_data(dpm_data)
  );

endmodule
