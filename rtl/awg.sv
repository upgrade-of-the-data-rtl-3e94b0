// awg: the FPGA design of the five-channel arbitrary waveform generator that
// produces the VCO sweep-control voltages of the profile reflectometers.
//
// Following the paper: commands and waveforms arrive from the DACS controller
// over USB and are kept in the FPGA's internal memory; each output sample goes
// through a calibration look-up table that compensates the non-linearity of the
// DAC, amplifiers and VCO; five outputs drive three dual 14-bit 250 MSPS DACs
// (AD9746) from the cleaned clock of the TCM, started by the TCM's delayed
// trigger. This design's own choices: the command frame (awg_pkg), the sweep
// control (awg_sequencer), the RAM depth, and the output mapping: channel c
// goes to DAC chip c/2, port c%2; the unused sixth port is driven with code 0.
//
// Datapath per channel: sequencer address -> awg_wave_ram (1 clock) ->
// awg_cal_lut (1 clock) -> dac_data register (1 clock). So the code read at
// address a reaches dac_data 3 clocks after rd_addr = a, and the first sample
// of a sweep appears on dac_data 5 clocks after the first clock edge that
// samples trig_in high. Configuration after reset: sweep period 12500 samples (50 us at
// 250 MSPS), sweep count 0 (run until stopped), calibration bypassed on all
// channels. Reset is synchronous, active high.
module awg
  import awg_pkg::*;
#(
  parameter int unsigned NUM_CHAN = awg_pkg::NUM_CH,
  parameter int unsigned DEPTH    = awg_pkg::WAVE_DEPTH,
  parameter int unsigned RST_LAST = 12499,
  localparam int unsigned AW      = $clog2(DEPTH),
  localparam int unsigned CHIPS   = (NUM_CHAN + 1) / 2
) (
  input  logic        clk,
  input  logic        rst,
  // FIFO side of the USB interface chip
  input  logic [7:0]  usb_data,
  input  logic        usb_valid,
  output logic        usb_ready,
  // delayed trigger from the trigger & clock manager (asynchronous)
  input  logic        trig_in,
  // data ports of the dual DACs: [chip][port]
  output code_t       dac_data [CHIPS][2],
  output awg_status_t status
);

  awg_cmd_t cmd;
  logic [AW-1:0]       last_addr;
  logic [31:0]         num_sweeps;
  logic [NUM_CHAN-1:0] cal_en;
  logic [AW-1:0]       rd_addr;
  code_t               wave_q [NUM_CHAN];
  code_t               cal_q  [NUM_CHAN];

  usb_cmd_decoder u_dec (
    .clk, .rst, .usb_data, .usb_valid, .usb_ready, .cmd
  );

  // configuration registers
  always_ff @(posedge clk) begin
    if (rst) begin
      last_addr  <= AW'(RST_LAST);
      num_sweeps <= '0;
      cal_en     <= '0;
    end else if (cmd.valid) begin
      unique case (cmd.op)
        OP_SET_LEN:   last_addr  <= cmd.data[AW-1:0];
        OP_SET_COUNT: num_sweeps <= {cmd.addr, cmd.data};
        OP_CAL_EN:    cal_en     <= cmd.data[NUM_CHAN-1:0];
        default: ;
      endcase
    end
  end

  awg_sequencer #(.DEPTH(DEPTH)) u_seq (
    .clk, .rst, .trig_in,
    .arm        (cmd.valid && cmd.op == OP_ARM),
    .stop       (cmd.valid && cmd.op == OP_STOP),
    .last_addr, .num_sweeps, .rd_addr,
    .armed      (status.armed),
    .playing    (status.playing),
    .sweep_start(status.sweep_start),
    .sweeps_done(status.sweeps_done)
  );

  for (genvar c = 0; c < NUM_CHAN; c++) begin : g_ch
    logic sel;
    assign sel = cmd.valid && cmd.ch == 8'(c);

    awg_wave_ram #(.DEPTH(DEPTH), .WIDTH(DAC_W)) u_wave (
      .clk,
      .we   (sel && cmd.op == OP_WAVE_WR),
      .waddr(cmd.addr[AW-1:0]),
      .wdata(cmd.data[DAC_W-1:0]),
      .raddr(rd_addr),
      .rdata(wave_q[c])
    );

    awg_cal_lut #(.ADDR_W(DAC_W), .WIDTH(DAC_W)) u_cal (
      .clk,
      .we      (sel && cmd.op == OP_LUT_WR),
      .waddr   (cmd.addr[DAC_W-1:0]),
      .wdata   (cmd.data[DAC_W-1:0]),
      .cal_en  (cal_en[c]),
      .code_in (wave_q[c]),
      .code_out(cal_q[c])
    );
  end

  // output registers towards the DAC data ports
  always_ff @(posedge clk) begin
    for (int k = 0; k < 2 * CHIPS; k++) begin
      if (k < NUM_CHAN) dac_data[k / 2][k % 2] <= cal_q[k];
      else              dac_data[k / 2][k % 2] <= '0;
    end
  end

endmodule
