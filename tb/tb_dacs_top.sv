// tb_dacs_top: end-to-end test of the whole design at its default sizes.
//
// AWG side (250 MHz clock): the host writes, over the USB byte port, a full
// sweep period for all five channels, 12500 samples each (a 40 us linear
// ramp of 10000 samples, then 2500 samples of dead time at the rest code).
// It also writes full 16384-entry calibration tables for channels 0 and 2 and
// enables calibration on those two. It then checks one unarmed trigger (must be
// ignored), a train of two sweeps (every output sample of every channel compared
// with the model, the first one exactly 5 clocks after the trigger is sampled),
// the rest value afterwards, a continuous train ended by the stop command, and
// a train of three 10 us sweep periods (2500 samples) set by command.
//
// DPM side (62.5 MSPS sample clock): 10 lanes of samples with occasional gaps
// run through the window selector for over two 1 ms periods and a retrigger;
// every sample handed on must be one of the first 3125 samples of its period.
//
// Each mechanism is counted and must have happened at least once.
module tb_dacs_top;
  import awg_pkg::*;
  localparam int PERIOD_S = 12500, SWEEP_S = 10000, NCH = 5;
  localparam logic [NCH-1:0] CAL_MASK = 5'b00101;

  logic clk_awg = 0, rst_awg = 1, clk_dpm = 0, rst_dpm = 1;
  logic [7:0] usb_data = 0;
  logic usb_valid = 0, usb_ready, trig_awg = 0;
  code_t dac_data [NUM_DAC_CHIPS][2];
  awg_status_t awg_status;
  logic trig_dpm = 0, dig_valid = 0;
  logic [15:0] dig_data [10];
  logic dpm_valid, dpm_first;
  logic [31:0] dpm_index;
  logic [15:0] dpm_data [10];

  int checks = 0, failures = 0;
  int n_short_period = 0, n_unarmed_ignored = 0, n_sweep_wrap = 0, n_count_end = 0, n_stop_cmd = 0;
  int n_cal_samples = 0, n_bypass_samples = 0, n_dpm_windows = 0, n_dpm_dropped = 0, n_dpm_retrig = 0;
  bit awg_done = 0, dpm_done = 0;

  dacs_top dut (.*);

  always #2 clk_awg = ~clk_awg;   // 250 MHz
  always #8 clk_dpm = ~clk_dpm;   // 62.5 MHz

  initial begin
    repeat (3000000) @(posedge clk_awg);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s at %0t", msg, $time); end
  endtask

  // ---------------- AWG side ----------------
  task automatic send(input logic [7:0] op, input logic [7:0] ch, input logic [15:0] addr, input logic [15:0] data);
    logic [7:0] b [6];
    b = '{op, ch, addr[15:8], addr[7:0], data[15:8], data[7:0]};
    foreach (b[i]) begin
      @(negedge clk_awg); usb_data = b[i]; usb_valid = 1;
    end
    @(negedge clk_awg); usb_valid = 0;
  endtask

  // wait until the last command has taken effect (strobe + register)
  task automatic settle(); repeat (2) @(negedge clk_awg); endtask

  // ideal sweep: ramp from 1000+800c up by 1 code per sample... scaled to
  // cover 10000 samples, then dead time at the start code
  function automatic code_t wave(input int c, input int a);
    if (a < SWEEP_S) return code_t'(1000 + 800 * c + (a * 12) / 10);
    return code_t'(1000 + 800 * c);
  endfunction
  // calibration curve: a bend that pre-distorts the VCO tuning curve
  function automatic code_t cal(input int c, input int x);
    return code_t'(x - (x * (16383 - x)) / (131072 >> c));
  endfunction
  function automatic code_t expect_out(input int c, input int a);
    return CAL_MASK[c] ? cal(c, int'(wave(c, a))) : wave(c, a);
  endfunction

  task automatic check_all(input int a, input string msg);
    for (int c = 0; c < NCH; c++) begin
      check(dac_data[c / 2][c % 2] == expect_out(c, a), msg);
      if (CAL_MASK[c]) n_cal_samples++; else n_bypass_samples++;
    end
    check(dac_data[2][1] == 0, "unused DAC port");
  endtask

  initial begin : awg_side
    repeat (3) @(posedge clk_awg);
    @(negedge clk_awg) rst_awg = 0;
    for (int c = 0; c < NCH; c++)
      for (int a = 0; a < PERIOD_S; a++) send(OP_WAVE_WR, 8'(c), 16'(a), 16'(wave(c, a)));
    for (int c = 0; c < NCH; c++)
      if (CAL_MASK[c])
        for (int x = 0; x < 16384; x++) send(OP_LUT_WR, 8'(c), 16'(x), 16'(cal(c, x)));
    send(OP_SET_COUNT, 0, 0, 16'd2);
    send(OP_CAL_EN, 0, 0, 16'(CAL_MASK));
    repeat (5) @(negedge clk_awg);
    check_all(0, "rest value");
    // trigger while not armed
    @(negedge clk_awg) trig_awg = 1;
    repeat (10) @(negedge clk_awg);
    trig_awg = 0;
    if (!awg_status.playing) n_unarmed_ignored++;
    check(!awg_status.playing, "unarmed trigger");
    send(OP_ARM, 0, 0, 0);
    settle();
    check(awg_status.armed, "armed");
    repeat (3) @(negedge clk_awg);
    trig_awg = 1;                         // default sweep period from reset: 12500
    @(posedge clk_awg);
    repeat (5) @(posedge clk_awg);
    #1;
    for (int p = 0; p < 2; p++)
      for (int a = 0; a < PERIOD_S; a++) begin
        if (p + a > 0) begin @(posedge clk_awg); #1; end
        if (a == 0 && p > 0) n_sweep_wrap++;
        check_all(a, "sweep sample");
      end
    trig_awg = 0;
    repeat (3) @(posedge clk_awg); #1;
    check(!awg_status.playing && awg_status.sweeps_done == 2, "train of 2 sweeps");
    if (!awg_status.playing && awg_status.sweeps_done == 2) n_count_end++;
    check_all(0, "rest after train");
    // continuous train, ended by the host
    send(OP_SET_COUNT, 0, 0, 0);
    send(OP_ARM, 0, 0, 0);
    @(negedge clk_awg) trig_awg = 1;
    repeat (3 * PERIOD_S + 100) @(negedge clk_awg);
    check(awg_status.playing && awg_status.sweeps_done == 3, "continuous train");
    send(OP_STOP, 0, 0, 0);
    settle();
    check(!awg_status.playing, "stop");
    if (!awg_status.playing) n_stop_cmd++;
    trig_awg = 0;
    // shorter sweep period: 10 us = 2500 samples, the faster sweep the paper
    // foresees; the same stored table is played over its first 2500 samples
    send(OP_SET_LEN, 0, 0, 16'd2499);
    send(OP_SET_COUNT, 0, 0, 16'd3);
    send(OP_ARM, 0, 0, 0);
    settle();
    @(negedge clk_awg) trig_awg = 1;
    @(posedge clk_awg);
    repeat (5) @(posedge clk_awg);
    #1;
    for (int p = 0; p < 3; p++)
      for (int a = 0; a < 2500; a++) begin
        if (p + a > 0) begin @(posedge clk_awg); #1; end
        check_all(a, "10 us sweep sample");
      end
    repeat (3) @(posedge clk_awg); #1;
    check(!awg_status.playing && awg_status.sweeps_done == 3, "train of 3 short sweeps");
    if (!awg_status.playing && awg_status.sweeps_done == 3) n_short_period++;
    trig_awg = 0;
    awg_done = 1;
  end

  // ---------------- DPM side ----------------
  // The driver keeps a reference count of samples since the trigger and
  // compares every registered output beat with it.
  localparam int PERIOD_D = 62500, WINDOW_D = 3125;

  initial begin : dpm_side
    bit m_active;
    int m_n, win_count;
    bit e_valid, e_first;
    int e_idx;
    logic [15:0] e_data [10];
    m_active = 0; m_n = 0; win_count = 0;
    foreach (dig_data[l]) dig_data[l] = '0;
    repeat (3) @(posedge clk_dpm);
    @(negedge clk_dpm) rst_dpm = 0;
    for (int cyc = 0; cyc < 2 * PERIOD_D + 20000 + 70000; cyc++) begin
      @(negedge clk_dpm);
      trig_dpm  = (cyc == 10) || (cyc == 150000);
      dig_valid = (cyc % 97) != 50;
      if (trig_dpm) begin
        if (m_active) n_dpm_retrig++;
        m_active = 1; m_n = 0;
      end
      foreach (dig_data[l]) dig_data[l] = 16'(cyc * 10 + l);
      e_valid = m_active && dig_valid && (m_n % PERIOD_D) < WINDOW_D;
      e_first = m_active && dig_valid && (m_n % PERIOD_D) == 0;
      e_idx   = m_n / PERIOD_D;
      e_data  = dig_data;
      if (m_active && dig_valid) begin
        m_n++;
        if (!e_valid) n_dpm_dropped++;
      end
      @(posedge clk_dpm); #1;
      checks++;
      if (dpm_valid !== e_valid || dpm_first !== e_first) begin
        failures++;
        if (failures < 20) $display("DPM cyc %0d valid %0b/%0b first %0b/%0b", cyc, dpm_valid, e_valid, dpm_first, e_first);
      end
      if (e_first) begin
        if (win_count != 0) begin
          checks++;
          if (win_count != WINDOW_D && e_idx != 0) begin failures++; $display("window of %0d samples", win_count); end
        end
        win_count = 0;
        n_dpm_windows++;
      end
      if (e_valid) begin
        win_count++;
        checks++;
        if (dpm_index !== 32'(e_idx) || dpm_data != e_data) begin
          failures++;
          if (failures < 20) $display("DPM cyc %0d index %0d/%0d or data", cyc, dpm_index, e_idx);
        end
      end
    end
    @(negedge clk_dpm) dig_valid = 0;
    dpm_done = 1;
  end

  initial begin
    wait (awg_done && dpm_done);
    $display("mechanisms: unarmed_trigger_ignored=%0d sweep_wrap=%0d count_end=%0d stop_cmd=%0d short_period=%0d",
             n_unarmed_ignored, n_sweep_wrap, n_count_end, n_stop_cmd, n_short_period);
    $display("mechanisms: calibrated_samples=%0d bypassed_samples=%0d dpm_windows=%0d dpm_dropped=%0d dpm_retrigger=%0d",
             n_cal_samples, n_bypass_samples, n_dpm_windows, n_dpm_dropped, n_dpm_retrig);
    if (n_unarmed_ignored == 0) failures++;
    if (n_sweep_wrap == 0) failures++;
    if (n_count_end == 0) failures++;
    if (n_stop_cmd == 0) failures++;
    if (n_short_period == 0) failures++;
    if (n_cal_samples == 0 || n_bypass_samples == 0) failures++;
    if (n_dpm_windows < 3 || n_dpm_dropped == 0 || n_dpm_retrig == 0) failures++;
    checks += 7;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
