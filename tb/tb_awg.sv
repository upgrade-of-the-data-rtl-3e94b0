// tb_awg: self-checking test of the complete AWG FPGA design at a reduced
// waveform depth (64 words); the calibration tables keep their full 14-bit
// index. Everything is configured through USB command frames, as the host
// would. Checks: channel-to-DAC-port mapping, calibration on some channels and
// bypass on the others, the 5-clock latency from trigger to the first output
// sample, the sweep period and sweep count, the resting output, a trigger
// without arm being ignored, and the stop command in continuous mode.
module tb_awg;
  import awg_pkg::*;
  localparam int DEPTH = 64, NCH = 5, LAST = 39;

  logic clk = 0, rst = 1;
  logic [7:0] usb_data = 0;
  logic usb_valid = 0, usb_ready, trig_in = 0;
  code_t dac_data [3][2];
  awg_status_t status;
  int checks = 0, failures = 0;

  awg #(.DEPTH(DEPTH)) dut (.*);

  always #2 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", msg, $time); end
  endtask

  task automatic send(input logic [7:0] op, input logic [7:0] ch, input logic [15:0] addr, input logic [15:0] data);
    logic [7:0] b [6];
    b = '{op, ch, addr[15:8], addr[7:0], data[15:8], data[7:0]};
    foreach (b[i]) begin
      @(negedge clk); usb_data = b[i]; usb_valid = 1;
      @(posedge clk);
      @(negedge clk); usb_valid = 0;
    end
    repeat (2) @(negedge clk);
  endtask

  function automatic code_t wave(input int c, input int a);
    return code_t'(1000 + c * 2000 + a * 150);
  endfunction
  function automatic code_t cal(input int c, input code_t x);
    return code_t'(16383 - int'(x) + c);
  endfunction
  localparam logic [NCH-1:0] CAL_MASK = 5'b01010;
  function automatic code_t expect_out(input int c, input int a);
    return CAL_MASK[c] ? cal(c, wave(c, a)) : wave(c, a);
  endfunction

  task automatic check_outputs(input int a, input string msg);
    for (int c = 0; c < NCH; c++)
      check(dac_data[c / 2][c % 2] == expect_out(c, a), msg);
    check(dac_data[2][1] == 0, "unused port");
  endtask

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int c = 0; c < NCH; c++)
      for (int a = 0; a <= LAST; a++) begin
        send(OP_WAVE_WR, 8'(c), 16'(a), 16'(wave(c, a)));
        if (CAL_MASK[c]) send(OP_LUT_WR, 8'(c), 16'(wave(c, a)), 16'(cal(c, wave(c, a))));
      end
    send(OP_SET_LEN, 0, 0, 16'(LAST));
    send(OP_SET_COUNT, 0, 0, 16'd2);
    send(OP_CAL_EN, 0, 0, 16'(CAL_MASK));
    repeat (6) @(negedge clk);
    check_outputs(0, "rest value");
    // trigger without arm
    @(negedge clk) trig_in = 1;
    repeat (8) @(negedge clk);
    trig_in = 0;
    check(!status.playing, "unarmed trigger ignored");
    send(OP_ARM, 0, 0, 0);
    check(status.armed, "armed");
    @(negedge clk) trig_in = 1;
    @(posedge clk);                 // edge 0 samples the trigger
    repeat (5) @(posedge clk);      // edges 1..5
    #1;
    for (int p = 0; p < 2; p++)
      for (int a = 0; a <= LAST; a++) begin
        if (p + a > 0) begin @(posedge clk); #1; end
        check_outputs(a, "sweep sample");
      end
    trig_in = 0;
    repeat (3) @(posedge clk); #1;
    check(!status.playing && status.sweeps_done == 2, "stopped after 2 sweeps");
    check_outputs(0, "rest after train");
    // continuous mode stopped by command
    send(OP_SET_COUNT, 0, 0, 0);
    send(OP_ARM, 0, 0, 0);
    @(negedge clk) trig_in = 1;
    repeat (200) @(negedge clk);
    check(status.playing && status.sweeps_done >= 3, "continuous");
    send(OP_STOP, 0, 0, 0);
    check(!status.playing, "stop command");
    trig_in = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
