// tb_awg_sequencer: self-checking test of the sweep sequencer.
// Checks: a trigger without arm is ignored; after arm, rd_addr = 0 and
// sweep_start appear exactly 2 clocks after the first edge that samples the
// trigger high; rd_addr steps 0..last_addr and wraps; playback stops after
// num_sweeps periods; a second trigger while playing is ignored; a stop command
// ends a continuous (num_sweeps = 0) train.
module tb_awg_sequencer;
  localparam int DEPTH = 64, AW = 6;
  logic clk = 0, rst = 1, trig_in = 0, arm = 0, stop = 0;
  logic [AW-1:0] last_addr = 9;
  logic [31:0] num_sweeps = 3;
  logic [AW-1:0] rd_addr;
  logic armed, playing, sweep_start;
  logic [31:0] sweeps_done;
  int checks = 0, failures = 0;

  awg_sequencer #(.DEPTH(DEPTH)) dut (.*);

  always #2 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", msg, $time); end
  endtask

  task automatic pulse_arm(); @(negedge clk) arm = 1; @(negedge clk) arm = 0; endtask

  // raise the trigger just after a negedge; the next posedge samples it (edge 0)
  task automatic fire_and_follow(input int periods, input int last);
    @(negedge clk) trig_in = 1;
    @(posedge clk);                       // edge 0 samples trig_in
    repeat (2) @(posedge clk);            // edges 1..2
    #1;
    check(playing && rd_addr == 0 && sweep_start, "start latency");
    for (int p = 0; p < periods; p++) begin
      for (int a = 0; a <= last; a++) begin
        if (!(p == 0 && a == 0)) begin @(posedge clk); #1; end
        check(playing && rd_addr == AW'(a), "address sequence");
        check(sweep_start == (a == 0), "sweep_start");
        check(sweeps_done == 32'(p), "sweeps_done");
        if (p == 0 && a == 4) trig_in = 0;
        if (p == 1 && a == 2) trig_in = 1;   // retrigger while playing: ignored
      end
    end
    trig_in = 0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    // trigger while idle: nothing happens
    @(negedge clk) trig_in = 1;
    repeat (6) @(negedge clk);
    check(!playing && !armed && rd_addr == 0, "idle ignores trigger");
    trig_in = 0;
    repeat (3) @(negedge clk);
    pulse_arm();
    check(armed, "armed");
    fire_and_follow(3, 9);
    @(posedge clk); #1;
    check(!playing && !armed && rd_addr == 0 && sweeps_done == 3, "stop after count");
    // continuous mode, then stop
    num_sweeps = 0; last_addr = 4;
    repeat (4) @(negedge clk);
    pulse_arm();
    fire_and_follow(5, 4);
    @(posedge clk); #1;
    check(playing && rd_addr == 0 && sweeps_done == 5, "continuous keeps going");
    @(negedge clk) stop = 1;
    @(negedge clk) stop = 0;
    #1 check(!playing && rd_addr == 0, "stop");
    // stop also disarms
    pulse_arm();
    @(negedge clk) stop = 1;
    @(negedge clk) stop = 0;
    check(!armed, "stop disarms");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
