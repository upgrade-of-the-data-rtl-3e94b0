// tb_dpm_window: self-checking test of the DPM data-window selector with a
// short period (PERIOD = 20, WINDOW = 3) and random gaps in the sample stream.
// A reference model counts samples from the trigger; every output beat is
// compared (valid, first, index, data), a retrigger restarts the count and
// nothing passes before the first trigger.
module tb_dpm_window;
  localparam int LANES = 4, SW = 16, PERIOD = 20, WINDOW = 3;
  logic clk = 0, rst = 1, trig = 0, in_valid = 0;
  logic [SW-1:0] in_data [LANES];
  logic out_valid, out_first;
  logic [31:0] out_index;
  logic [SW-1:0] out_data [LANES];
  int checks = 0, failures = 0;

  dpm_window #(.LANES(LANES), .SAMPLE_W(SW), .PERIOD(PERIOD), .WINDOW(WINDOW)) dut (.*);

  always #2 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference model state
  bit m_active = 0;
  int m_pos = 0, m_idx = 0;
  int passed = 0;

  initial begin
    foreach (in_data[l]) in_data[l] = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      bit e_valid, e_first; int e_idx; logic [SW-1:0] e_data [LANES];
      @(negedge clk);
      trig     = (cyc == 30) || (cyc == 1700);
      in_valid = ($urandom_range(0, 3) != 0);
      foreach (in_data[l]) in_data[l] = SW'($urandom);
      // model
      if (trig) begin m_active = 1; m_pos = 0; m_idx = 0; end
      e_valid = m_active && in_valid && (m_pos < WINDOW);
      e_first = m_active && in_valid && (m_pos == 0);
      e_idx   = m_idx;
      e_data  = in_data;
      if (m_active && in_valid) begin
        if (m_pos == PERIOD - 1) begin m_pos = 0; m_idx++; end else m_pos++;
      end
      @(posedge clk); #1;
      checks++;
      if (out_valid !== e_valid || out_first !== e_first) begin
        failures++; $display("cyc %0d valid %0b/%0b first %0b/%0b", cyc, out_valid, e_valid, out_first, e_first);
      end
      if (e_valid) begin
        passed++;
        checks++;
        if (out_index !== 32'(e_idx) || out_data != e_data) begin
          failures++; $display("cyc %0d index %0d/%0d or data", cyc, out_index, e_idx);
        end
      end
    end
    checks++;
    if (passed < 100) begin failures++; $display("too few samples passed: %0d", passed); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
