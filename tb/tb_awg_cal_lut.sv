// tb_awg_cal_lut: self-checking test of the calibration look-up table.
// Loads a full table given by a formula (a quadratic bend, like a VCO tuning
// curve), then applies a new random code and a random calibration enable on
// every clock. Each output is compared one clock later, just before the inputs
// change again, so both the table contents and the one-clock latency in both
// modes are checked.
module tb_awg_cal_lut;
  localparam int AW = 14, W = 14;
  logic clk = 0, we = 0, cal_en = 0;
  logic [AW-1:0] waddr = 0, code_in = 0;
  logic [W-1:0] wdata = 0, code_out;
  int checks = 0, failures = 0;

  awg_cal_lut #(.ADDR_W(AW), .WIDTH(W)) dut (.*);

  always #2 clk = ~clk;

  function automatic logic [W-1:0] curve(input int x);
    return W'(x + (x * (16383 - x)) / 65536);
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] exp_prev;
    logic [AW-1:0] c;
    logic en;
    bit have_prev;
    have_prev = 0;
    exp_prev = '0;
    for (int a = 0; a < 2 ** AW; a++) begin
      @(negedge clk); we = 1; waddr = AW'(a); wdata = curve(a);
    end
    @(negedge clk) we = 0;
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk);
      if (have_prev) begin
        checks++;
        if (code_out !== exp_prev) begin failures++; $display("step %0d got %0d exp %0d", i, code_out, exp_prev); end
      end
      c = AW'($urandom);
      en = 1'($urandom);
      code_in = c;
      cal_en = en;
      exp_prev = en ? curve(int'(c)) : c;
      have_prev = 1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
