// tb_awg_wave_ram: self-checking test of the waveform RAM at full depth.
// Fills all 16384 words with a pattern, reads them back in random order and
// checks the one-clock read latency and read-before-write on a shared address.
module tb_awg_wave_ram;
  localparam int DEPTH = 16384, WIDTH = 14, AW = 14;
  logic clk = 0, we = 0;
  logic [AW-1:0] waddr = 0, raddr = 0;
  logic [WIDTH-1:0] wdata = 0, rdata;
  int checks = 0, failures = 0;
  logic [WIDTH-1:0] model [DEPTH];

  awg_wave_ram #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);

  always #2 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1; waddr = AW'(a); wdata = WIDTH'((a * 37 + 5) ^ (a >> 3));
      model[a] = wdata;
    end
    @(negedge clk) we = 0;
    for (int i = 0; i < 4000; i++) begin
      logic [AW-1:0] a;
      a = AW'($urandom);
      @(negedge clk) raddr = a;
      @(negedge clk);
      checks++;
      if (rdata !== model[a]) begin failures++; $display("addr %0d got %h exp %h", a, rdata, model[a]); end
    end
    // read and write the same word on one edge: old value comes out
    @(negedge clk);
    raddr = 14'd100; waddr = 14'd100; wdata = ~model[100]; we = 1;
    @(negedge clk);
    we = 0;
    checks++;
    if (rdata !== model[100]) begin failures++; $display("read-during-write"); end
    @(negedge clk);
    checks++;
    if (rdata !== ~model[100]) begin failures++; $display("write lost"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
