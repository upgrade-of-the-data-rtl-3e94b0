// tb_usb_cmd_decoder: self-checking test of the USB command-frame decoder.
// Sends 400 frames (random opcodes, some unknown, random gaps between bytes)
// and checks that every known frame gives exactly one cmd strobe, one clock
// after its last byte, with the right fields, and that unknown ones give none.
// A reset in the middle of a frame must discard the partial frame.
module tb_usb_cmd_decoder;
  import awg_pkg::*;

  logic clk = 0, rst = 1;
  logic [7:0] usb_data = 0;
  logic usb_valid = 0, usb_ready;
  awg_cmd_t cmd;
  int checks = 0, failures = 0;

  usb_cmd_decoder dut (.*);

  always #2 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected command for the strobe one clock after the last byte
  awg_cmd_t exp_q [$];
  int strobes = 0;

  always @(posedge clk) begin
    if (!rst && cmd.valid) begin
      strobes++;
      checks++;
      if (exp_q.size() == 0) begin
        failures++;
        $display("unexpected strobe op=%02h", cmd.op);
      end else begin
        awg_cmd_t e;
        e = exp_q.pop_front();
        if (cmd != e) begin
          failures++;
          $display("mismatch got %h exp %h", cmd, e);
        end
      end
    end
  end

  task automatic send_byte(input logic [7:0] b);
    int gap = $urandom_range(0, 2);
    repeat (gap) @(negedge clk);
    @(negedge clk);
    usb_data  = b;
    usb_valid = 1;
    @(posedge clk);
    checks++;
    if (!usb_ready) begin failures++; $display("not ready"); end
    @(negedge clk);
    usb_valid = 0;
  endtask

  task automatic send_frame(input logic [7:0] op, input logic [7:0] ch,
                            input logic [15:0] addr, input logic [15:0] data);
    send_byte(op); send_byte(ch); send_byte(addr[15:8]); send_byte(addr[7:0]);
    send_byte(data[15:8]); send_byte(data[7:0]);
  endtask

  initial begin
    int expected = 0;
    repeat (4) @(posedge clk);
    @(negedge clk) rst = 0;
    // partial frame, then reset, must be dropped
    send_byte(8'h01); send_byte(8'h02); send_byte(8'h03);
    @(negedge clk) rst = 1;
    @(negedge clk) rst = 0;
    for (int i = 0; i < 400; i++) begin
      logic [7:0] op;
      awg_cmd_t e;
      op = ($urandom_range(0, 9) == 0) ? 8'($urandom_range(8, 255)) : 8'($urandom_range(1, 7));
      e.valid = 1'b1;
      e.op    = awg_op_e'(op);
      e.ch    = 8'($urandom_range(0, 4));
      e.addr  = 16'($urandom);
      e.data  = 16'($urandom);
      if (op >= 8'h01 && op <= 8'h07) begin exp_q.push_back(e); expected++; end
      send_frame(op, e.ch, e.addr, e.data);
      // the strobe must appear on the clock right after the last byte
      @(posedge clk);
    end
    repeat (4) @(posedge clk);
    checks++;
    if (strobes != expected || exp_q.size() != 0) begin
      failures++;
      $display("strobes %0d expected %0d left %0d", strobes, expected, exp_q.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
