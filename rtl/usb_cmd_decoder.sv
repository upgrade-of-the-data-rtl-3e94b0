// usb_cmd_decoder: assembles 6-byte command frames arriving from the USB
// interface chip and presents each finished frame as one awg_cmd_t strobe.
//
// The paper states only that commands and waveform data reach the AWG's FPGA
// through a USB interface chip and are stored in the FPGA's internal memory.
// The byte interface (valid/ready, already in the AWG clock domain) and the
// frame layout (see awg_pkg) are this design's own.
//
// Interface: usb_data/usb_valid/usb_ready is a valid/ready byte stream; a byte
// moves on a clock edge where both are high. The decoder is always ready.
// Timing: cmd.valid is high for exactly one clock, on the clock after the edge
// that accepted the sixth byte of a frame. Frames with an unknown opcode are
// dropped (cmd.valid stays low). Reset is synchronous and active high and
// clears a partly received frame.
module usb_cmd_decoder
  import awg_pkg::*;
(
  input  logic       clk,
  input  logic       rst,
  input  logic [7:0] usb_data,
  input  logic       usb_valid,
  output logic       usb_ready,
  output awg_cmd_t   cmd
);

  logic [2:0]  byte_idx;
  logic [7:0]  frame [FRAME_BYTES-1];   // bytes 0..4; byte 5 is taken directly

  assign usb_ready = 1'b1;

  function automatic logic op_known(logic [7:0] b);
    return b inside {OP_WAVE_WR, OP_LUT_WR, OP_SET_LEN, OP_SET_COUNT, OP_CAL_EN, OP_ARM, OP_STOP};
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      byte_idx  <= '0;
      cmd       <= '0;
    end else begin
      cmd.valid <= 1'b0;
      if (usb_valid && usb_ready) begin
        if (byte_idx == 3'(FRAME_BYTES - 1)) begin
          byte_idx  <= '0;
          cmd.valid <= op_known(frame[0]);
          cmd.op    <= awg_op_e'(frame[0]);
          cmd.ch    <= frame[1];
          cmd.addr  <= {frame[2], frame[3]};
          cmd.data  <= {frame[4], usb_data};
        end else begin
          frame[byte_idx] <= usb_data;
          byte_idx        <= byte_idx + 3'd1;
        end
      end
    end
  end

endmodule
