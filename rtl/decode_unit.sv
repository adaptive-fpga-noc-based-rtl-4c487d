// decode_unit: turns command frames addressed to this module into commands
// for the control unit.
//
// The receive block hands over every frame whose destination is this
// module. The decode unit checks the opcode, maps it to a command with its
// argument and holds it in an output register until the control unit takes
// it. An opcode that is not a command of this module becomes CMD_ERROR with
// the opcode as argument, so the control unit can report it; OP_NOP is
// dropped. The paper only
// names the decode unit; the opcode set and this behaviour are this design's
// choices.
//
// Interface: frame side and command side are valid/ready; a frame is taken
// in one cycle and its command is offered from the next cycle on. One
// command is held at a time.
module decode_unit
  import mspec_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     f_valid,
  input  frame_t   f_frame,
  output logic     f_ready,
  output logic     c_valid,
  output command_t c_cmd,
  input  logic     c_ready
);
  command_t decoded;

  always_comb begin
    decoded.arg = f_frame.payload;
    unique case (f_frame.op)
      OP_SET_NPIX: decoded.cmd = CMD_SET_NPIX;
      OP_SET_P1:   decoded.cmd = CMD_SET_P1;
      OP_LOAD_REF: decoded.cmd = CMD_LOAD_REF;
      OP_START:    decoded.cmd = CMD_START;
      OP_SET_NBANDS: decoded.cmd = CMD_SET_NBANDS;
      default: begin
        decoded.cmd = CMD_ERROR;
        decoded.arg = PAYLOAD_W'(f_frame.op);
      end
    endcase
  end

  assign f_ready = !c_valid || c_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c_valid <= 1'b0;
      c_cmd   <= '{cmd: CMD_ERROR, arg: '0};
    end else if (f_ready) begin
      c_valid <= f_valid && f_frame.op != OP_NOP;
      if (f_valid) c_cmd <= decoded;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   (c_valid && !c_ready) |=> c_valid && $stable(c_cmd));
endmodule
