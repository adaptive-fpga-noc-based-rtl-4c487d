// tb_decode_unit: self-checking test of the command decoder. Every opcode
// value is sent with a random payload under random back-pressure from the
// command side; commands must come out in order with the expected command
// and argument (CMD_ERROR with the opcode for unknown opcodes, nothing for
// OP_NOP), one cycle after the frame is taken at the earliest.
module tb_decode_unit;
  import mspec_pkg::*;

  logic     clk = 1'b0;
  logic     rst_n = 1'b1;
  logic     f_valid = 1'b0, c_ready = 1'b0;
  frame_t   f_frame = '0;
  logic     f_ready, c_valid;
  command_t c_cmd;
  int checks = 0, failures = 0, held = 0;
  command_t model [$];

  always #5 clk = ~clk;

  decode_unit dut (.*);

  function automatic command_t expected(input frame_t f);
    command_t c;
    c.arg = f.payload;
    case (f.op)
      OP_SET_NPIX: c.cmd = CMD_SET_NPIX;
      OP_SET_P1:   c.cmd = CMD_SET_P1;
      OP_LOAD_REF: c.cmd = CMD_LOAD_REF;
      OP_START:    c.cmd = CMD_START;
      OP_SET_NBANDS: c.cmd = CMD_SET_NBANDS;
      default: begin c.cmd = CMD_ERROR; c.arg = 32'(f.op); end
    endcase
    return c;
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (c_valid && c_ready) begin
      checks++;
      if (model.size() == 0 || c_cmd != model[0]) begin
        failures++;
        $display("FAIL command %p", c_cmd);
      end
      if (model.size() != 0) void'(model.pop_front());
    end
    if (c_valid && !c_ready) held++;
    if (f_valid && f_ready && f_frame.op != OP_NOP) model.push_back(expected(f_frame));
  end

  initial begin
    #1 rst_n = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 600; i++) begin
      @(negedge clk);
      f_valid = ($urandom_range(2, 0) != 0);
      f_frame = '{dest: 4'($urandom), op: opcode_e'(i % 16), payload: $urandom};
      c_ready = ($urandom_range(1, 0) != 0);
    end
    @(negedge clk);
    f_valid = 1'b0; c_ready = 1'b1;
    repeat (3) @(negedge clk);
    checks++;
    if (model.size() != 0) begin failures++; $display("FAIL %0d commands lost", model.size()); end
    checks++;
    if (held == 0) begin failures++; $display("FAIL back-pressure never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
