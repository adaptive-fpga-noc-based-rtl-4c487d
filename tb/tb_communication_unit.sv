// tb_communication_unit: self-checking test of the receive and send blocks.
// Random frames, some addressed to this module and some to others, arrive
// under random handshakes while a result source offers frames and the
// network output applies random back-pressure. Checks: frames for this
// module reach the decode side in order and nothing else does; other frames
// leave on the output in order, unchanged; result frames leave in order;
// when both kinds wait the send block alternates (no source is granted twice
// in a row while the other waits); a frame passing through an idle unit
// leaves two cycles after it is offered.
module tb_communication_unit;
  import mspec_pkg::*;
  localparam logic [3:0] ME = 4'd5;

  logic   clk = 1'b0;
  logic   rst_n = 1'b1;
  logic   rx_valid = 1'b0, dec_ready = 1'b0, res_valid = 1'b0, tx_ready = 1'b0;
  frame_t rx_frame = '0, res_frame = '0;
  logic   rx_ready, dec_valid, res_ready, tx_valid, fwd_pulse;
  frame_t dec_frame, tx_frame;
  int checks = 0, failures = 0, contention = 0;
  frame_t exp_dec [$], exp_fwd [$], exp_res [$];
  int last_src = 0;   // 1 forwarded, 2 result

  always #5 clk = ~clk;

  communication_unit #(.MY_ADDR(ME)) dut (.*);

  always @(posedge clk) if (rst_n) begin
    if (rx_valid && rx_ready) begin
      if (rx_frame.dest == ME) exp_dec.push_back(rx_frame); else exp_fwd.push_back(rx_frame);
    end
    if (dec_valid && dec_ready) begin
      checks++;
      if (exp_dec.size() == 0 || dec_frame != exp_dec[0]) begin failures++; $display("FAIL decode got %h", dec_frame); end
      else void'(exp_dec.pop_front());
    end
    if (fwd_pulse && res_valid) begin
      contention++;
      checks++;
      if (last_src == 1) begin failures++; $display("FAIL forwarded twice while a result waited"); end
    end
    if (res_valid && res_ready && dut.fwd_req) begin
      contention++;
      checks++;
      if (last_src == 2) begin failures++; $display("FAIL result twice while a forward waited"); end
    end
    if (fwd_pulse) last_src = 1;
    if (res_valid && res_ready) begin
      last_src = 2;
      exp_res.push_back(res_frame);
    end
    if (tx_valid && tx_ready) begin
      checks++;
      if (tx_frame.dest != CONTROL_ADDR || tx_frame.op < OP_RESULT_R1) begin
        if (exp_fwd.size() == 0 || tx_frame != exp_fwd[0]) begin failures++; $display("FAIL forwarded %h", tx_frame); end
        else void'(exp_fwd.pop_front());
      end else begin
        if (exp_res.size() == 0 || tx_frame != exp_res[0]) begin failures++; $display("FAIL result %h", tx_frame); end
        else void'(exp_res.pop_front());
      end
    end
  end

  function automatic frame_t rand_rx();
    frame_t f;
    logic [3:0] d;
    d = ($urandom_range(2, 0) == 0) ? ME : 4'($urandom_range(15, 1));
    f = '{dest: d, op: opcode_e'($urandom_range(4, 0)), payload: $urandom};
    return f;
  endfunction

  initial begin
    #1 rst_n = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // pass-through latency with an idle unit
    @(negedge clk);
    tx_ready = 1'b1;
    rx_valid = 1'b1; rx_frame = '{dest: 4'd9, op: OP_START, payload: 32'h1234};
    @(negedge clk);
    rx_valid = 1'b0;
    @(negedge clk);
    checks++;
    if (!tx_valid || tx_frame.dest != 4'd9) begin failures++; $display("FAIL pass-through not after two cycles"); end
    @(negedge clk);
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      if (!rx_valid || rx_ready) begin
        rx_valid = ($urandom_range(1, 0) != 0);
        rx_frame = rand_rx();
      end
      if (!res_valid || res_ready) begin
        res_valid = ($urandom_range(2, 0) == 0);
        res_frame = '{dest: CONTROL_ADDR, op: ($urandom_range(1, 0) ? OP_RESULT_R1 : OP_RESULT_AUTH), payload: $urandom};
      end
      dec_ready = ($urandom_range(1, 0) != 0);
      tx_ready  = ($urandom_range(3, 0) != 0);
    end
    // drain
    @(negedge clk);
    rx_valid = 1'b0; res_valid = 1'b0; dec_ready = 1'b1; tx_ready = 1'b1;
    repeat (10) @(negedge clk);
    checks++;
    if (exp_dec.size() + exp_fwd.size() + exp_res.size() != 0) begin
      failures++;
      $display("FAIL lost frames: %0d %0d %0d", exp_dec.size(), exp_fwd.size(), exp_res.size());
    end
    checks++;
    if (contention == 0) begin failures++; $display("FAIL no contention"); end
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
