// tb_storage_unit: self-checking test of the result frame FIFO. Random
// frames are pushed and popped with random handshakes; the popped sequence
// must equal the pushed one, push_ready must drop exactly when DEPTH frames
// are held, count must track the fill level, and a frame pushed into an
// empty FIFO must be poppable on the next cycle.
module tb_storage_unit;
  import mspec_pkg::*;
  localparam int unsigned DEPTH = 4;

  logic   clk = 1'b0;
  logic   rst_n = 1'b1;
  logic   push_valid = 1'b0, pop_ready = 1'b0;
  frame_t push_frame = '0;
  logic   push_ready, pop_valid;
  frame_t pop_frame;
  logic [2:0] count;
  int checks = 0, failures = 0, full_seen = 0;
  frame_t model [$];

  always #5 clk = ~clk;

  storage_unit #(.DEPTH(DEPTH)) dut (.*);

  always @(posedge clk) if (rst_n) begin
    checks++;
    if (count != 3'(model.size()) || push_ready != (model.size() < DEPTH) || pop_valid != (model.size() > 0)) begin
      failures++;
      $display("FAIL count %0d ready %0d valid %0d, model holds %0d", count, push_ready, pop_valid, model.size());
    end
    if (pop_valid && pop_ready) begin
      checks++;
      if (pop_frame != model[0]) begin failures++; $display("FAIL popped %h expected %h", pop_frame, model[0]); end
      void'(model.pop_front());
    end
    if (push_valid && push_ready) model.push_back(push_frame);
    if (!push_ready) full_seen++;
  end

  initial begin
    #1 rst_n = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // next-cycle visibility
    @(negedge clk);
    push_valid = 1'b1; push_frame = frame_t'(40'hA5_1234_5678);
    @(negedge clk);
    push_valid = 1'b0;
    checks++;
    if (!pop_valid || pop_frame != frame_t'(40'hA5_1234_5678)) begin failures++; $display("FAIL frame not visible next cycle"); end
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      push_valid = ($urandom_range(99, 0) < ((i / 200) % 2 ? 30 : 80));
      push_frame = frame_t'({$urandom, 8'($urandom)});
      pop_ready  = ($urandom_range(99, 0) < ((i / 200) % 2 ? 80 : 30));
    end
    @(negedge clk);
    push_valid = 1'b0; pop_ready = 1'b0;
    checks++;
    if (full_seen == 0) begin failures++; $display("FAIL never full"); end
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
