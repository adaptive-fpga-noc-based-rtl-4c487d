// tb_isqrt: self-checking test of the sequential integer square root.
// Drives edge values (0, 1, perfect squares and their neighbours, the
// largest radicand) and random radicands, compares each root with a
// reference computed by search in the testbench, and checks that done comes
// exactly OUT_W cycles after start.
module tb_isqrt;
  localparam int unsigned IN_W  = 18;
  localparam int unsigned OUT_W = 9;

  logic             clk = 1'b0;
  logic             rst_n = 1'b1;
  logic             start = 1'b0;
  logic [IN_W-1:0]  x = '0;
  logic             ready, done;
  logic [OUT_W-1:0] root;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  isqrt #(.IN_W(IN_W), .OUT_W(OUT_W)) dut (.*);

  function automatic int unsigned ref_sqrt(input int unsigned v);
    int unsigned r = 0;
    while ((r + 1) * (r + 1) <= v) r++;
    return r;
  endfunction

  task automatic run_one(input int unsigned v);
    int cyc = 0;
    @(negedge clk);
    x = IN_W'(v);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (root != OUT_W'(ref_sqrt(v))) begin
      failures++;
      $display("FAIL sqrt(%0d) = %0d, expected %0d", v, root, ref_sqrt(v));
    end
    checks++;
    if (cyc != OUT_W) begin
      failures++;
      $display("FAIL latency %0d cycles after the start cycle, expected %0d", cyc, OUT_W);
    end
  endtask

  initial begin
    #1 rst_n = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run_one(0); run_one(1); run_one(2); run_one(3); run_one(4);
    run_one(195075); run_one((1 << IN_W) - 1);
    for (int k = 2; k < 512; k += 37) begin
      run_one(k * k - 1); run_one(k * k); run_one(k * k + 1);
    end
    for (int i = 0; i < 300; i++) run_one($urandom_range((1 << IN_W) - 1, 0));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
