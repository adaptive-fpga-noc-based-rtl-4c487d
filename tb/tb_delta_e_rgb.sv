// tb_delta_e_rgb: self-checking test of the RGB distance unit. Random and
// extreme colour pairs are applied; the integer distance and the squared
// distance are compared with values computed in the testbench, and the
// result must arrive 1 + DE_W cycles after the pair is taken.
module tb_delta_e_rgb;
  logic        clk = 1'b0;
  logic        rst_n = 1'b1;
  logic        in_valid = 1'b0;
  logic        in_ready;
  logic [23:0] a = '0, b = '0;
  logic        out_valid;
  logic [8:0]  out_de;
  logic [17:0] out_dsq;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  delta_e_rgb dut (.*);

  task automatic one_pair(input logic [23:0] va, input logic [23:0] vb);
    int unsigned dsq = 0, r = 0;
    int cyc = 0;
    for (int c = 0; c < 3; c++) begin
      int d;
      d = int'(va[c*8 +: 8]) - int'(vb[c*8 +: 8]);
      dsq += d * d;
    end
    while ((r + 1) * (r + 1) <= dsq) r++;
    @(negedge clk);
    while (!in_ready) @(negedge clk);
    a = va; b = vb; in_valid = 1'b1;
    @(negedge clk);
    in_valid = 1'b0;
    while (!out_valid) begin @(negedge clk); cyc++; end
    checks++;
    if (out_de != 9'(r) || out_dsq != 18'(dsq)) begin
      failures++;
      $display("FAIL %h vs %h: dE %0d dsq %0d, expected %0d %0d", va, vb, out_de, out_dsq, r, dsq);
    end
    checks++;
    if (cyc != 10) begin failures++; $display("FAIL latency %0d", cyc); end
  endtask

  initial begin
    #1 rst_n = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    one_pair(24'h000000, 24'h000000);
    one_pair(24'hFFFFFF, 24'h000000);
    one_pair(24'h000000, 24'hFFFFFF);
    one_pair(24'h102030, 24'h102030);
    one_pair(24'h0A0000, 24'h000000);
    for (int i = 0; i < 300; i++) one_pair(24'($urandom), 24'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
