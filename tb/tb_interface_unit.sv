// tb_interface_unit: self-checking test of the dual-clock input FIFO.
// The write side runs at 100 MHz and the read side at 50 MHz (the storage
// and processing module clocks). A counting sequence is written with random
// pauses and read with random back-pressure; every word must arrive once and
// in order. The write side must see the FIFO full at least once and the read
// side must see it empty. A word written into an empty FIFO must be visible
// within four read-clock cycles.
module tb_interface_unit;
  localparam int unsigned NWORDS = 2000;

  logic       wclk = 1'b0, rclk = 1'b0;
  logic       wrst_n = 1'b1, rrst_n = 1'b1;
  logic       w_valid = 1'b0, r_ready = 1'b0;
  logic [7:0] w_data = '0;
  logic       w_ready, r_valid;
  logic [7:0] r_data;
  int checks = 0, failures = 0, full_seen = 0, empty_seen = 0;
  int unsigned nread = 0;

  always #5  wclk = ~wclk;
  always #10 rclk = ~rclk;

  interface_unit #(.DW(8), .DEPTH(16)) dut (.*);

  always @(posedge wclk) if (wrst_n && w_valid && !w_ready) full_seen++;
  always @(posedge rclk) if (rrst_n && !r_valid) empty_seen++;

  // reader
  always @(posedge rclk) begin
    if (rrst_n && r_valid && r_ready) begin
      checks++;
      if (r_data != 8'(nread)) begin
        failures++;
        $display("FAIL word %0d read as %0d", nread, r_data);
      end
      nread++;
    end
  end

  initial begin
    #1 wrst_n = 1'b0; rrst_n = 1'b0;
    repeat (3) @(negedge rclk);
    wrst_n = 1'b1; rrst_n = 1'b1;
    // latency of one word into an empty FIFO
    @(negedge wclk);
    w_valid = 1'b1; w_data = 8'd0;
    @(negedge wclk);
    w_valid = 1'b0;
    begin
      int cyc = 0;
      while (!r_valid && cyc < 10) begin @(negedge rclk); cyc++; end
      checks++;
      if (cyc > 4) begin failures++; $display("FAIL word visible after %0d read cycles", cyc); end
    end
    // stream: first phase fast writer, second phase fast reader
    fork
      begin
        for (int i = 1; i < NWORDS; i++) begin
          @(negedge wclk);
          while ((i > NWORDS / 2) && $urandom_range(3, 0) != 0) begin
            w_valid = 1'b0; @(negedge wclk);
          end
          w_valid = 1'b1; w_data = 8'(i);
          @(posedge wclk);
          while (!w_ready) @(posedge wclk);
        end
        @(negedge wclk);
        w_valid = 1'b0;
      end
      begin
        while (nread < NWORDS) begin
          @(negedge rclk);
          r_ready = (nread < NWORDS / 2) ? ($urandom_range(2, 0) == 0) : 1'b1;
        end
      end
    join
    checks++;
    if (full_seen == 0) begin failures++; $display("FAIL FIFO never full"); end
    checks++;
    if (empty_seen == 0) begin failures++; $display("FAIL FIFO never empty"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge rclk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
