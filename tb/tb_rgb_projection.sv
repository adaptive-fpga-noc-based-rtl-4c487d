// tb_rgb_projection: self-checking test of the spectrum-to-RGB projection.
// A random reference table is written (normalised per component in the
// first images, unnormalised later so that sums saturate), random spectra
// are streamed with random gaps, and every projected pixel is compared with
// sums computed in the testbench, first with all 16 bands, then with 5 and
// with 1 band in use. The result must appear exactly one cycle after the
// last sample of the pixel.
module tb_rgb_projection;
  localparam int unsigned N      = 16;
  localparam int unsigned BAND_W = $clog2(N);

  logic              clk = 1'b0;
  logic              rst_n = 1'b1;
  logic              ref_we = 1'b0;
  logic [BAND_W-1:0] ref_addr = '0;
  logic [23:0]       ref_data = '0;
  logic [BAND_W-1:0] last_band = BAND_W'(N - 1);
  logic              s_valid = 1'b0;
  logic [7:0]        s_data = '0;
  logic              out_valid, out_sat;
  logic [23:0]       out_rgb;
  int checks = 0, failures = 0;
  int unsigned coef [N][3];
  int unsigned spec [N];
  int sat_pixels = 0;

  always #5 clk = ~clk;

  rgb_projection #(.N_BANDS(N)) dut (.*);

  task automatic load_table(input bit normalised);
    for (int k = 0; k < N; k++)
      for (int c = 0; c < 3; c++)
        coef[k][c] = normalised ? $urandom_range(256 / N, 0) : $urandom_range(255, 0);
    for (int k = 0; k < N; k++) begin
      @(negedge clk);
      ref_we = 1'b1;
      ref_addr = BAND_W'(k);
      ref_data = {8'(coef[k][0]), 8'(coef[k][1]), 8'(coef[k][2])};
    end
    @(negedge clk);
    ref_we = 1'b0;
  endtask

  task automatic one_pixel(input bit gaps);
    int unsigned sum [3];
    bit sat;
    logic [23:0] exp_rgb;
    int nb;
    nb = int'(last_band) + 1;
    for (int k = 0; k < nb; k++) spec[k] = $urandom_range(255, 0);
    for (int k = 0; k < nb; k++) begin
      @(negedge clk);
      if (gaps) while ($urandom_range(2, 0) == 0) begin
        s_valid = 1'b0;
        @(negedge clk);
        checks++;
        if (out_valid) begin failures++; $display("FAIL out_valid during a pixel"); end
      end
      s_valid = 1'b1;
      s_data = 8'(spec[k]);
    end
    sat = 0;
    for (int c = 0; c < 3; c++) begin
      sum[c] = 0;
      for (int k = 0; k < nb; k++) sum[c] += spec[k] * coef[k][c];
      sum[c] = sum[c] >> 8;
      if (sum[c] > 255) begin sum[c] = 255; sat = 1; end
    end
    exp_rgb = {8'(sum[0]), 8'(sum[1]), 8'(sum[2])};
    @(negedge clk);
    s_valid = 1'b0;
    checks++;
    if (!out_valid) begin failures++; $display("FAIL no result one cycle after the last sample"); end
    checks++;
    if (out_rgb != exp_rgb || out_sat != sat) begin
      failures++;
      $display("FAIL rgb %h sat %0d, expected %h sat %0d", out_rgb, out_sat, exp_rgb, sat);
    end
    if (sat) sat_pixels++;
  endtask

  initial begin
    #1 rst_n = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    load_table(1);
    for (int p = 0; p < 20; p++) one_pixel(p % 2 == 1);
    load_table(0);
    for (int p = 0; p < 20; p++) one_pixel(p % 2 == 0);
    // shorter spectra: 5 bands, then a single band
    last_band = BAND_W'(4);
    for (int p = 0; p < 10; p++) one_pixel(p % 2 == 0);
    last_band = '0;
    for (int p = 0; p < 10; p++) one_pixel(p % 2 == 0);
    checks++;
    if (sat_pixels == 0) begin failures++; $display("FAIL saturation never exercised"); end
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
