// tb_rgb_processing_unit: self-checking test of the RGB distance algorithm.
// With a short spectrum (N_BANDS = 2, shorter than the distance latency, so
// the unit must stall its input) the test loads a random reference table,
// streams random OI/CI images with random gaps and checks every per-pixel
// distance, the image distance R1 and the R1 < P1 verdict against the
// reference model. Thresholds just above and at R1 are both tried, a
// zero-pixel image is run, and the last images use one wavelength only. Stall cycles are counted and must occur.
module tb_rgb_processing_unit;
  import mspec_model_pkg::*;
  localparam int unsigned N = 2;

  logic        clk = 1'b0;
  logic        rst_n = 1'b1;
  logic        load_ref = 1'b0, start = 1'b0;
  logic [22:0] npix = '0;
  logic        last_band = 1'b1;   // N = 2 bands: index 1
  logic [31:0] p1 = '0;
  logic        s_valid = 1'b0;
  logic [7:0]  s_data = '0;
  logic        s_ready, busy, ref_done, done, similar, sat_seen, de_valid;
  logic [31:0] r1;
  logic [8:0]  de;
  int checks = 0, failures = 0, stalls = 0;
  int unsigned coef [][3];
  int unsigned exp_de [$];

  always #5 clk = ~clk;

  rgb_processing_unit #(.N_BANDS(N)) dut (.*);

  int done_cnt = 0, ref_cnt = 0;
  always @(posedge clk) if (s_valid && !s_ready && busy) stalls++;
  always @(posedge clk) if (done) done_cnt++;
  always @(posedge clk) if (ref_done) ref_cnt++;

  // per-pixel distance checker
  always @(posedge clk) if (de_valid) begin
    checks++;
    if (exp_de.size() == 0) begin failures++; $display("FAIL unexpected distance at %0t", $time); end
    else begin
      int unsigned e;
      e = exp_de.pop_front();
      if (de != 9'(e)) begin failures++; $display("FAIL pixel dE %0d expected %0d", de, e); end
    end
  end

  task automatic send_byte(input int unsigned v);
    @(negedge clk);
    while ($urandom_range(3, 0) == 0) begin s_valid = 1'b0; @(negedge clk); end
    s_valid = 1'b1;
    s_data = 8'(v);
    @(posedge clk);
    while (!s_ready) @(posedge clk);
    @(negedge clk);
    s_valid = 1'b0;
  endtask

  task automatic load_table();
    int n0;
    int nb;
    nb = int'(last_band) + 1;
    coef = new[nb];
    for (int k = 0; k < nb; k++) for (int c = 0; c < 3; c++) coef[k][c] = $urandom_range(255, 0);
    n0 = ref_cnt;
    @(negedge clk); load_ref = 1'b1; @(negedge clk); load_ref = 1'b0;
    for (int k = 0; k < nb; k++) for (int c = 0; c < 3; c++) send_byte(coef[k][c]);
    while (ref_cnt == n0) @(negedge clk);
    checks++;
    if (busy) begin failures++; $display("FAIL still busy after loading"); end
  endtask

  task automatic run_image(input int unsigned np, input int thr_delta);
    int unsigned spec_oi[], spec_ci[], a[3], b[3];
    int unsigned r1_exp = 0;
    int unsigned img[$];
    int n0 = done_cnt;
    int nb = int'(last_band) + 1;
    spec_oi = new[nb]; spec_ci = new[nb];
    for (int p = 0; p < np; p++) begin
      for (int k = 0; k < nb; k++) begin
        spec_oi[k] = $urandom_range(255, 0);
        // CI close to OI for some pixels, unrelated for others
        spec_ci[k] = (p % 3 == 0) ? $urandom_range(255, 0) : (spec_oi[k] ^ $urandom_range(7, 0));
      end
      project(spec_oi, coef, a);
      project(spec_ci, coef, b);
      exp_de.push_back(distance(a, b));
      r1_exp += distance(a, b);
      for (int k = 0; k < nb; k++) img.push_back(spec_oi[k]);
      for (int k = 0; k < nb; k++) img.push_back(spec_ci[k]);
    end
    @(negedge clk);
    npix = 23'(np);
    p1 = 32'(int'(r1_exp) + thr_delta);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    foreach (img[i]) send_byte(img[i]);
    while (done_cnt == n0) @(negedge clk);
    checks++;
    if (r1 != r1_exp) begin failures++; $display("FAIL R1 %0d expected %0d", r1, r1_exp); end
    checks++;
    if (similar != (r1_exp < p1)) begin failures++; $display("FAIL verdict %0d for R1 %0d P1 %0d", similar, r1_exp, p1); end
    checks++;
    if (exp_de.size() != 0) begin failures++; $display("FAIL %0d distances missing", exp_de.size()); end
    exp_de.delete();
  endtask

  initial begin
    #1 rst_n = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    load_table();
    run_image(1, 1);
    run_image(12, 0);
    run_image(30, 5);
    load_table();
    run_image(25, -3);
    run_image(0, 1);
    // one wavelength per spectrum
    last_band = 1'b0;
    load_table();
    run_image(9, 2);
    run_image(9, 0);
    checks++;
    if (stalls == 0) begin failures++; $display("FAIL input never stalled"); end
    $display("stall cycles: %0d", stalls);
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
