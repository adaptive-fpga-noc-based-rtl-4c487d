// tb_rgb_processing_module_full: the end-to-end test of the RGB distance
// processing module at its default size (400 wavelengths per spectrum).
// As in tb_rgb_processing_module:
// module. The testbench plays the control module (it sends command frames
// and collects result frames on the network ports), the storage module (it
// streams reference values and OI/CI spectra at 100 MHz into the 50 MHz
// module) and the next module on the network (it takes forwarded frames).
// Every per-pixel distance, R1 and verdict is compared with the reference
// model. Each mechanism of the module must occur at least once: frames
// passed on to other modules, unknown-opcode error reports, reference
// loading, input FIFO back-pressure towards the storage module, processing
// stalls (short spectra only), network back-pressure on the result output,
// saturated projections, both verdicts (similar and dissimilar) and a change
// of the number of wavelengths in use (fewer, then all again).
module tb_rgb_processing_module_full;
  import mspec_pkg::*;
  import mspec_model_pkg::*;
  localparam int unsigned N = mspec_pkg::DEF_N_BANDS;

  logic        clk = 1'b0, st_clk = 1'b0;
  logic        rst_n = 1'b1, st_rst_n = 1'b1;
  logic        st_valid = 1'b0;
  logic [7:0]  st_data = '0;
  logic        st_ready;
  logic        rx_valid = 1'b0;
  frame_t      rx_frame = '0;
  logic        rx_ready, tx_valid, tx_ready = 1'b0;
  frame_t      tx_frame;
  logic        busy, sat_seen, de_valid, fwd_pulse;
  logic [8:0]  de;
  logic [2:0]  res_count;

  always #10 clk = ~clk;     // processing module, 50 MHz
  always #5  st_clk = ~st_clk; // storage module, 100 MHz

  rgb_processing_module dut (.*);

  int checks = 0, failures = 0;
  int n_fwd = 0, n_err = 0, n_ref = 0, n_st_bp = 0, n_stall = 0, n_tx_bp = 0;
  int n_sat = 0, n_similar = 0, n_dissimilar = 0;
  int unsigned st_q [$];
  frame_t      res_q [$], fwd_exp [$];
  int unsigned exp_de [$];
  int unsigned coef [][3];
  int unsigned nb = N;       // wavelengths in use
  int n_bands = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  logic st_ready_q = 1'b0;   // st_ready at the last rising edge

  // storage module: streams queued bytes with random pauses
  always @(negedge st_clk) begin
    if (!st_valid || st_ready_q) begin
      if (st_q.size() != 0 && $urandom_range(7, 0) != 0) begin
        st_valid <= 1'b1;
        st_data  <= 8'(st_q.pop_front());
      end else begin
        st_valid <= 1'b0;
      end
    end
  end
  always @(posedge st_clk) begin
    st_ready_q <= st_ready;
    if (st_rst_n && st_valid && !st_ready) n_st_bp++;
  end

  // network output: results to the control module, others to the next module
  always @(posedge clk) if (rst_n) begin
    if (tx_valid && !tx_ready) n_tx_bp++;
    if (tx_valid && tx_ready) begin
      if (tx_frame.dest == CONTROL_ADDR) res_q.push_back(tx_frame);
      else begin
        n_fwd++;
        check(fwd_exp.size() != 0 && tx_frame == fwd_exp[0], "forwarded frame unchanged and in order");
        if (fwd_exp.size() != 0) void'(fwd_exp.pop_front());
      end
    end
    if (busy && dut.d_valid && !dut.d_ready && dut.u_proc.pend_valid && !dut.u_proc.d_ready) n_stall++;
    if (de_valid) begin
      int unsigned e;
      e = (exp_de.size() != 0) ? exp_de.pop_front() : 9999;
      check(de == 9'(e), $sformatf("pixel distance %0d expected %0d", de, e));
    end
  end
  always @(negedge clk) tx_ready <= ($urandom_range(3, 0) != 0);

  task automatic send_frame(input logic [3:0] dest, input opcode_e op, input logic [31:0] pl);
    @(negedge clk);
    rx_valid = 1'b1;
    rx_frame = '{dest: dest, op: op, payload: pl};
    @(posedge clk);
    while (!rx_ready) @(posedge clk);
    @(negedge clk);
    rx_valid = 1'b0;
  endtask

  task automatic wait_results(input int n);
    int t = 0;
    while (res_q.size() < n && t < 200000) begin @(negedge clk); t++; end
    check(res_q.size() >= n, "result frames arrive");
  endtask

  task automatic load_table(input bit normalised);
    coef = new[nb];
    for (int k = 0; k < nb; k++)
      for (int c = 0; c < 3; c++)
        coef[k][c] = normalised ? $urandom_range(256 / nb, 0) : $urandom_range(255, 64);
    send_frame(4'd1, OP_LOAD_REF, 0);
    for (int k = 0; k < nb; k++) for (int c = 0; c < 3; c++) st_q.push_back(coef[k][c]);
    while (st_q.size() != 0 || dut.u_control.state != 0) @(negedge clk);
    n_ref++;
  endtask

  // one correlation; close = CI is a slightly disturbed OI
  task automatic correlate(input int unsigned np, input bit close, input bit want_similar);
    int unsigned oi[], ci[], a[3], b[3];
    int unsigned r1 = 0, p1;
    oi = new[nb]; ci = new[nb];
    res_q.delete();
    for (int p = 0; p < np; p++) begin
      for (int k = 0; k < nb; k++) begin
        oi[k] = $urandom_range(255, 0);
        ci[k] = close ? ((oi[k] < 250) ? oi[k] + $urandom_range(5, 0) : oi[k]) : $urandom_range(255, 0);
      end
      project(oi, coef, a);
      project(ci, coef, b);
      exp_de.push_back(distance(a, b));
      r1 += distance(a, b);
      for (int k = 0; k < nb; k++) st_q.push_back(oi[k]);
      for (int k = 0; k < nb; k++) st_q.push_back(ci[k]);
    end
    p1 = want_similar ? r1 + 1 : r1;
    send_frame(4'd1, OP_SET_NPIX, np);
    send_frame(4'd1, OP_SET_P1, p1);
    send_frame(4'd1, OP_START, 0);
    wait_results(2);
    if (res_q.size() >= 2) begin
      check(res_q[0].op == OP_RESULT_R1 && res_q[0].payload == r1,
            $sformatf("R1 %0d expected %0d", res_q[0].payload, r1));
      check(res_q[1].op == OP_RESULT_AUTH && res_q[1].payload == 32'(want_similar), "verdict");
      if (res_q[1].payload[0]) n_similar++; else n_dissimilar++;
    end
    check(exp_de.size() == 0, "all pixel distances seen");
    if (sat_seen) n_sat++;
  endtask

  // change the number of wavelengths in use
  task automatic set_bands(input int unsigned n);
    send_frame(4'd1, OP_SET_NBANDS, n);
    nb = n;
    n_bands++;
  endtask

  initial begin
    #1 rst_n = 1'b0; st_rst_n = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1; st_rst_n = 1'b1;
    // frames for other modules pass through
    for (int i = 0; i < 6; i++) begin
      frame_t f;
      f = '{dest: 4'(2 + i % 3), op: OP_START, payload: $urandom};
      fwd_exp.push_back(f);
      send_frame(f.dest, f.op, f.payload);
    end
    // unknown opcode and NOP
    res_q.delete();
    send_frame(4'd1, OP_NOP, 0);
    send_frame(4'd1, opcode_e'(4'h7), 0);
    wait_results(1);
    if (res_q.size() != 0) begin
      check(res_q[0].op == OP_ERROR && res_q[0].payload == 32'h7, "error frame for opcode 7");
      if (res_q[0].op == OP_ERROR) n_err++;
    end
    load_table(1);
    correlate(3, 1, 1);
    correlate(5, 0, 0);
    correlate(10, 1, 0);
    load_table(0);
    correlate(4, 0, 1);
    // frames for other modules while this one works
    fork
      correlate(6, 1, 1);
      begin
        repeat (30) @(negedge clk);
        for (int i = 0; i < 3; i++) begin
          frame_t f;
          f = '{dest: 4'd3, op: OP_SET_P1, payload: $urandom};
          fwd_exp.push_back(f);
          send_frame(f.dest, f.op, f.payload);
        end
      end
    join
    // fewer wavelengths, then back to all of them
    set_bands((N > 8) ? N / 4 : N - 1);
    load_table(1);
    correlate(4, 1, 1);
    correlate(4, 0, 0);
    set_bands(N);
    load_table(1);
    correlate(3, 1, 1);
    repeat (20) @(negedge clk);
    check(fwd_exp.size() == 0, "every forwarded frame left the module");
    $display("mechanisms: forwarded=%0d error=%0d ref_load=%0d storage_backpressure=%0d stall=%0d tx_backpressure=%0d saturated_images=%0d similar=%0d dissimilar=%0d band_changes=%0d",
             n_fwd, n_err, n_ref, n_st_bp, n_stall, n_tx_bp, n_sat, n_similar, n_dissimilar, n_bands);
    check(n_fwd > 0, "frames forwarded");
    check(n_err > 0, "error reported");
    check(n_ref > 0, "reference loaded");
    check(n_st_bp > 0, "storage-side back-pressure");
    check(N > 10 || n_stall > 0, "processing stall");
    check(N <= 10 || n_stall == 0, "no processing stall when a pixel outlasts the distance latency");
    check(n_tx_bp > 0, "network back-pressure");
    check(n_sat > 0, "projection saturation");
    check(n_similar > 0, "similar verdict");
    check(n_dissimilar > 0, "dissimilar verdict");
    check(n_bands > 0, "spectral number changed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
