// tb_control_unit: self-checking test of the module sequencer. The test
// plays the decode unit, the processing unit and the storage unit. It checks
// that SET_NPIX and SET_P1 reach the configuration outputs, that LOAD_REF and
// START each give a one-cycle pulse and hold off further commands until
// ref_done / done, that a finished correlation yields an R1 frame then an
// authentication frame to the control module (also when the storage unit
// is full for a while), and that an unknown opcode yields an error frame.
module tb_control_unit;
  import mspec_pkg::*;

  logic        clk = 1'b0;
  logic        rst_n = 1'b1;
  logic        c_valid = 1'b0;
  command_t    c_cmd = '{cmd: CMD_SET_NPIX, arg: '0};
  logic        c_ready;
  logic        load_ref, start;
  logic [22:0] npix;
  logic [8:0]  last_band;
  logic [31:0] p1;
  logic        ref_done = 1'b0, done = 1'b0, similar = 1'b0;
  logic [31:0] r1 = '0;
  logic        res_valid;
  frame_t      res_frame;
  logic        res_ready = 1'b1;
  int checks = 0, failures = 0;
  int load_pulses = 0, start_pulses = 0;
  frame_t got [$];

  always #5 clk = ~clk;

  control_unit dut (.*);

  always @(posedge clk) if (rst_n) begin
    if (load_ref) load_pulses++;
    if (start) start_pulses++;
    if (res_valid && res_ready) got.push_back(res_frame);
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic command(input cmd_e c, input logic [31:0] arg);
    @(negedge clk);
    c_valid = 1'b1; c_cmd = '{cmd: c, arg: arg};
    @(posedge clk);
    while (!c_ready) @(posedge clk);
    @(negedge clk);
    c_valid = 1'b0;
  endtask

  task automatic correlate(input logic [31:0] r, input bit sim, input bit block_storage);
    int s0 = start_pulses;
    got.delete();
    command(CMD_START, 0);
    @(negedge clk);
    check(start_pulses == s0 + 1, "START gives one start pulse");
    // a command offered now must wait
    c_valid = 1'b1; c_cmd = '{cmd: CMD_SET_NPIX, arg: 32'd77};
    repeat (5) @(negedge clk);
    check(!c_ready && npix != 23'd77, "command held during a correlation");
    c_valid = 1'b0;
    if (block_storage) res_ready = 1'b0;
    r1 = r; similar = sim; done = 1'b1;
    @(negedge clk);
    done = 1'b0; r1 = '0; similar = !sim;
    repeat (6) @(negedge clk);
    check(got.size() == 0 || !block_storage, "no frame taken while storage is full");
    res_ready = 1'b1;
    repeat (4) @(negedge clk);
    check(got.size() == 2, "two result frames");
    if (got.size() == 2) begin
      check(got[0].dest == CONTROL_ADDR && got[0].op == OP_RESULT_R1 && got[0].payload == r, "R1 frame");
      check(got[1].dest == CONTROL_ADDR && got[1].op == OP_RESULT_AUTH && got[1].payload == 32'(sim), "verdict frame");
    end
    check(c_ready, "idle after reporting");
  endtask

  initial begin
    #1 rst_n = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    command(CMD_SET_NPIX, 32'd1234);
    command(CMD_SET_P1, 32'hCAFE_0001);
    @(negedge clk);
    check(npix == 23'd1234 && p1 == 32'hCAFE_0001, "configuration registers");
    check(last_band == 9'd399, "all 400 bands after reset");
    command(CMD_SET_NBANDS, 32'd64);
    @(negedge clk);
    check(last_band == 9'd63, "SET_NBANDS 64");
    command(CMD_SET_NBANDS, 32'd401);
    @(negedge clk);
    check(last_band == 9'd399, "SET_NBANDS above 400 selects 400");
    command(CMD_SET_NBANDS, 32'd1);
    @(negedge clk);
    check(last_band == 9'd0, "SET_NBANDS 1");
    command(CMD_SET_NBANDS, 32'd0);
    @(negedge clk);
    check(last_band == 9'd399, "SET_NBANDS 0 selects 400");
    command(CMD_LOAD_REF, 0);
    @(negedge clk);
    check(load_pulses == 1, "LOAD_REF gives one pulse");
    repeat (4) @(negedge clk);
    check(!c_ready, "waits for ref_done");
    ref_done = 1'b1; @(negedge clk); ref_done = 1'b0;
    @(negedge clk);
    check(c_ready, "idle after ref_done");
    correlate(32'd5000, 1'b1, 1'b0);
    correlate(32'hFFFF_FFFE, 1'b0, 1'b1);
    got.delete();
    command(CMD_ERROR, 32'h0000_000B);
    repeat (3) @(negedge clk);
    check(got.size() == 1 && got[0].op == OP_ERROR && got[0].payload == 32'hB, "error frame");
    check(load_pulses == 1 && start_pulses == 2, "pulse counts");
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
