// interface_unit: dual-clock FIFO carrying the spectral data stream from the
// storage module into the processing module.
//
// In the GALS organisation every module runs on its own clock (the paper
// gives 100 MHz for the storage module and 50 MHz for the processing module),
// so the high-bandwidth data stream must cross a clock boundary at the
// module's edge. The FIFO is written in the storage module's clock domain and
// read in the processing module's. Read and write pointers are kept in binary
// and Gray code; each Gray pointer crosses to the other domain through a
// two-flop synchroniser, and full/empty are decided from the synchronised
// copies, so both flags are safe (they may lag, never lead). The paper names
// an interface unit fed with data from the storage module and says units are
// built from blocks such as FIFOs; the dual-clock FIFO itself is this
// design's choice.
//
// Interface: valid/ready on both sides. w_ready is low when full, r_valid
// low when empty; r_data is the head entry while r_valid is high. A word is
// visible on the read side three to four read-clock cycles after it is
// written. DEPTH must be a power of two.
module interface_unit #(
  parameter int unsigned DW    = 8,
  parameter int unsigned DEPTH = 16
) (
  // storage module side
  input  logic          wclk,
  input  logic          wrst_n,
  input  logic          w_valid,
  input  logic [DW-1:0] w_data,
  output logic          w_ready,
  // processing module side
  input  logic          rclk,
  input  logic          rrst_n,
  output logic          r_valid,
  output logic [DW-1:0] r_data,
  input  logic          r_ready
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [DW-1:0] mem [DEPTH];
  logic [AW:0]   wbin, wgray, rbin, rgray;
  logic [AW:0]   wgray_s1, wgray_s2;   // write pointer seen in rclk domain
  logic [AW:0]   rgray_s1, rgray_s2;   // read pointer seen in wclk domain
  logic [AW:0]   wbin_next, rbin_next;

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  // write side
  assign w_ready   = (wgray != {~rgray_s2[AW:AW-1], rgray_s2[AW-2:0]});
  assign wbin_next = wbin + (AW+1)'(w_valid && w_ready);

  always_ff @(posedge wclk) begin
    if (w_valid && w_ready) mem[wbin[AW-1:0]] <= w_data;
  end

  always_ff @(posedge wclk or negedge wrst_n) begin
    if (!wrst_n) begin
      wbin     <= '0;
      wgray    <= '0;
      rgray_s1 <= '0;
      rgray_s2 <= '0;
    end else begin
      wbin     <= wbin_next;
      wgray    <= bin2gray(wbin_next);
      rgray_s1 <= rgray;
      rgray_s2 <= rgray_s1;
    end
  end

  // read side
  assign r_valid   = (rgray != wgray_s2);
  assign r_data    = mem[rbin[AW-1:0]];
  assign rbin_next = rbin + (AW+1)'(r_valid && r_ready);

  always_ff @(posedge rclk or negedge rrst_n) begin
    if (!rrst_n) begin
      rbin     <= '0;
      rgray    <= '0;
      wgray_s1 <= '0;
      wgray_s2 <= '0;
    end else begin
      rbin     <= rbin_next;
      rgray    <= bin2gray(rbin_next);
      wgray_s1 <= wgray;
      wgray_s2 <= wgray_s1;
    end
  end

  // Handshake rules: a held word does not change before it is taken
  assert property (@(posedge rclk) disable iff (!rrst_n)
                   (r_valid && !r_ready) |=> r_valid && $stable(r_data));
endmodule
