// rgb_processing_module: processing module running the RGB distance
// (Delta E_RGB) correlation of a multispectral original image against a
// compared image.
//
// It joins the units of a processing module: the interface unit brings the
// spectral data from the storage module across the clock boundary, the
// processing unit projects spectra to RGB, measures the distance of each
// pixel pair and sums it into R1, the control unit sequences the work, the
// decode unit interprets command frames, the storage unit keeps result
// frames and the communication unit receives, forwards and sends frames on
// the command network. The unit set and their connections follow the
// paper's processing module; everything inside a unit beyond its stated
// job is this design's choice. Two connections differ from the paper's
// drawing: results reach the storage unit through the control unit, which
// formats them as frames, and the control unit has no link to the interface
// unit, which as a plain FIFO needs none.
//
// Clocks: st_clk is the storage module's clock (data input side); clk is the
// module's own clock for all other logic, including the frame ports.
//
// Use: send SET_NPIX, SET_P1 and, for spectra shorter than N_BANDS,
// SET_NBANDS; then LOAD_REF followed by three reference bytes per band on the
// data port, then START followed by, for each pixel, its OI samples and its
// CI samples. The module answers with a
// RESULT_R1 and a RESULT_AUTH frame addressed to the control module.
module rgb_processing_module
  import mspec_pkg::*;
#(
  parameter logic [ADDR_W-1:0] MY_ADDR  = 4'd1,
  parameter int unsigned       N_BANDS  = mspec_pkg::DEF_N_BANDS,
  parameter int unsigned       PIX_W    = mspec_pkg::DEF_PIX_W,
  parameter int unsigned       IF_DEPTH = 16,
  parameter int unsigned       RES_DEPTH = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  // data flow from the storage module (st_clk domain)
  input  logic              st_clk,
  input  logic              st_rst_n,
  input  logic              st_valid,
  input  logic [DEF_SPEC_W-1:0] st_data,
  output logic              st_ready,
  // command and result flow
  input  logic              rx_valid,
  input  frame_t            rx_frame,
  output logic              rx_ready,
  output logic              tx_valid,
  output frame_t            tx_frame,
  input  logic              tx_ready,
  // status, for observation
  output logic              busy,
  output logic              sat_seen,   // a projection saturated in this image
  output logic              de_valid,   // distance of one pixel pair
  output logic [DEF_DE_W-1:0] de,
  output logic              fwd_pulse,  // a frame was passed on to the next module
  output logic [$clog2(RES_DEPTH+1)-1:0] res_count  // result frames waiting
);
  localparam int unsigned R1_W   = PIX_W + DEF_DE_W;
  localparam int unsigned BAND_W = (N_BANDS > 1) ? $clog2(N_BANDS) : 1;

  logic                  d_valid, d_ready;
  logic [DEF_SPEC_W-1:0] d_data;

  logic     dec_valid, dec_ready;
  frame_t   dec_frame;
  logic     c_valid, c_ready;
  command_t c_cmd;

  logic             load_ref, start, ref_done, done, similar;
  logic [PIX_W-1:0] npix;
  logic [BAND_W-1:0] last_band;
  logic [R1_W-1:0]  p1, r1;

  logic     res_valid, res_ready, st_res_valid, st_res_ready;
  frame_t   res_frame, st_res_frame;

  interface_unit #(.DW (DEF_SPEC_W), .DEPTH (IF_DEPTH)) u_interface (
    .wclk    (st_clk),
    .wrst_n  (st_rst_n),
    .w_valid (st_valid),
    .w_data  (st_data),
    .w_ready (st_ready),
    .rclk    (clk),
    .rrst_n  (rst_n),
    .r_valid (d_valid),
    .r_data  (d_data),
    .r_ready (d_ready)
  );

  communication_unit #(.MY_ADDR (MY_ADDR)) u_comm (
    .clk       (clk),
    .rst_n     (rst_n),
    .rx_valid  (rx_valid),
    .rx_frame  (rx_frame),
    .rx_ready  (rx_ready),
    .dec_valid (dec_valid),
    .dec_frame (dec_frame),
    .dec_ready (dec_ready),
    .res_valid (st_res_valid),
    .res_frame (st_res_frame),
    .res_ready (st_res_ready),
    .tx_valid  (tx_valid),
    .tx_frame  (tx_frame),
    .tx_ready  (tx_ready),
    .fwd_pulse (fwd_pulse)
  );

  decode_unit u_decode (
    .clk     (clk),
    .rst_n   (rst_n),
    .f_valid (dec_valid),
    .f_frame (dec_frame),
    .f_ready (dec_ready),
    .c_valid (c_valid),
    .c_cmd   (c_cmd),
    .c_ready (c_ready)
  );

  control_unit #(.N_BANDS (N_BANDS), .PIX_W (PIX_W), .R1_W (R1_W)) u_control (
    .clk       (clk),
    .rst_n     (rst_n),
    .c_valid   (c_valid),
    .c_cmd     (c_cmd),
    .c_ready   (c_ready),
    .load_ref  (load_ref),
    .start     (start),
    .npix      (npix),
    .last_band (last_band),
    .p1        (p1),
    .ref_done  (ref_done),
    .done      (done),
    .r1        (r1),
    .similar   (similar),
    .res_valid (res_valid),
    .res_frame (res_frame),
    .res_ready (res_ready)
  );

  rgb_processing_unit #(.N_BANDS (N_BANDS), .PIX_W (PIX_W)) u_proc (
    .clk      (clk),
    .rst_n    (rst_n),
    .load_ref (load_ref),
    .start    (start),
    .npix     (npix),
    .last_band (last_band),
    .p1       (p1),
    .s_valid  (d_valid),
    .s_data   (d_data),
    .s_ready  (d_ready),
    .busy     (busy),
    .ref_done (ref_done),
    .done     (done),
    .r1       (r1),
    .similar  (similar),
    .sat_seen (sat_seen),
    .de_valid (de_valid),
    .de       (de)
  );

  storage_unit #(.DEPTH (RES_DEPTH)) u_storage (
    .clk        (clk),
    .rst_n      (rst_n),
    .push_valid (res_valid),
    .push_frame (res_frame),
    .push_ready (res_ready),
    .pop_valid  (st_res_valid),
    .pop_frame  (st_res_frame),
    .pop_ready  (st_res_ready),
    .count      (res_count)
  );
endmodule
