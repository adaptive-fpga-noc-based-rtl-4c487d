// rgb_processing_unit: the RGB distance algorithm of the processing module.
//
// It runs the comparison the paper describes for one original image (OI)
// against one compared image (CI):
//   1. colour projection: each pixel spectrum is projected to RGB with the
//      RGB reference values (rgb_projection);
//   2. distance: the RGB distance dE of each OI/CI pixel pair (delta_e_rgb)
//      is added into the image distance R1;
//   3. authentication: after the last pixel the unit reports R1 and whether
//      R1 < P1, P1 being the precision threshold.
// The paper does not say how per-pixel distances make up R1; here R1 is their
// sum (so P1 is given in the same unit: pixels times mean distance). One
// projection unit serves both images, as the paper's single RGB projection
// unit does: the input stream carries, for each pixel in turn, its OI
// samples followed by its CI samples. That order is this design's choice.
//
// Spectral number: last_band + 1 wavelengths (at most N_BANDS) make up a
// spectrum. The paper's authentication process raises the number of
// wavelengths when a comparison is not precise enough; last_band lets the
// same hardware run with any number up to N_BANDS. It must stay constant
// while the unit is busy.
//
// Reference loading: after a load_ref pulse the next 3*(last_band+1) stream
// bytes are the reference values, band by band, each band as r, g, b;
// ref_done pulses when they are all written.
//
// Timing: one sample per cycle, so a pixel pair takes 2*(last_band+1)
// cycles. The distance of a pair is computed while the next pair is
// projected. Only when a pair's distance cannot be started yet (spectra
// shorter than the distance latency) is the stream stalled by dropping
// s_ready. done pulses with r1 and
// similar a few cycles after the last sample.
module rgb_processing_unit
  import mspec_pkg::*;
#(
  parameter int unsigned N_BANDS = mspec_pkg::DEF_N_BANDS,
  parameter int unsigned SPEC_W  = mspec_pkg::DEF_SPEC_W,
  parameter int unsigned COEF_W  = mspec_pkg::DEF_COEF_W,
  parameter int unsigned RGB_W   = mspec_pkg::DEF_RGB_W,
  parameter int unsigned PIX_W   = mspec_pkg::DEF_PIX_W,
  parameter int unsigned DE_W    = RGB_W + 1,
  parameter int unsigned R1_W    = PIX_W + DE_W,
  parameter int unsigned BAND_W  = (N_BANDS > 1) ? $clog2(N_BANDS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // commands from the control unit
  input  logic              load_ref,
  input  logic              start,
  input  logic [PIX_W-1:0]  npix,
  input  logic [BAND_W-1:0] last_band,  // wavelengths in use minus one
  input  logic [R1_W-1:0]   p1,
  // spectral data stream from the interface unit
  input  logic              s_valid,
  input  logic [SPEC_W-1:0] s_data,
  output logic              s_ready,
  // status and results
  output logic              busy,
  output logic              ref_done,
  output logic              done,
  output logic [R1_W-1:0]   r1,
  output logic              similar,
  output logic              sat_seen,   // a projection saturated during this image
  output logic              de_valid,   // per-pixel distance, for observation
  output logic [DE_W-1:0]   de
);
  localparam int unsigned DSQ_W  = 2 * RGB_W + 2;

  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_RUN} state_e;
  state_e state;

  // input-side counters
  logic [BAND_W-1:0] in_band;
  logic              in_ci;       // 0: OI samples of the pixel, 1: CI samples
  logic [PIX_W-1:0]  in_pix;
  logic [1:0]        ref_chan;
  logic [COEF_W-1:0] ref_r, ref_g;
  logic              take;

  // projection
  logic              ref_we;
  logic              p_valid, p_sat;
  logic [3*RGB_W-1:0] p_rgb;
  logic              out_ci;
  logic [3*RGB_W-1:0] oi_rgb;

  // pair waiting for the distance unit
  logic              pend_valid;
  logic [3*RGB_W-1:0] pend_oi, pend_ci;
  logic              d_ready;
  logic [DSQ_W-1:0]  d_dsq;      // squared distance, not used by R1

  logic [PIX_W-1:0]  out_pix;

  assign busy    = (state != S_IDLE);
  assign s_ready = (state == S_LOAD) ||
                   (state == S_RUN && in_pix != npix && !(pend_valid && !d_ready));
  assign take    = s_valid && s_ready;
  assign ref_we  = take && state == S_LOAD && ref_chan == 2'd2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      in_band    <= '0;
      in_ci      <= 1'b0;
      in_pix     <= '0;
      ref_chan   <= '0;
      ref_r      <= '0;
      ref_g      <= '0;
      out_ci     <= 1'b0;
      oi_rgb     <= '0;
      pend_valid <= 1'b0;
      pend_oi    <= '0;
      pend_ci    <= '0;
      out_pix    <= '0;
      r1         <= '0;
      similar    <= 1'b0;
      sat_seen   <= 1'b0;
      ref_done   <= 1'b0;
      done       <= 1'b0;
    end else begin
      ref_done <= 1'b0;
      done     <= 1'b0;
      case (state)
        S_IDLE: begin
          in_band  <= '0;
          ref_chan <= '0;
          if (load_ref) begin
            state <= S_LOAD;
          end else if (start) begin
            in_ci    <= 1'b0;
            in_pix   <= '0;
            out_ci   <= 1'b0;
            out_pix  <= '0;
            r1       <= '0;
            sat_seen <= 1'b0;
            if (npix == '0) begin
              similar <= (p1 != '0);
              done    <= 1'b1;
            end else begin
              state <= S_RUN;
            end
          end
        end
        S_LOAD: begin
          if (take) begin
            unique case (ref_chan)
              2'd0: begin ref_r <= s_data; ref_chan <= 2'd1; end
              2'd1: begin ref_g <= s_data; ref_chan <= 2'd2; end
              default: begin
                ref_chan <= 2'd0;
                if (in_band == last_band) begin
                  in_band  <= '0;
                  ref_done <= 1'b1;
                  state    <= S_IDLE;
                end else begin
                  in_band <= in_band + 1'b1;
                end
              end
            endcase
          end
        end
        S_RUN: begin
          if (take) begin
            if (in_band == last_band) begin
              in_band <= '0;
              in_ci   <= !in_ci;
              if (in_ci) in_pix <= in_pix + 1'b1;
            end else begin
              in_band <= in_band + 1'b1;
            end
          end
          if (pend_valid && d_ready) pend_valid <= 1'b0;
          if (p_valid) begin
            out_ci <= !out_ci;
            if (p_sat) sat_seen <= 1'b1;
            if (!out_ci) begin
              oi_rgb <= p_rgb;
            end else begin
              pend_valid <= 1'b1;
              pend_oi    <= oi_rgb;
              pend_ci    <= p_rgb;
            end
          end
          if (de_valid) begin
            r1      <= r1 + R1_W'(de);
            out_pix <= out_pix + 1'b1;
            if (out_pix + 1'b1 == npix) begin
              similar <= (r1 + R1_W'(de)) < p1;
              done    <= 1'b1;
              state   <= S_IDLE;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  rgb_projection #(
    .N_BANDS (N_BANDS), .SPEC_W (SPEC_W), .COEF_W (COEF_W), .RGB_W (RGB_W)
  ) u_proj (
    .clk       (clk),
    .rst_n     (rst_n),
    .ref_we    (ref_we),
    .ref_addr  (in_band),
    .ref_data  ({ref_r, ref_g, s_data}),
    .last_band (last_band),
    .s_valid   (take && state == S_RUN),
    .s_data    (s_data),
    .out_valid (p_valid),
    .out_rgb   (p_rgb),
    .out_sat   (p_sat)
  );

  delta_e_rgb #(.RGB_W (RGB_W), .DSQ_W (DSQ_W), .DE_W (DE_W)) u_de (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (pend_valid),
    .in_ready  (d_ready),
    .a         (pend_oi),
    .b         (pend_ci),
    .out_valid (de_valid),
    .out_de    (de),
    .out_dsq   (d_dsq)
  );

  // A finished pair never overwrites one still waiting for the distance unit
  assert property (@(posedge clk) disable iff (!rst_n)
                   (p_valid && out_ci) |-> !pend_valid || d_ready);
endmodule
