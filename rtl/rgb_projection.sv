// rgb_projection: projects the spectrum of one pixel onto the R, G and B axes.
//
// For a pixel with samples S(k), k = 0..N_BANDS-1, and RGB reference values
// r(k), g(k), b(k), the unit computes
//     R = sat( sum_k S(k)*r(k) >> COEF_W ),  likewise G and B,
// that is N_BANDS*3 multiplications and N_BANDS*3 additions per pixel, as the
// paper counts them for the RGB projection. One sample is taken per clock
// cycle with three multiply-accumulators working in parallel (one per colour
// component). The reference values are held in a table written through the
// ref_* port. Dividing by 2^COEF_W (a shift) assumes the reference values of
// each component are normalised to sum to at most 2^COEF_W; sums above the
// RGB range saturate and raise out_sat. The sequential one-sample-per-cycle
// structure, the normalisation and the saturation are this design's choices.
//
// Fewer wavelengths than N_BANDS may be used: last_band gives the index of
// the last band of a spectrum (keep it constant while a pixel is streamed).
//
// Interface: s_valid/s_data carry samples in wavelength order, always
// accepted; sample last_band closes the pixel and out_valid pulses with
// out_rgb on the next cycle, so a pixel takes last_band+1 cycles plus one of
// latency. ref_we writes the three reference values of band ref_addr.
module rgb_projection
  import mspec_pkg::*;
#(
  parameter int unsigned N_BANDS = mspec_pkg::DEF_N_BANDS,
  parameter int unsigned SPEC_W  = mspec_pkg::DEF_SPEC_W,
  parameter int unsigned COEF_W  = mspec_pkg::DEF_COEF_W,
  parameter int unsigned RGB_W   = mspec_pkg::DEF_RGB_W,
  parameter int unsigned BAND_W  = (N_BANDS > 1) ? $clog2(N_BANDS) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // reference value table
  input  logic                  ref_we,
  input  logic [BAND_W-1:0]     ref_addr,
  input  logic [3*COEF_W-1:0]   ref_data,   // {r, g, b}
  // index of the last band in use (N_BANDS-1 for full spectra)
  input  logic [BAND_W-1:0]     last_band,
  // spectral samples
  input  logic                  s_valid,
  input  logic [SPEC_W-1:0]     s_data,
  // projected pixel
  output logic                  out_valid,
  output logic [3*RGB_W-1:0]    out_rgb,    // {R, G, B}
  output logic                  out_sat
);
  localparam int unsigned ACC_W = SPEC_W + COEF_W + BAND_W;
  localparam logic [ACC_W-1:0] RGB_MAX = ACC_W'((1 << RGB_W) - 1);

  logic [3*COEF_W-1:0] ref_tab [N_BANDS];
  logic [BAND_W-1:0]   band;
  logic [ACC_W-1:0]    acc      [3];
  logic [ACC_W-1:0]    acc_next [3];
  logic [ACC_W-1:0]    scaled   [3];
  logic [3*COEF_W-1:0] coef;

  always_ff @(posedge clk) begin
    if (ref_we) ref_tab[ref_addr] <= ref_data;
  end

  assign coef = ref_tab[band];

  always_comb begin
    for (int c = 0; c < 3; c++) begin
      acc_next[c] = acc[c] + ACC_W'(s_data) * ACC_W'(coef[(2-c)*COEF_W +: COEF_W]);
      scaled[c]   = acc_next[c] >> COEF_W;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      band      <= '0;
      out_valid <= 1'b0;
      out_rgb   <= '0;
      out_sat   <= 1'b0;
      for (int c = 0; c < 3; c++) acc[c] <= '0;
    end else begin
      out_valid <= 1'b0;
      if (s_valid) begin
        if (band == last_band) begin
          band      <= '0;
          out_valid <= 1'b1;
          out_sat   <= 1'b0;
          for (int c = 0; c < 3; c++) begin
            acc[c] <= '0;
            if (scaled[c] > RGB_MAX) begin
              out_rgb[(2-c)*RGB_W +: RGB_W] <= RGB_MAX[RGB_W-1:0];
              out_sat <= 1'b1;
            end else begin
              out_rgb[(2-c)*RGB_W +: RGB_W] <= scaled[c][RGB_W-1:0];
            end
          end
        end else begin
          band <= band + 1'b1;
          for (int c = 0; c < 3; c++) acc[c] <= acc_next[c];
        end
      end
    end
  end
endmodule
