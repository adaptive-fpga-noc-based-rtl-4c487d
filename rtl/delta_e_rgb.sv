// delta_e_rgb: colour distance between two RGB pixels,
//     dE = floor( sqrt( (R1-R2)^2 + (G1-G2)^2 + (B1-B2)^2 ) ).
//
// The paper counts, per pixel, three subtractions, three multiplications
// (squares), two additions and one square root for the RGB distance. Here
// the subtractions, squares and additions are done in one cycle and
// registered; the square root is the sequential isqrt unit. The result is
// truncated to an integer, which is this design's choice (the paper gives the
// square root a floating-point result).
//
// Interface: in_valid with a and b is taken when in_ready is high; out_valid
// pulses with out_de and out_dsq (the squared distance) 1 + DE_W cycles after
// the pair is taken.
// One pair is in flight at a time.
module delta_e_rgb
  import mspec_pkg::*;
#(
  parameter int unsigned RGB_W = mspec_pkg::DEF_RGB_W,
  parameter int unsigned DSQ_W = 2 * RGB_W + 2,
  parameter int unsigned DE_W  = (DSQ_W + 1) / 2
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  output logic               in_ready,
  input  logic [3*RGB_W-1:0] a,        // {R, G, B}
  input  logic [3*RGB_W-1:0] b,
  output logic               out_valid,
  output logic [DE_W-1:0]    out_de,
  output logic [DSQ_W-1:0]   out_dsq
);
  logic               busy;
  logic               sq_start, sq_ready, sq_done;
  logic [DSQ_W-1:0]   dsq_comb;

  always_comb begin
    dsq_comb = '0;
    for (int c = 0; c < 3; c++) begin
      logic signed [RGB_W:0]     d;
      logic signed [2*RGB_W+1:0] sq;
      d  = $signed({1'b0, a[c*RGB_W +: RGB_W]}) - $signed({1'b0, b[c*RGB_W +: RGB_W]});
      sq = d * d;
      dsq_comb = dsq_comb + DSQ_W'(unsigned'(sq));
    end
  end

  assign in_ready  = !busy;
  assign out_valid = sq_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      sq_start <= 1'b0;
      out_dsq  <= '0;
    end else begin
      sq_start <= 1'b0;
      if (in_valid && in_ready) begin
        out_dsq  <= dsq_comb;
        sq_start <= 1'b1;
        busy     <= 1'b1;
      end else if (sq_done) begin
        busy <= 1'b0;
      end
    end
  end

  isqrt #(.IN_W(DSQ_W), .OUT_W(DE_W)) u_sqrt (
    .clk   (clk),
    .rst_n (rst_n),
    .start (sq_start),
    .x     (out_dsq),
    .ready (sq_ready),
    .done  (sq_done),
    .root  (out_de)
  );

  // The square root is idle whenever a new pair can be taken
  assert property (@(posedge clk) disable iff (!rst_n) sq_start |-> sq_ready);
endmodule
