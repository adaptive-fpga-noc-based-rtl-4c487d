// isqrt: sequential integer square root, floor(sqrt(x)).
//
// Restoring digit-by-digit method: each clock cycle brings down two bits of
// the radicand and decides one bit of the root, so a result takes
// OUT_W = ceil(IN_W/2) cycles after the start and needs only shifts, one
// subtraction and a compare (no multiplier and no table). The distance
// calculation needs one square root per pixel; the paper names the square
// root as its most expensive function but does not give its circuit, so this
// algorithm is this design's choice.
//
// Interface: pulse start with x while ready is high; done pulses for one
// cycle with root valid OUT_W cycles later. root holds until the next start.
module isqrt #(
  parameter int unsigned IN_W  = 18,
  parameter int unsigned OUT_W = (IN_W + 1) / 2
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [IN_W-1:0]  x,
  output logic             ready,
  output logic             done,
  output logic [OUT_W-1:0] root
);
  localparam int unsigned XW = 2 * OUT_W;
  localparam int unsigned CW = $clog2(OUT_W + 1);

  logic [XW-1:0]    rad;     // radicand bits still to bring down
  logic [OUT_W+1:0] rem;     // partial remainder
  logic [CW-1:0]    cnt;
  logic             busy;

  logic [OUT_W+1:0] rem_sh, trial;
  always_comb begin
    rem_sh = {rem[OUT_W-1:0], rad[XW-1 -: 2]};
    trial  = {root, 2'b01};
  end

  assign ready = !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rad  <= '0;
      rem  <= '0;
      root <= '0;
      cnt  <= '0;
      busy <= 1'b0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          rad  <= XW'(x);
          rem  <= '0;
          root <= '0;
          cnt  <= CW'(OUT_W);
          busy <= 1'b1;
        end
      end else begin
        rad <= rad << 2;
        if (rem_sh >= trial) begin
          rem  <= rem_sh - trial;
          root <= {root[OUT_W-2:0], 1'b1};
        end else begin
          rem  <= rem_sh;
          root <= {root[OUT_W-2:0], 1'b0};
        end
        cnt <= cnt - 1'b1;
        if (cnt == CW'(1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end
endmodule
