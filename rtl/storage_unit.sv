// storage_unit: result store of the processing module.
//
// A small synchronous FIFO of frames. The control unit writes the result
// frames of a finished correlation (image distance R1, authentication
// verdict, error reports); the send block of the communication unit reads
// them when the command network can take them, so the processing unit never
// waits for the network. The paper places a storage unit between the
// processing unit and the communication unit ("Results") without giving its
// insides; a FIFO of DEPTH frames is this design's choice.
//
// Interface: valid/ready push and pop sides, first word fall-through
// (pop_frame is the head entry while pop_valid is high). A pushed frame can
// be popped on the next cycle. count gives the fill level.
module storage_unit
  import mspec_pkg::*;
#(
  parameter int unsigned DEPTH = 4
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       push_valid,
  input  frame_t                     push_frame,
  output logic                       push_ready,
  output logic                       pop_valid,
  output frame_t                     pop_frame,
  input  logic                       pop_ready,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CW = $clog2(DEPTH + 1);

  frame_t        mem [DEPTH];
  logic [AW-1:0] wptr, rptr;
  logic          push, pop;

  assign push_ready = (count != CW'(DEPTH));
  assign pop_valid  = (count != '0);
  assign pop_frame  = mem[rptr];
  assign push       = push_valid && push_ready;
  assign pop        = pop_valid && pop_ready;

  always_ff @(posedge clk) begin
    if (push) mem[wptr] <= push_frame;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (push) wptr <= (wptr == AW'(DEPTH - 1)) ? '0 : wptr + 1'b1;
      if (pop)  rptr <= (rptr == AW'(DEPTH - 1)) ? '0 : rptr + 1'b1;
      count <= count + CW'(push) - CW'(pop);
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) count <= CW'(DEPTH));
endmodule
