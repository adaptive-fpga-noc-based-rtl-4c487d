// communication_unit: attachment of the processing module to the command
// network, made of a receive block and a send block.
//
// Modules exchange small command and result frames over a network that
// passes each frame from module to module. The receive block buffers one
// incoming frame. A frame whose destination is MY_ADDR is handed to the
// decode unit; any other frame passes straight to the send block and on to
// the next module (the data arrow from receive to send block). The send
// block merges those forwarded frames with the result frames waiting in the
// storage unit, alternating between the two when both wait so that neither
// starves, and holds the chosen frame on its output until the network takes
// it. The paper gives the two blocks and the frame paths; address matching,
// the one-frame buffers and the round-robin choice are this design's.
//
// Interface: valid/ready on every side. A forwarded frame leaves two cycles
// after it arrives when the output is free. Links are synchronous to clk
// here; the paper's network between modules is clockless.
module communication_unit
  import mspec_pkg::*;
#(
  parameter logic [ADDR_W-1:0] MY_ADDR = 4'd1
) (
  input  logic   clk,
  input  logic   rst_n,
  // input frames from the network
  input  logic   rx_valid,
  input  frame_t rx_frame,
  output logic   rx_ready,
  // frames for this module, to the decode unit
  output logic   dec_valid,
  output frame_t dec_frame,
  input  logic   dec_ready,
  // result frames from the storage unit
  input  logic   res_valid,
  input  frame_t res_frame,
  output logic   res_ready,
  // output frames to the network
  output logic   tx_valid,
  output frame_t tx_frame,
  input  logic   tx_ready,
  // one pulse per forwarded frame, for observation
  output logic   fwd_pulse
);
  // receive block
  logic   rbuf_valid;
  frame_t rbuf;
  logic   rbuf_local;
  logic   rbuf_pop;

  // send block
  logic   fwd_req;
  logic   grant_fwd, grant_res;
  logic   load_tx;
  logic   last_res;      // 1: the last frame sent came from the storage unit

  assign rbuf_local = (rbuf.dest == MY_ADDR);
  assign rx_ready   = !rbuf_valid || rbuf_pop;

  assign dec_valid  = rbuf_valid && rbuf_local;
  assign dec_frame  = rbuf;
  assign fwd_req    = rbuf_valid && !rbuf_local;

  // round-robin choice between forwarded and result frames
  assign load_tx    = !tx_valid || tx_ready;
  always_comb begin
    grant_fwd = 1'b0;
    grant_res = 1'b0;
    if (load_tx) begin
      if (fwd_req && res_valid) begin
        grant_fwd = last_res;
        grant_res = !last_res;
      end else begin
        grant_fwd = fwd_req;
        grant_res = res_valid;
      end
    end
  end
  assign res_ready = grant_res;
  assign rbuf_pop  = (dec_valid && dec_ready) || grant_fwd;
  assign fwd_pulse = grant_fwd;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rbuf_valid <= 1'b0;
      rbuf       <= '0;
      tx_valid   <= 1'b0;
      tx_frame   <= '0;
      last_res   <= 1'b0;
    end else begin
      if (rx_ready) begin
        rbuf_valid <= rx_valid;
        if (rx_valid) rbuf <= rx_frame;
      end
      if (load_tx) begin
        tx_valid <= grant_fwd || grant_res;
        if (grant_fwd) begin
          tx_frame <= rbuf;
          last_res <= 1'b0;
        end else if (grant_res) begin
          tx_frame <= res_frame;
          last_res <= 1'b1;
        end
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   (tx_valid && !tx_ready) |=> tx_valid && $stable(tx_frame));
  assert property (@(posedge clk) disable iff (!rst_n) !(grant_fwd && grant_res));
endmodule
