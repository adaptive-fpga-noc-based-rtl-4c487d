// control_unit: sequencer of the processing module.
//
// It keeps the configuration of the next correlation (pixel count and the
// precision threshold P1), executes the commands coming from the decode unit
// and reports results through the storage unit:
//   SET_NPIX, SET_P1 update the configuration registers;
//   SET_NBANDS sets the number of wavelengths per spectrum (the paper's
//            "spectral number"); 0 or a value above N_BANDS selects N_BANDS,
//            which is also the value after reset;
//   LOAD_REF sends the processing unit into reference loading and waits for
//            its ref_done;
//   START    starts the processing unit and waits for done, then writes an
//            R1 result frame and an authentication frame (bit 0 = R1 < P1)
//            addressed to the control module;
//   ERROR    writes an error frame carrying the unknown opcode.
// Commands are taken only in the idle state, so a command that arrives
// during a correlation waits in the decode unit. The paper only names the
// control unit; its command set and states are this design's choices.
//
// Timing: a configuration command takes one cycle; each result frame is
// written in one cycle unless the storage unit is full.
module control_unit
  import mspec_pkg::*;
#(
  parameter int unsigned N_BANDS = mspec_pkg::DEF_N_BANDS,
  parameter int unsigned PIX_W   = mspec_pkg::DEF_PIX_W,
  parameter int unsigned R1_W    = mspec_pkg::DEF_R1_W,
  parameter int unsigned BAND_W  = (N_BANDS > 1) ? $clog2(N_BANDS) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // from the decode unit
  input  logic             c_valid,
  input  command_t         c_cmd,
  output logic             c_ready,
  // to / from the processing unit
  output logic             load_ref,
  output logic             start,
  output logic [PIX_W-1:0] npix,
  output logic [BAND_W-1:0] last_band,
  output logic [R1_W-1:0]  p1,
  input  logic             ref_done,
  input  logic             done,
  input  logic [R1_W-1:0]  r1,
  input  logic             similar,
  // to the storage unit
  output logic             res_valid,
  output frame_t           res_frame,
  input  logic             res_ready
);
  typedef enum logic [2:0] {
    C_IDLE, C_LOAD, C_RUN, C_SEND_R1, C_SEND_AUTH, C_SEND_ERR
  } cstate_e;
  cstate_e state;

  logic [R1_W-1:0]      r1_q;
  logic                 similar_q;
  logic [PAYLOAD_W-1:0] err_arg;

  assign c_ready = (state == C_IDLE);

  always_comb begin
    res_valid = 1'b0;
    res_frame = '{dest: CONTROL_ADDR, op: OP_NOP, payload: '0};
    unique case (state)
      C_SEND_R1: begin
        res_valid         = 1'b1;
        res_frame.op      = OP_RESULT_R1;
        res_frame.payload = PAYLOAD_W'(r1_q);
      end
      C_SEND_AUTH: begin
        res_valid         = 1'b1;
        res_frame.op      = OP_RESULT_AUTH;
        res_frame.payload = PAYLOAD_W'(similar_q);
      end
      C_SEND_ERR: begin
        res_valid         = 1'b1;
        res_frame.op      = OP_ERROR;
        res_frame.payload = err_arg;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= C_IDLE;
      load_ref  <= 1'b0;
      start     <= 1'b0;
      npix      <= '0;
      last_band <= BAND_W'(N_BANDS - 1);
      p1        <= '0;
      r1_q      <= '0;
      similar_q <= 1'b0;
      err_arg   <= '0;
    end else begin
      load_ref <= 1'b0;
      start    <= 1'b0;
      unique case (state)
        C_IDLE: if (c_valid) begin
          unique case (c_cmd.cmd)
            CMD_SET_NPIX: npix <= PIX_W'(c_cmd.arg);
            CMD_SET_P1:   p1   <= R1_W'(c_cmd.arg);
            CMD_SET_NBANDS:
              last_band <= (c_cmd.arg == '0 || c_cmd.arg > PAYLOAD_W'(N_BANDS))
                           ? BAND_W'(N_BANDS - 1) : BAND_W'(c_cmd.arg - 1'b1);
            CMD_LOAD_REF: begin load_ref <= 1'b1; state <= C_LOAD; end
            CMD_START:    begin start    <= 1'b1; state <= C_RUN;  end
            default:      begin err_arg  <= c_cmd.arg; state <= C_SEND_ERR; end
          endcase
        end
        C_LOAD: if (ref_done) state <= C_IDLE;
        C_RUN: if (done) begin
          r1_q      <= r1;
          similar_q <= similar;
          state     <= C_SEND_R1;
        end
        C_SEND_R1:   if (res_ready) state <= C_SEND_AUTH;
        C_SEND_AUTH: if (res_ready) state <= C_IDLE;
        C_SEND_ERR:  if (res_ready) state <= C_IDLE;
        default:     state <= C_IDLE;
      endcase
    end
  end
endmodule
