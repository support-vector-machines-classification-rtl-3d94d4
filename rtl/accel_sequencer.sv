// accel_sequencer: the control-FSM extension that runs one accelerator
// instruction on the bit-serial core.
//
// Sequence (one line per state):
//   RD_REQ  init=1, o_rf_rreq=1 for one cycle: ask the register file for
//           rs1 and rs2.
//   RD_WAIT init=1 until the register file answers with i_rf_ready.
//   RD_XFER init=1, cnt_en=1 for 32 cycles, one operand bit per cycle
//           (o_shift_in); cnt_done marks the 32nd.
//   EXEC    init=0, accel_valid=1 until i_accel_ready.
//   WR_REQ  o_rf_wreq=1 for one cycle.
//   WR_WAIT until i_rf_ready.
//   WR_XFER cnt_en=1 for 32 cycles, one result bit per cycle (o_shift_out),
//           cnt_done on the 32nd; o_done on the last cycle.
// o_busy is high in every state but IDLE and stalls the core. With a
// register file that answers in one cycle, accel_valid rises 35 cycles after
// i_start and init falls in the same cycle.
//
// The order of events, the single-cycle pulses, the 32-cycle count and the
// valid/ready handshake follow the accelerator-operation timing of the
// design; the explicit read request and the wait states for a slower
// register file are this design's choices.
module accel_sequencer
  import svm_pkg::*;
(
  input  logic i_clk,
  input  logic i_rst,
  input  logic i_start,
  input  logic i_rf_ready,
  input  logic i_accel_ready,
  output logic o_init,
  output logic o_rf_rreq,
  output logic o_rf_wreq,
  output logic o_cnt_en,
  output logic o_cnt_done,
  output logic o_accel_valid,
  output logic o_shift_in,
  output logic o_shift_out,
  output logic o_busy,
  output logic o_done
);

  typedef enum logic [2:0] {
    S_IDLE, S_RD_REQ, S_RD_WAIT, S_RD_XFER, S_EXEC, S_WR_REQ, S_WR_WAIT, S_WR_XFER
  } state_e;

  state_e state;
  logic [$clog2(XLEN)-1:0] cnt;

  always_ff @(posedge i_clk) begin
    if (i_rst) begin
      state <= S_IDLE;
      cnt   <= '0;
    end else begin
      case (state)
        S_IDLE:    if (i_start) state <= S_RD_REQ;
        S_RD_REQ:  state <= S_RD_WAIT;
        S_RD_WAIT: if (i_rf_ready) begin state <= S_RD_XFER; cnt <= '0; end
        S_RD_XFER: begin
          cnt <= cnt + 1'b1;
          if (o_cnt_done) state <= S_EXEC;
        end
        S_EXEC:    if (i_accel_ready) state <= S_WR_REQ;
        S_WR_REQ:  state <= S_WR_WAIT;
        S_WR_WAIT: if (i_rf_ready) begin state <= S_WR_XFER; cnt <= '0; end
        S_WR_XFER: begin
          cnt <= cnt + 1'b1;
          if (o_cnt_done) state <= S_IDLE;
        end
        default:   state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    o_init        = (state == S_RD_REQ) || (state == S_RD_WAIT) || (state == S_RD_XFER);
    o_rf_rreq     = (state == S_RD_REQ);
    o_rf_wreq     = (state == S_WR_REQ);
    o_shift_in    = (state == S_RD_XFER);
    o_shift_out   = (state == S_WR_XFER);
    o_cnt_en      = o_shift_in || o_shift_out;
    o_cnt_done    = o_cnt_en && (cnt == '1);
    o_accel_valid = (state == S_EXEC);
    o_busy        = (state != S_IDLE);
    o_done        = o_shift_out && o_cnt_done;
  end

  a_no_start_when_busy : assert property (@(posedge i_clk) disable iff (i_rst)
    o_busy |-> !i_start);

endmodule
