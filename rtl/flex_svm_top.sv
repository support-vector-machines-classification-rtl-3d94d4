// flex_svm_top: SVM co-processor attached to a bit-serial RISC-V core
// (SERV) through one custom R-type instruction.
//
// Blocks and their connections:
//   accel_decoder    registers acc_op, funct3 and the register addresses of
//                    each fetched instruction (decoder enable = i_ibus_ack).
//   accel_sequencer  starts in the cycle after the fetch acknowledge when
//                    acc_op is set, stalls the core (o_busy), reads rs1/rs2
//                    from the register file in 32 serial cycles, hands the
//                    words to the accelerator with accel_valid, waits for
//                    accel_ready and writes the result back in 32 cycles.
//   accel_serdes     the serial/parallel registers for operands and result.
//   svm_accel        the SVM co-processor (two PEs, cur_sum, cur_id,
//                    max_sum, max_id).
//   rd_select        write-back mux: the accelerator bit joins the core's
//                    control, ALU, CSR and load sources.
// The core itself (fetch, register file, ALU, CSR, memory interface) is not
// part of this module; its signals are ports. The register-file handshake is
// request (o_rf_rreq or o_rf_wreq) then i_rf_ready, after which the 32 data
// bits move one per cycle, LSB first: i_rs1/i_rs2 are sampled in the 32
// cycles after the cycle with i_rf_ready; o_rf_wdata is valid while
// o_rf_wen is high.
//
// Timing of one accelerator instruction with a register file that answers in
// one cycle: fetch ack at cycle 0, request at 2, data bits at 4..35,
// accel_valid at 36, accel_ready at 37, write request at 38, result bits at
// 40..71, o_done at 71: 71 cycles after the fetch ack.
module flex_svm_top
  import svm_pkg::*;
(
  input  logic            clk,
  input  logic            rst,
  // Instruction fetch
  input  logic [XLEN-1:0] i_ibus_rdt,
  input  logic            i_ibus_ack,
  // Status to the core
  output logic            o_acc_op,
  output logic            o_busy,
  output logic            o_done,
  // Register-file interface
  output logic            o_rf_rreq,
  output logic            o_rf_wreq,
  input  logic            i_rf_ready,
  output logic [4:0]      o_rs1_addr,
  output logic [4:0]      o_rs2_addr,
  output logic [4:0]      o_rd_addr,
  input  logic            i_rs1,
  input  logic            i_rs2,
  output logic            o_rf_wen,
  output logic            o_rf_wdata,
  // The core's own write-back sources
  input  logic            i_ctrl_rd,
  input  logic            i_rd_ctrl_en,
  input  logic            i_alu_rd,
  input  logic            i_rd_alu_en,
  input  logic            i_csr_rd,
  input  logic            i_rd_csr_en,
  input  logic            i_mem_rd,
  input  logic            i_rd_mem_en,
  // Observation of the operation's control signals
  output logic            o_init,
  output logic            o_cnt_en,
  output logic            o_cnt_done,
  output logic            o_accel_valid,
  output logic            o_accel_ready
);

  logic [2:0]      funct3;
  logic            ack_q;
  logic            start;
  logic            shift_in, shift_out;
  logic [XLEN-1:0] op_a, op_b, result;
  logic            accel_rd;

  accel_decoder u_dec (
    .i_clk      (clk),
    .i_instr    (i_ibus_rdt),
    .i_en       (i_ibus_ack),
    .o_acc_op   (o_acc_op),
    .o_funct3   (funct3),
    .o_rs1_addr (o_rs1_addr),
    .o_rs2_addr (o_rs2_addr),
    .o_rd_addr  (o_rd_addr)
  );

  always_ff @(posedge clk) begin
    if (rst) ack_q <= 1'b0;
    else     ack_q <= i_ibus_ack;
  end

  assign start = ack_q && o_acc_op;

  accel_sequencer u_seq (
    .i_clk         (clk),
    .i_rst         (rst),
    .i_start       (start),
    .i_rf_ready    (i_rf_ready),
    .i_accel_ready (o_accel_ready),
    .o_init        (o_init),
    .o_rf_rreq     (o_rf_rreq),
    .o_rf_wreq     (o_rf_wreq),
    .o_cnt_en      (o_cnt_en),
    .o_cnt_done    (o_cnt_done),
    .o_accel_valid (o_accel_valid),
    .o_shift_in    (shift_in),
    .o_shift_out   (shift_out),
    .o_busy        (o_busy),
    .o_done        (o_done)
  );

  accel_serdes u_serdes (
    .i_clk       (clk),
    .i_shift_in  (shift_in),
    .i_rs1       (i_rs1),
    .i_rs2       (i_rs2),
    .o_op_a      (op_a),
    .o_op_b      (op_b),
    .i_load      (o_accel_ready),
    .i_result    (result),
    .i_shift_out (shift_out),
    .o_rd        (accel_rd)
  );

  svm_accel u_svm (
    .i_clk    (clk),
    .i_rst    (rst),
    .i_rs1    (op_a),
    .i_rs2    (op_b),
    .i_funct3 (funct3),
    .i_valid  (o_accel_valid),
    .o_ready  (o_accel_ready),
    .o_result (result)
  );

  rd_select u_rdsel (
    .i_ctrl_rd    (i_ctrl_rd),
    .i_rd_ctrl_en (i_rd_ctrl_en),
    .i_alu_rd     (i_alu_rd),
    .i_rd_alu_en  (i_rd_alu_en),
    .i_csr_rd     (i_csr_rd),
    .i_rd_csr_en  (i_rd_csr_en),
    .i_mem_rd     (i_mem_rd),
    .i_rd_mem_en  (i_rd_mem_en),
    .i_accel_rd   (accel_rd),
    .i_acc_op     (shift_out),
    .o_rd         (o_rf_wdata)
  );

  assign o_rf_wen = shift_out;

endmodule
