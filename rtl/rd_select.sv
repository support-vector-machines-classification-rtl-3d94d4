// rd_select: write-back source select of the register-file interface,
// extended with the accelerator.
//
// The core writes one result bit per cycle. Exactly one source is enabled
// for an instruction: the control unit (jumps, lui, auipc), the ALU, the CSR
// unit, the load path or, new here, the accelerator's serial result. The
// output is the AND-OR of each bit with its enable; at most one enable may
// be high. Combinational.
//
// Adding the accelerator as a write-back source is part of the design; the
// one-hot AND-OR form is this design's choice.
module rd_select (
  input  logic i_ctrl_rd,
  input  logic i_rd_ctrl_en,
  input  logic i_alu_rd,
  input  logic i_rd_alu_en,
  input  logic i_csr_rd,
  input  logic i_rd_csr_en,
  input  logic i_mem_rd,
  input  logic i_rd_mem_en,
  input  logic i_accel_rd,
  input  logic i_acc_op,
  output logic o_rd
);

  assign o_rd = (i_ctrl_rd  & i_rd_ctrl_en) |
                (i_alu_rd   & i_rd_alu_en)  |
                (i_csr_rd   & i_rd_csr_en)  |
                (i_mem_rd   & i_rd_mem_en)  |
                (i_accel_rd & i_acc_op);

  always_comb begin
    a_one_source : assert ($onehot0({i_rd_ctrl_en, i_rd_alu_en, i_rd_csr_en, i_rd_mem_en, i_acc_op}))
      else $error("rd_select: more than one write-back source enabled");
  end

endmodule
