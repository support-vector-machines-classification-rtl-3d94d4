// accel_serdes: bit-serial to parallel bridge between the core's register
// file and the accelerator.
//
// The core moves rs1 and rs2 one bit per cycle, least significant bit
// first. While i_shift_in is high both bits enter at the top of two 32-bit
// shift registers, so after 32 cycles o_op_a and o_op_b hold the full words.
// i_load copies the accelerator's 32-bit result into a third shift register;
// o_rd is its bit 0, and every cycle with i_shift_out high moves the next bit
// down, so the result leaves LSB first in 32 cycles.
//
// The 32-cycle serial transfer in both directions is how the core talks to
// the accelerator; putting the shift registers in a block of their own is
// this design's choice. No reset: every register is written before it is
// read.
module accel_serdes
  import svm_pkg::*;
(
  input  logic            i_clk,
  input  logic            i_shift_in,
  input  logic            i_rs1,
  input  logic            i_rs2,
  output logic [XLEN-1:0] o_op_a,
  output logic [XLEN-1:0] o_op_b,
  input  logic            i_load,
  input  logic [XLEN-1:0] i_result,
  input  logic            i_shift_out,
  output logic            o_rd
);

  logic [XLEN-1:0] res_q;

  always_ff @(posedge i_clk) begin
    if (i_shift_in) begin
      o_op_a <= {i_rs1, o_op_a[XLEN-1:1]};
      o_op_b <= {i_rs2, o_op_b[XLEN-1:1]};
    end
    if (i_load)
      res_q <= i_result;
    else if (i_shift_out)
      res_q <= {1'b0, res_q[XLEN-1:1]};
  end

  assign o_rd = res_q[0];

endmodule
