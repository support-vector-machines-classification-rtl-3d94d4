// accel_decoder: accelerator part of the SERV instruction decoder.
//
// When i_en is high (the fetched instruction is on i_instr), the decoder
// registers acc_op, funct3 and the three register addresses. acc_op is set
// for an R-type instruction (opcode 0110011) whose funct7 is 0000001; SERV
// itself only uses funct7 0000000 and 0100000 with this opcode, so the code
// is free. funct3 then names one of the accelerator's operations.
//
// Timing: outputs change on the clock edge where i_en is high and hold
// otherwise. Like the decoder it extends, it has clock, instruction and
// enable inputs and no reset. Only the accelerator outputs are built here;
// SERV's other decode outputs belong to the core.
module accel_decoder
  import svm_pkg::*;
#(
  parameter logic [6:0] ACC_FUNCT7 = FUNCT7_ACCEL
) (
  input  logic            i_clk,
  input  logic [XLEN-1:0] i_instr,
  input  logic            i_en,
  output logic            o_acc_op,
  output logic [2:0]      o_funct3,
  output logic [4:0]      o_rs1_addr,
  output logic [4:0]      o_rs2_addr,
  output logic [4:0]      o_rd_addr
);

  always_ff @(posedge i_clk) begin
    if (i_en) begin
      o_acc_op   <= (i_instr[6:0] == OPC_OP) && (i_instr[31:25] == ACC_FUNCT7);
      o_funct3   <= i_instr[14:12];
      o_rs1_addr <= i_instr[19:15];
      o_rs2_addr <= i_instr[24:20];
      o_rd_addr  <= i_instr[11:7];
    end
  end

endmodule
