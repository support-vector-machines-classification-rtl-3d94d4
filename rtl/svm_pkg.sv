// svm_pkg: shared constants and helpers of the SVM co-processor for the
// bit-serial SERV RISC-V core.
//
// The accelerator is reached through one custom R-type instruction:
// opcode 0110011 (the standard OP opcode) with funct7 = 0000001, and the
// funct3 field choosing one of seven operations. The funct3 codes below are
// the encoding the design is built around; the weight-width decode and the
// class/op helpers are this design's own way of expressing them.
package svm_pkg;

  localparam int XLEN = 32;

  localparam logic [6:0] OPC_OP       = 7'b0110011;
  localparam logic [6:0] FUNCT7_ACCEL = 7'b0000001;

  // funct3 operation codes of the accelerator.
  typedef enum logic [2:0] {
    F3_CALC4      = 3'b000,
    F3_RES4       = 3'b001,
    F3_CALC8      = 3'b010,
    F3_NOP        = 3'b011,  // not assigned: executes as a no-op
    F3_RES8       = 3'b100,
    F3_CALC16     = 3'b101,
    F3_RES16      = 3'b110,
    F3_CREATE_ENV = 3'b111
  } svm_op_e;

  // Width of the signed weights packed in rs2.
  typedef enum logic [1:0] {
    WMODE_4  = 2'd0,
    WMODE_8  = 2'd1,
    WMODE_16 = 2'd2
  } wmode_e;

  function automatic wmode_e wmode_of(logic [2:0] f3);
    case (f3)
      F3_CALC8,  F3_RES8:  return WMODE_8;
      F3_CALC16, F3_RES16: return WMODE_16;
      default:             return WMODE_4;
    endcase
  endfunction

  function automatic logic is_calc(logic [2:0] f3);
    return (f3 == F3_CALC4) || (f3 == F3_CALC8) || (f3 == F3_CALC16);
  endfunction

  function automatic logic is_res(logic [2:0] f3);
    return (f3 == F3_RES4) || (f3 == F3_RES8) || (f3 == F3_RES16);
  endfunction

endpackage
