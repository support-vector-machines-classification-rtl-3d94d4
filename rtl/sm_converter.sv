// sm_converter: two's-complement to signed-magnitude conversion of the
// packed weight word.
//
// rs2 carries eight 4-bit, four 8-bit or two 16-bit signed weights, weight i
// in bits [i*W +: W]. The block returns the same packing with every weight
// replaced by its magnitude (o_mag), plus one sign flag per 4-bit nibble
// (o_sign[k] belongs to bits [4k+3:4k]), so that each 4x4 unsigned multiplier
// downstream knows whether to add or subtract its product. A wider weight
// gives its sign to all of its nibbles. The magnitude is taken at the
// weight's own width: -8, -128 and -32768 become 8, 128 and 32768, which
// still fit as unsigned numbers. o_sign[7] is always i_b[31]: the top
// nibble belongs to a weight whose sign bit is bit 31 at every width.
//
// Purely combinational. The nibble-wise sign output follows the
// accelerator's description; the negate-if-negative circuit is the simplest
// one that does the job.
module sm_converter
  import svm_pkg::*;
(
  input  logic [XLEN-1:0] i_b,
  input  wmode_e          i_mode,
  output logic [XLEN-1:0] o_mag,
  output logic [7:0]      o_sign
);

  logic [7:0][3:0]  mag4;
  logic [3:0][7:0]  mag8;
  logic [1:0][15:0] mag16;

  for (genvar k = 0; k < 8; k++) begin : g_w4
    assign mag4[k] = i_b[4*k+3] ? 4'(-i_b[4*k +: 4]) : i_b[4*k +: 4];
  end
  for (genvar k = 0; k < 4; k++) begin : g_w8
    assign mag8[k] = i_b[8*k+7] ? 8'(-i_b[8*k +: 8]) : i_b[8*k +: 8];
  end
  for (genvar k = 0; k < 2; k++) begin : g_w16
    assign mag16[k] = i_b[16*k+15] ? 16'(-i_b[16*k +: 16]) : i_b[16*k +: 16];
  end

  always_comb begin
    case (i_mode)
      WMODE_8: begin
        o_mag  = mag8;
        o_sign = {{2{i_b[31]}}, {2{i_b[23]}}, {2{i_b[15]}}, {2{i_b[7]}}};
      end
      WMODE_16: begin
        o_mag  = mag16;
        o_sign = {{4{i_b[31]}}, {4{i_b[15]}}};
      end
      default: begin
        o_mag  = mag4;
        o_sign = {i_b[31], i_b[27], i_b[23], i_b[19], i_b[15], i_b[11], i_b[7], i_b[3]};
      end
    endcase
  end

endmodule
