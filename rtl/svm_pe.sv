// svm_pe: processing element of the SVM co-processor.
//
// Four 4x4 unsigned multipliers work on a 16-bit slice of features I and
// weight magnitudes W, nibble k of I times nibble k of W. Products 1 and 3
// can be shifted left by 4, and the sum of products 2 and 3 can be shifted
// left by 8, which lets the same multipliers build one 8-bit product from a
// pair of them, or one 16-bit product from all four:
//
//   sum_0 = s0*I[3:0]*W[3:0]   + s1*(I[7:4]*W[7:4]     << 4 if sh4)
//   sum_1 = (s2*I[11:8]*W[11:8] + s3*(I[15:12]*W[15:12] << 4 if sh4)) << 8 if sh8
//
// with sh4 = inst_id[2] | inst_id[1] and sh8 = inst_id[2]. For the three
// calc codes this gives no shift for 4-bit weights (000), sh4 only for 8-bit
// (010) and both for 16-bit (101). s_k is +1 or -1 from i_sign[k]: each
// product is negated before the adders when its weight is negative.
//
// The multiplier/shift/mux structure and the inst_id bits that steer the
// muxes follow the design's PE diagram; the OR that combines inst_id[2] and
// inst_id[1], and the place where signs are applied, are this design's
// reading of it. inst_id[0] does not steer anything in the PE (it is unused
// on purpose). Purely combinational.
module svm_pe #(
  parameter int unsigned PSUM_W = 22
) (
  input  logic [15:0]               i_a,
  input  logic [15:0]               i_w,
  input  logic [3:0]                i_sign,
  input  logic [2:0]                i_inst_id,
  output logic signed [PSUM_W-1:0]  o_sum0,
  output logic signed [PSUM_W-1:0]  o_sum1
);

  logic [7:0]  prod [4];
  logic        sh4, sh8;
  logic signed [PSUM_W-1:0] term [4];
  logic signed [PSUM_W-1:0] pair1;

  assign sh4 = i_inst_id[2] | i_inst_id[1];
  assign sh8 = i_inst_id[2];

  always_comb begin
    for (int k = 0; k < 4; k++) begin
      logic [PSUM_W-1:0] mag;
      prod[k] = i_a[4*k +: 4] * i_w[4*k +: 4];
      mag     = PSUM_W'(prod[k]);
      if ((k % 2 == 1) && sh4) mag = mag << 4;
      term[k] = i_sign[k] ? -$signed(mag) : $signed(mag);
    end
    o_sum0 = term[0] + term[1];
    pair1  = term[2] + term[3];
    o_sum1 = sh8 ? (pair1 <<< 8) : pair1;
  end

endmodule
