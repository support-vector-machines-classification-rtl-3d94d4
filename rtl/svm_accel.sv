// svm_accel: linear-kernel SVM co-processor (one-vs-rest and one-vs-one).
//
// Each calc instruction brings up to eight 4-bit unsigned features in rs1 and
// eight 4-bit, four 8-bit or two 16-bit signed weights in rs2, multiplies
// them pairwise and adds the products to cur_sum. Two svm_pe instances (eight
// 4x4 multipliers) do the products; sm_converter turns the weights into
// magnitudes and per-nibble signs. Features are spread over the PEs so that
// every multiplier of a wide weight sees the same feature:
//
//   width  A_H (PE high)    A_L (PE low)     weights per op
//   4      {A7,A6,A5,A4}    {A3,A2,A1,A0}    8
//   8      {A3,A3,A2,A2}    {A1,A1,A0,A0}    4
//   16     {A1,A1,A1,A1}    {A0,A0,A0,A0}    2        (A_i = rs1[4i+3:4i])
//
// A Res instruction closes the current classifier: if max_sum <= cur_sum,
// max_sum and max_id take cur_sum and cur_id (the running argmax for OvR);
// cur_sum is cleared and cur_id incremented. It returns
// {sign of cur_sum, 23'b0, class id}, where the class id is max_id including
// the classifier just closed. OvR software reads bits 7:0 after the last
// Res; OvO software reads bit 31 after every Res. Create_Env (and reset)
// clears cur_sum, cur_id, max_id and sets max_sum to -2^31. Calc and
// Create_Env return 0. The bias is not special: software sends it as one
// more (feature, weight) pair.
//
// Handshake: the operation executes in the first cycle i_valid is high;
// o_ready is high for one cycle one clock later, with o_result valid then and
// held until the next operation. i_valid must stay high until o_ready.
//
// Registers, multiplexers, reset values and the 32-bit result layout follow
// the co-processor's description; the tie rule of the comparison, the use of
// the cur_sum sign in bit 31 and the one-cycle ready are this design's
// choices.
module svm_accel
  import svm_pkg::*;
#(
  parameter int unsigned SUM_W  = 32,
  parameter int unsigned ID_W   = 8,
  parameter int unsigned PSUM_W = 22
) (
  input  logic            i_clk,
  input  logic            i_rst,
  input  logic [XLEN-1:0] i_rs1,
  input  logic [XLEN-1:0] i_rs2,
  input  logic [2:0]      i_funct3,
  input  logic            i_valid,
  output logic            o_ready,
  output logic [XLEN-1:0] o_result
);

  localparam logic signed [SUM_W-1:0] SUM_MIN = {1'b1, {(SUM_W-1){1'b0}}};

  logic signed [SUM_W-1:0] cur_sum, max_sum;
  logic [ID_W-1:0]         cur_id, max_id;

  wmode_e          mode;
  logic [XLEN-1:0] b_mag;
  logic [7:0]      b_sign;
  logic [15:0]     a_l, a_h;
  logic signed [PSUM_W-1:0] l0, l1, h0, h1;
  logic signed [SUM_W-1:0]  sum_next;
  logic                     take;
  logic [ID_W-1:0]          cls_next;
  logic signed [SUM_W-1:0]  max_next;
  logic [XLEN-1:0]          res_word;
  logic                     exec;

  assign mode = wmode_of(i_funct3);

  sm_converter u_conv (
    .i_b    (i_rs2),
    .i_mode (mode),
    .o_mag  (b_mag),
    .o_sign (b_sign)
  );

  always_comb begin
    case (mode)
      WMODE_8: begin
        a_l = {{2{i_rs1[7:4]}},  {2{i_rs1[3:0]}}};
        a_h = {{2{i_rs1[15:12]}}, {2{i_rs1[11:8]}}};
      end
      WMODE_16: begin
        a_l = {4{i_rs1[3:0]}};
        a_h = {4{i_rs1[7:4]}};
      end
      default: begin
        a_l = i_rs1[15:0];
        a_h = i_rs1[31:16];
      end
    endcase
  end

  svm_pe #(.PSUM_W(PSUM_W)) u_pe_l (
    .i_a       (a_l),
    .i_w       (b_mag[15:0]),
    .i_sign    (b_sign[3:0]),
    .i_inst_id (i_funct3),
    .o_sum0    (l0),
    .o_sum1    (l1)
  );

  svm_pe #(.PSUM_W(PSUM_W)) u_pe_h (
    .i_a       (a_h),
    .i_w       (b_mag[31:16]),
    .i_sign    (b_sign[7:4]),
    .i_inst_id (i_funct3),
    .o_sum0    (h0),
    .o_sum1    (h1)
  );

  // Accumulator adder, argmax comparator and result word.
  always_comb begin
    sum_next = cur_sum + SUM_W'(l0) + SUM_W'(l1) + SUM_W'(h0) + SUM_W'(h1);
    take     = (max_sum <= cur_sum);
    cls_next = take ? cur_id  : max_id;
    max_next = take ? cur_sum : max_sum;
    res_word = '0;
    res_word[XLEN-1] = cur_sum[SUM_W-1];
    res_word[ID_W-1:0] = cls_next;
  end

  assign exec = i_valid && !o_ready;

  always_ff @(posedge i_clk) begin
    if (i_rst) begin
      cur_sum  <= '0;
      max_sum  <= SUM_MIN;
      cur_id   <= '0;
      max_id   <= '0;
      o_ready  <= 1'b0;
      o_result <= '0;
    end else begin
      o_ready <= exec;
      if (exec) begin
        o_result <= '0;
        if (is_calc(i_funct3)) begin
          cur_sum <= sum_next;
        end else if (is_res(i_funct3)) begin
          max_sum  <= max_next;
          max_id   <= cls_next;
          cur_sum  <= '0;
          cur_id   <= cur_id + 1'b1;
          o_result <= res_word;
        end else if (i_funct3 == F3_CREATE_ENV) begin
          cur_sum <= '0;
          max_sum <= SUM_MIN;
          cur_id  <= '0;
          max_id  <= '0;
        end
      end
    end
  end

  // Handshake rules: ready answers a valid, and valid is held until ready.
  a_ready_needs_valid : assert property (@(posedge i_clk) disable iff (i_rst)
    o_ready |-> i_valid);
  a_valid_held : assert property (@(posedge i_clk) disable iff (i_rst)
    (i_valid && !o_ready) |=> i_valid);

  if (ID_W >= XLEN) begin : g_bad_id_w
    $error("ID_W must leave bit 31 for the sign");
  end

endmodule
