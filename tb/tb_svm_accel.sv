// tb_svm_accel: drives the SVM co-processor through its valid/ready port
// with random programs: Create_Env, then classifiers made of random calc
// instructions at 4-, 8- and 16-bit weight width (mixed) and a Res at the
// end, plus stray no-op codes. A reference model keeps cur_sum, cur_id,
// max_sum and max_id as integers and computes every dot product from the
// signed weight values directly (feature i = rs1[4i+3:4i], weight i =
// signed rs2[iW+W-1:iW]). Each operation checks: accel_ready exactly one
// cycle after accel_valid, a single execution although valid is still high
// in the ready cycle, and the 32-bit result (0 for calc/no-op/Create_Env,
// {sign of cur_sum, class id} for Res). It also checks reset mid-program.
module tb_svm_accel;
  logic clk = 0, rst = 1;
  logic [31:0] rs1, rs2, result;
  logic [2:0] f3;
  logic valid = 0, ready;
  int checks = 0, failures = 0;
  longint cur_sum, max_sum;
  int cur_id, max_id;
  int n_take = 0, n_keep = 0, n_neg = 0;

  svm_accel dut (.i_clk(clk), .i_rst(rst), .i_rs1(rs1), .i_rs2(rs2), .i_funct3(f3),
                 .i_valid(valid), .o_ready(ready), .o_result(result));

  always #5 clk = ~clk;

  task automatic model_reset();
    cur_sum = 0; max_sum = -(64'sd1 <<< 31); cur_id = 0; max_id = 0;
  endtask

  task automatic expect_true(logic c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic op(logic [2:0] code, logic [31:0] a, logic [31:0] b);
    logic [31:0] exp;
    int w;
    exp = '0;
    case (code)
      3'b000, 3'b010, 3'b101: begin
        w = (code == 3'b000) ? 4 : (code == 3'b010) ? 8 : 16;
        for (int i = 0; i < 32 / w; i++) begin
          longint fv, wv;
          fv = longint'((a >> (4*i)) & 32'hF);
          wv = longint'((b >> (w*i)) & ((32'd1 << w) - 1));
          if (wv >= (64'sd1 <<< (w-1))) wv -= (64'sd1 <<< w);
          cur_sum += fv * wv;
        end
      end
      3'b001, 3'b100, 3'b110: begin
        if (max_sum <= cur_sum) begin max_sum = cur_sum; max_id = cur_id; n_take++; end
        else n_keep++;
        if (cur_sum < 0) n_neg++;
        exp = {cur_sum < 0, 23'b0, 8'(max_id)};
        cur_sum = 0; cur_id++;
      end
      3'b111: model_reset();
      default: ;
    endcase
    @(negedge clk);
    f3 = code; rs1 = a; rs2 = b; valid = 1;
    expect_true(!ready, "ready low before the operation");
    @(negedge clk);
    expect_true(ready, "ready one cycle after valid");
    expect_true(result == exp, $sformatf("result code=%b got %h exp %h", code, result, exp));
    @(negedge clk);
    valid = 0; rs1 = $urandom; rs2 = $urandom; f3 = 3'($urandom);
    expect_true(!ready, "single-cycle ready");
    expect_true(result == exp, "result held");
  endtask

  task automatic classifier(int n_calc, int fixed_w);
    for (int j = 0; j < n_calc; j++) begin
      int m;
      logic [2:0] c;
      m = (fixed_w < 0) ? $urandom_range(2) : fixed_w;
      c = (m == 0) ? 3'b000 : (m == 1) ? 3'b010 : 3'b101;
      op(c, $urandom, $urandom);
      if ($urandom_range(9) == 0) op(3'b011, $urandom, $urandom);
    end
    case ($urandom_range(2))
      0: op(3'b001, $urandom, $urandom);
      1: op(3'b100, $urandom, $urandom);
      default: op(3'b110, $urandom, $urandom);
    endcase
  endtask

  initial begin
    f3 = 0; rs1 = 0; rs2 = 0;
    repeat (2) @(negedge clk);
    rst = 0; model_reset();
    // A Res right after reset reports class 0 and the sign of 0.
    op(3'b001, 0, 0);
    op(3'b111, 0, 0);
    // Ties go to the later classifier: two classifiers with the same sum.
    op(3'b000, 32'h1, 32'h3); op(3'b001, 0, 0);
    op(3'b000, 32'h1, 32'h3); op(3'b001, 0, 0);
    for (int prog = 0; prog < 60; prog++) begin
      op(3'b111, $urandom, $urandom);
      for (int k = 0; k < $urandom_range(12, 2); k++) classifier($urandom_range(10, 1), (prog % 4 == 3) ? -1 : prog % 3);
    end
    // more than 255 classifiers: class id wraps in 8 bits
    op(3'b111, 0, 0);
    for (int k = 0; k < 300; k++) classifier(1, 0);
    // synchronous reset in the middle of a program
    op(3'b000, $urandom, $urandom);
    @(negedge clk); rst = 1; @(negedge clk); rst = 0; model_reset();
    op(3'b001, 0, 0);
    expect_true(n_take > 10 && n_keep > 10 && n_neg > 10, "argmax update, keep and negative sums all seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
