// tb_accel_serdes: shifts random rs1/rs2 words in LSB first and checks the
// parallel operands; loads random result words and checks that they come
// out LSB first, one bit per i_shift_out cycle, with idle cycles between.
module tb_accel_serdes;
  logic clk = 0;
  logic sin = 0, b1 = 0, b2 = 0, ld = 0, sout = 0, rd;
  logic [31:0] opa, opb, res = 0;
  int checks = 0, failures = 0;

  accel_serdes dut (.i_clk(clk), .i_shift_in(sin), .i_rs1(b1), .i_rs2(b2), .o_op_a(opa), .o_op_b(opb),
                    .i_load(ld), .i_result(res), .i_shift_out(sout), .o_rd(rd));

  always #5 clk = ~clk;

  initial begin
    for (int t = 0; t < 200; t++) begin
      logic [31:0] x, y, r, got;
      x = $urandom; y = $urandom; r = $urandom;
      for (int i = 0; i < 32; i++) begin
        @(negedge clk); sin = 1; b1 = x[i]; b2 = y[i];
        if ($urandom_range(3) == 0) begin @(negedge clk); sin = 0; b1 = ~b1; end
      end
      @(negedge clk); sin = 0;
      checks++;
      if (opa !== x || opb !== y) begin failures++; $display("FAIL op %h %h exp %h %h", opa, opb, x, y); end
      ld = 1; res = r;
      @(negedge clk); ld = 0; res = ~r;
      got = '0;
      for (int i = 0; i < 32; i++) begin
        got[i] = rd;
        sout = 1;
        @(negedge clk); sout = 0;
        if ($urandom_range(3) == 0) @(negedge clk);
      end
      checks++;
      if (got !== r) begin failures++; $display("FAIL res %h exp %h", got, r); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
