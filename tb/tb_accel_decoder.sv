// tb_accel_decoder: feeds custom accelerator instructions, standard R-type
// instructions (funct7 0x00 and 0x20), other funct7 values, other opcodes and
// random words, and checks acc_op, funct3 and the register fields after each
// enabled clock edge; also checks that the outputs hold while enable is low.
module tb_accel_decoder;
  logic clk = 0;
  logic [31:0] instr;
  logic en;
  logic acc_op;
  logic [2:0] f3;
  logic [4:0] ra, rb, rd;
  int checks = 0, failures = 0;
  int n_acc = 0;

  accel_decoder dut (.i_clk(clk), .i_instr(instr), .i_en(en), .o_acc_op(acc_op),
                     .o_funct3(f3), .o_rs1_addr(ra), .o_rs2_addr(rb), .o_rd_addr(rd));

  always #5 clk = ~clk;

  function automatic logic [31:0] rtype(logic [6:0] f7, logic [4:0] r2, logic [4:0] r1,
                                        logic [2:0] fn3, logic [4:0] d, logic [6:0] opc);
    return {f7, r2, r1, fn3, d, opc};
  endfunction

  task automatic apply(logic [31:0] ins, logic exp_acc);
    logic [31:0] held;
    @(negedge clk); instr = ins; en = 1'b1;
    @(negedge clk); en = 1'b0;
    checks++;
    if (acc_op !== exp_acc || f3 !== ins[14:12] || ra !== ins[19:15] || rb !== ins[24:20] || rd !== ins[11:7]) begin
      failures++;
      $display("FAIL instr=%h acc_op=%b exp=%b", ins, acc_op, exp_acc);
    end
    // outputs hold while enable is low
    held = instr;
    instr = ~ins;
    @(negedge clk);
    checks++;
    if (acc_op !== exp_acc || f3 !== held[14:12] || rd !== held[11:7]) begin
      failures++;
      $display("FAIL hold instr=%h", held);
    end
  endtask

  initial begin
    en = 0; instr = 0;
    for (int i = 0; i < 8; i++) begin
      apply(rtype(7'h01, 5'($urandom), 5'($urandom), 3'(i), 5'($urandom), 7'b0110011), 1'b1);
      apply(rtype(7'h00, 5'($urandom), 5'($urandom), 3'(i), 5'($urandom), 7'b0110011), 1'b0);
      apply(rtype(7'h20, 5'($urandom), 5'($urandom), 3'(i), 5'($urandom), 7'b0110011), 1'b0);
      apply(rtype(7'h02, 5'($urandom), 5'($urandom), 3'(i), 5'($urandom), 7'b0110011), 1'b0);
      apply(rtype(7'h01, 5'($urandom), 5'($urandom), 3'(i), 5'($urandom), 7'b0010011), 1'b0);
      apply(rtype(7'h01, 5'($urandom), 5'($urandom), 3'(i), 5'($urandom), 7'b0111011), 1'b0);
    end
    for (int i = 0; i < 500; i++) begin
      logic [31:0] r;
      r = $urandom;
      apply(r, (r[6:0] == 7'b0110011) && (r[31:25] == 7'h01));
      if ((r[6:0] == 7'b0110011) && (r[31:25] == 7'h01)) n_acc++;
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
