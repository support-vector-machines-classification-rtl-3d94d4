// tb_rd_select: drives every one-hot (or empty) choice of write-back source
// with every combination of source bits and checks that the output is the
// chosen source's bit, or 0 when no source is chosen.
module tb_rd_select;
  logic [4:0] bits, en;
  logic rd;
  int checks = 0, failures = 0;

  rd_select dut (
    .i_ctrl_rd(bits[0]), .i_rd_ctrl_en(en[0]),
    .i_alu_rd(bits[1]),  .i_rd_alu_en(en[1]),
    .i_csr_rd(bits[2]),  .i_rd_csr_en(en[2]),
    .i_mem_rd(bits[3]),  .i_rd_mem_en(en[3]),
    .i_accel_rd(bits[4]), .i_acc_op(en[4]),
    .o_rd(rd));

  initial begin
    for (int sel = -1; sel < 5; sel++) begin
      for (int v = 0; v < 32; v++) begin
        en = (sel < 0) ? 5'b0 : 5'(1 << sel);
        bits = 5'(v);
        #1;
        checks++;
        if (rd !== ((sel < 0) ? 1'b0 : bits[sel])) begin
          failures++;
          $display("FAIL sel=%0d bits=%b rd=%b", sel, bits, rd);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
