// tb_sm_converter: checks the two's-complement to signed-magnitude
// conversion for random and corner-case weight words in the 4-, 8- and
// 16-bit modes. The reference computes each weight's integer value and its
// absolute value independently of the packing arithmetic in the block.
module tb_sm_converter;
  import svm_pkg::*;
  logic [31:0] b, mag;
  logic [7:0]  sign;
  wmode_e      mode;
  int checks = 0, failures = 0;

  sm_converter dut (.i_b(b), .i_mode(mode), .o_mag(mag), .o_sign(sign));

  task automatic check_word();
    int w, n, v;
    logic [31:0] exp_mag;
    logic [7:0]  exp_sign;
    w = (mode == WMODE_4) ? 4 : (mode == WMODE_8) ? 8 : 16;
    n = 32 / w;
    exp_mag = '0; exp_sign = '0;
    for (int i = 0; i < n; i++) begin
      v = int'((b >> (i*w)) & ((32'd1 << w) - 1));
      if (v >= (1 << (w-1))) v = v - (1 << w);   // signed value of weight i
      exp_mag |= 32'(v < 0 ? -v : v) << (i*w);
      for (int k = 0; k < w/4; k++) exp_sign[i*(w/4)+k] = (v < 0);
    end
    #1;
    checks++;
    if (mag !== exp_mag || sign !== exp_sign) begin
      failures++;
      $display("FAIL mode=%0d b=%h mag=%h exp=%h sign=%b exp=%b", mode, b, mag, exp_mag, sign, exp_sign);
    end
  endtask

  initial begin
    wmode_e modes[3] = '{WMODE_4, WMODE_8, WMODE_16};
    foreach (modes[m]) begin
      mode = modes[m];
      b = 32'h0; check_word();
      b = 32'h8888_8888; check_word();
      b = 32'h8080_8080; check_word();
      b = 32'h8000_8000; check_word();
      b = 32'hFFFF_FFFF; check_word();
      b = 32'h7777_7777; check_word();
      for (int i = 0; i < 2000; i++) begin
        b = $urandom; check_word();
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
