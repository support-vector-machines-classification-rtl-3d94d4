// tb_svm_pe: checks the processing element for the three calc codes.
// Part 1 drives random independent nibbles and signs and compares with the
// PE's defining sums computed with integers. Part 2 drives the operand
// patterns the accelerator uses (a feature repeated over the nibbles of one
// 8- or 16-bit weight) and compares sum_0 + sum_1 with the plain product
// feature * weight.
module tb_svm_pe;
  localparam int PW = 22;
  logic [15:0] a, w;
  logic [3:0]  s;
  logic [2:0]  id;
  logic signed [PW-1:0] s0, s1;
  int checks = 0, failures = 0;

  svm_pe dut (.i_a(a), .i_w(w), .i_sign(s), .i_inst_id(id), .o_sum0(s0), .o_sum1(s1));

  function automatic int nib(logic [15:0] x, int k);
    return int'((x >> (4*k)) & 16'hF);
  endfunction

  task automatic check_random(logic [2:0] code);
    int p[4], e0, e1, sc4, sc8;
    sc4 = (code == 3'b000) ? 1 : 16;
    sc8 = (code == 3'b101) ? 256 : 1;
    for (int k = 0; k < 4; k++) p[k] = (s[k] ? -1 : 1) * nib(a, k) * nib(w, k);
    e0 = p[0] + p[1] * sc4;
    e1 = (p[2] + p[3] * sc4) * sc8;
    id = code;
    #1;
    checks++;
    if (int'(s0) != e0 || int'(s1) != e1) begin
      failures++;
      $display("FAIL id=%b a=%h w=%h s=%b sum0=%0d exp %0d sum1=%0d exp %0d", code, a, w, s, s0, e0, s1, e1);
    end
  endtask

  initial begin
    logic [2:0] codes[3] = '{3'b000, 3'b010, 3'b101};
    foreach (codes[c]) for (int i = 0; i < 3000; i++) begin
      a = 16'($urandom); w = 16'($urandom); s = 4'($urandom);
      check_random(codes[c]);
    end
    // worst case magnitudes
    a = 16'hFFFF; w = 16'hFFFF; s = 4'h0; check_random(3'b101);
    s = 4'hF; check_random(3'b101);
    // 8-bit usage: features {A1,A1,A0,A0}, weights {B1,B0}
    for (int i = 0; i < 2000; i++) begin
      int a0, a1, b0, b1, g0, g1;
      a0 = $urandom_range(15); a1 = $urandom_range(15);
      b0 = $urandom_range(128); b1 = $urandom_range(128);
      g0 = $urandom_range(1); g1 = $urandom_range(1);
      a = {4'(a1), 4'(a1), 4'(a0), 4'(a0)};
      w = {8'(b1), 8'(b0)};
      s = {{2{1'(g1)}}, {2{1'(g0)}}};
      id = 3'b010; #1;
      checks++;
      if (int'(s0) != (g0 ? -1 : 1) * a0 * b0 || int'(s1) != (g1 ? -1 : 1) * a1 * b1) begin
        failures++; $display("FAIL 8-bit a0=%0d b0=%0d a1=%0d b1=%0d", a0, b0, a1, b1);
      end
    end
    // 16-bit usage: features {A0,A0,A0,A0}, weight B0
    for (int i = 0; i < 2000; i++) begin
      int a0, b0, g0;
      a0 = $urandom_range(15); b0 = $urandom_range(32768); g0 = $urandom_range(1);
      a = {4{4'(a0)}}; w = 16'(b0); s = {4{1'(g0)}};
      id = 3'b101; #1;
      checks++;
      if (int'(s0) + int'(s1) != (g0 ? -1 : 1) * a0 * b0) begin
        failures++; $display("FAIL 16-bit a0=%0d b0=%0d", a0, b0);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
