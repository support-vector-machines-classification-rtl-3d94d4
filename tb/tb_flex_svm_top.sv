// tb_flex_svm_top: end-to-end test of the accelerator path at its default
// sizes. The testbench plays the core: it puts operands into the register
// file model (as the core's loads would), "fetches" custom instructions
// {0000001, rs2, rs1, funct3, rd, 0110011} and waits for o_done, then reads
// rd from the register file model.
//
// Part 1 exercises the mechanisms: every funct3 code, register-file wait
// states, instructions that are not for the accelerator (no stall), the
// core's own write-back path through the select, and the timing of one
// operation (71 cycles from fetch to the last result bit, 32 cycles of
// operand and result transfer, accel_valid right after the read cnt_done).
//
// Part 2 runs SVM inference the way the example software routine does:
// Create_Env, then per classifier as many calc instructions as the packed
// features need (the bias rides along as one more feature of value 1 with
// the bias as its weight) and one Res. One-vs-rest reads the class from bits
// 7:0 of the last Res; one-vs-one reads bit 31 of every Res and votes. The
// model shapes are those of five public classification data sets (features,
// classes): Balance Scale (4,3), Dermatology (34,6), Iris (4,3), Seeds (7,3),
// Vertebral 3C (6,3), each at 4-, 8- and 16-bit weights. Weights, biases and
// inputs are random; the reference computes every classifier score with
// integers and predicts the class independently of the hardware.
module tb_flex_svm_top;
  logic clk = 0, rst = 1;
  logic [31:0] ibus_rdt = 0;
  logic ibus_ack = 0;
  logic acc_op, busy, done, rreq, wreq, rf_ready, rs1b, rs2b, wen, wdata;
  logic [4:0] rs1a, rs2a, rda;
  logic alu_rd = 0, alu_en = 0;
  logic init, cnt_en, cnt_done, avalid, aready;
  int checks = 0, failures = 0;

  flex_svm_top dut (
    .clk(clk), .rst(rst), .i_ibus_rdt(ibus_rdt), .i_ibus_ack(ibus_ack),
    .o_acc_op(acc_op), .o_busy(busy), .o_done(done),
    .o_rf_rreq(rreq), .o_rf_wreq(wreq), .i_rf_ready(rf_ready),
    .o_rs1_addr(rs1a), .o_rs2_addr(rs2a), .o_rd_addr(rda),
    .i_rs1(rs1b), .i_rs2(rs2b), .o_rf_wen(wen), .o_rf_wdata(wdata),
    .i_ctrl_rd(1'b0), .i_rd_ctrl_en(1'b0), .i_alu_rd(alu_rd), .i_rd_alu_en(alu_en),
    .i_csr_rd(1'b0), .i_rd_csr_en(1'b0), .i_mem_rd(1'b0), .i_rd_mem_en(1'b0),
    .o_init(init), .o_cnt_en(cnt_en), .o_cnt_done(cnt_done),
    .o_accel_valid(avalid), .o_accel_ready(aready));

  serv_rf_model u_rf (
    .i_clk(clk), .i_rst(rst), .i_rreq(rreq), .i_wreq(wreq),
    .i_rs1_addr(rs1a), .i_rs2_addr(rs2a), .i_rd_addr(rda),
    .i_wen(wen), .i_wdata(wdata), .o_ready(rf_ready), .o_rs1(rs1b), .o_rs2(rs2b));

  always #5 clk = ~clk;

  // ---------------- mechanism counters and protocol monitor ----------------
  typedef enum int { M_CALC4, M_CALC8, M_CALC16, M_RES4, M_RES8, M_RES16, M_ENV, M_NOP,
                     M_TAKE, M_KEEP, M_NEG, M_RF_WAIT, M_STALL, M_NON_ACCEL, M_ALU_WB,
                     M_BIAS_EXTRA, M_N } mech_e;
  int mech [M_N];
  string mech_name [M_N] = '{"calc4", "calc8", "calc16", "res4", "res8", "res16", "create_env",
                             "unassigned funct3", "argmax update", "argmax keep", "negative score",
                             "register-file wait", "stall cycle", "non-accelerator instr",
                             "core write-back path", "extra calc for bias"};

  logic prev_cnt_done_rd = 0, prev_avalid = 0, prev_aready = 0, prev_init = 0;
  int en_run = 0;
  always @(posedge clk) if (!rst) begin
    if (busy) mech[M_STALL]++;
    if (init && !cnt_en && !rreq) mech[M_RF_WAIT]++;
    // accel_valid rises exactly in the cycle after the read cnt_done, as init falls
    if (avalid && !prev_avalid) begin
      checks++;
      if (!prev_cnt_done_rd || init || !prev_init) begin
        failures++; $display("FAIL accel_valid did not follow read cnt_done / init at %0t", $time);
      end
    end
    if (aready) begin
      checks++;
      if (!prev_avalid || !avalid || prev_aready) begin
        failures++; $display("FAIL accel_ready not one cycle after accel_valid at %0t", $time);
      end
    end
    if (wreq) begin
      checks++;
      if (!prev_aready) begin failures++; $display("FAIL write request not after accel_ready"); end
    end
    // cnt_en runs of exactly 32 cycles, cnt_done on the last
    if (cnt_en) en_run++;
    if (cnt_done) begin
      checks++;
      if (en_run != 32) begin failures++; $display("FAIL cnt_en run of %0d cycles", en_run); end
      en_run = 0;
    end
    prev_cnt_done_rd <= cnt_done && init;
    prev_avalid <= avalid;
    prev_aready <= aready;
    prev_init <= init;
  end

  task automatic expect_true(logic c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  function automatic logic [31:0] acc_instr(logic [2:0] f3, logic [4:0] r2, logic [4:0] r1, logic [4:0] d);
    return {7'b0000001, r2, r1, f3, d, 7'b0110011};
  endfunction

  // Fetch one instruction and wait until the accelerator has written rd back.
  int n_issued = 0, cyc_issued = 0;
  task automatic issue(logic [2:0] f3, logic [31:0] a, logic [31:0] b, output logic [31:0] res,
                       output int cycles);
    u_rf.regs[10] = a;
    u_rf.regs[11] = b;
    u_rf.regs[12] = $urandom;
    @(negedge clk); ibus_rdt = acc_instr(f3, 5'd11, 5'd10, 5'd12); ibus_ack = 1;
    @(negedge clk); ibus_ack = 0; ibus_rdt = $urandom;
    cycles = 1;
    while (!done && cycles < 1000) begin @(negedge clk); cycles++; end
    @(negedge clk);
    res = u_rf.regs[12];
    n_issued++; cyc_issued += cycles + 1;
    case (f3)
      3'b000: mech[M_CALC4]++;  3'b010: mech[M_CALC8]++;  3'b101: mech[M_CALC16]++;
      3'b001: mech[M_RES4]++;   3'b100: mech[M_RES8]++;   3'b110: mech[M_RES16]++;
      3'b111: mech[M_ENV]++;    default: mech[M_NOP]++;
    endcase
  endtask

  // ---------------------------- SVM software ----------------------------
  int feat [48];
  int wgt  [15][48];
  int bias [15];

  function automatic int score(int c, int nf);
    int s = bias[c];
    for (int j = 0; j < nf; j++) s += feat[j] * wgt[c][j];
    return s;
  endfunction

  // Runs one classifier: calc over packed (feature, weight) pairs, bias last,
  // then Res. Returns the Res word.
  task automatic run_classifier(int c, int nf, int wbits, output logic [31:0] res);
    int per, n, cyc, nop;
    logic [2:0] fcalc, fres;
    logic [31:0] a, b;
    per = 32 / wbits;
    fcalc = (wbits == 4) ? 3'b000 : (wbits == 8) ? 3'b010 : 3'b101;
    fres  = (wbits == 4) ? 3'b001 : (wbits == 8) ? 3'b100 : 3'b110;
    n = nf + 1;   // the bias is one more element: feature 1, weight = bias
    if (n % per == 1 && nf % per == 0) mech[M_BIAS_EXTRA]++;
    for (int base = 0; base < n; base += per) begin
      logic [31:0] r;
      a = '0; b = '0;
      for (int i = 0; i < per && base + i < n; i++) begin
        int f, w, j;
        j = base + i;
        f = (j == nf) ? 1 : feat[j];
        w = (j == nf) ? bias[c] : wgt[c][j];
        a |= 32'(f & 15) << (4*i);
        b |= (32'(w) & ((32'd1 << wbits) - 1)) << (wbits*i);
      end
      issue(fcalc, a, b, r, cyc);
      expect_true(r == 0, "calc returns 0");
    end
    issue(fres, $urandom, $urandom, res, nop);
  endtask

  int n_infer = 0, n_agree_ovr = 0;

  task automatic infer(int nf, int ncls, int wbits, bit ovo, bit preset = 0);
    logic [31:0] r;
    int cyc, ncl, idx, best, best_s, votes[6], vbest, hvotes[6], hbest;
    int lim;
    int i0, c0, exp_instr;
    lim = (1 << (wbits - 1));
    ncl = ovo ? ncls * (ncls - 1) / 2 : ncls;
    i0 = n_issued; c0 = cyc_issued;
    exp_instr = ncl * ((nf + 1 + 32 / wbits - 1) / (32 / wbits) + 1) + 1;
    if (!preset) begin
      for (int c = 0; c < ncl; c++) begin
        for (int j = 0; j < nf; j++) wgt[c][j] = $urandom_range(2*lim - 1) - lim;
        bias[c] = $urandom_range(2*lim - 1) - lim;
      end
      for (int j = 0; j < nf; j++) feat[j] = $urandom_range(15);
    end
    issue(3'b111, $urandom, $urandom, r, cyc);
    foreach (votes[k]) begin votes[k] = 0; hvotes[k] = 0; end
    best = 0; best_s = -(2**31); idx = 0;
    if (!ovo) begin
      for (int c = 0; c < ncl; c++) begin
        int s;
        s = score(c, nf);
        if (best_s <= s) begin best_s = s; best = c; mech[M_TAKE]++; end
        else mech[M_KEEP]++;
        if (s < 0) mech[M_NEG]++;
        run_classifier(c, nf, wbits, r);
        expect_true(r[31] == (s < 0), $sformatf("OvR score sign of classifier %0d", c));
        expect_true(r[30:8] == 0, "unused result bits are 0");
      end
      expect_true((r & 32'hFF) == 32'(best), $sformatf("OvR class: got %0d expected %0d", r & 32'hFF, best));
    end else begin
      for (int p = 0; p < ncls; p++) for (int q = p + 1; q < ncls; q++) begin
        int s;
        s = score(idx, nf);
        if (s < 0) mech[M_NEG]++;
        run_classifier(idx, nf, wbits, r);
        expect_true(r[31] == (s < 0), $sformatf("OvO sign of classifier %0d", idx));
        if (s >= 0) votes[p]++; else votes[q]++;
        if (!r[31]) hvotes[p]++; else hvotes[q]++;
        idx++;
      end
      vbest = 0; hbest = 0;
      for (int k = 1; k < ncls; k++) begin
        if (votes[k] > votes[vbest]) vbest = k;
        if (hvotes[k] > hvotes[hbest]) hbest = k;
      end
      expect_true(vbest == hbest, "OvO voted class");
    end
    expect_true(n_issued - i0 == exp_instr, "accelerator instructions per inference");
    if (!preset)
      $display("workload features=%0d classes=%0d %s %0d-bit: %0d accelerator instructions, %0d cycles",
               nf, ncls, ovo ? "OvO" : "OvR", wbits, n_issued - i0, cyc_issued - c0);
    n_infer++;
  endtask

  // ------------------------------ test ---------------------------------
  initial begin
    logic [31:0] r;
    int cyc;
    string ds_name [5] = '{"BS", "Derm", "Iris", "Seeds", "V3"};
    int ds_feat [5] = '{4, 34, 4, 7, 6};
    int ds_cls  [5] = '{3, 6, 3, 3, 3};
    int bits    [3] = '{4, 8, 16};
    foreach (mech[k]) mech[k] = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    @(negedge clk);

    // Part 1: timing of one operation with a one-cycle register file.
    issue(3'b111, 0, 0, r, cyc);
    expect_true(cyc == 71, $sformatf("one accelerator instruction takes 71 cycles (got %0d)", cyc));
    expect_true(r == 0, "Create_Env returns 0");
    issue(3'b011, $urandom, $urandom, r, cyc);
    expect_true(r == 0 && cyc == 71, "unassigned funct3 is a no-op returning 0");
    // one calc then Res: 3*(-2) + 5*7 = 29, class 0, positive
    issue(3'b000, 32'h0000_0053, 32'h0000_007E, r, cyc);
    issue(3'b001, 0, 0, r, cyc);
    expect_true(r == 32'h0000_0000, $sformatf("Res word %h", r));
    // negative score on classifier 1: 15*(-8) = -120 -> sign set, class stays 0
    issue(3'b000, 32'h0000_000F, 32'h0000_0008, r, cyc);
    issue(3'b001, 0, 0, r, cyc);
    expect_true(r == 32'h8000_0000, $sformatf("Res word %h", r));

    // Instructions that are not for the accelerator do not stall the core;
    // the core's own write-back source passes through the select.
    for (int i = 0; i < 20; i++) begin
      logic [6:0] f7;
      f7 = (i % 3 == 0) ? 7'h00 : (i % 3 == 1) ? 7'h20 : 7'h02;
      @(negedge clk); ibus_rdt = {f7, 10'($urandom), 3'($urandom), 5'($urandom), 7'b0110011}; ibus_ack = 1;
      @(negedge clk); ibus_ack = 0;
      repeat (3) begin
        alu_en = 1; alu_rd = 1'($urandom);
        @(negedge clk);
        expect_true(!busy && !rreq, "no stall for a non-accelerator instruction");
        expect_true(wdata == alu_rd, "core write-back bit passes the select");
        mech[M_ALU_WB]++;
      end
      alu_en = 0;
      mech[M_NON_ACCEL]++;
    end

    // Part 2: inference for the five model shapes, both schemes, three widths.
    // Register-file latency 1..3 cycles from here on.
    u_rf.lat_max = 3;
    foreach (ds_name[d]) foreach (bits[b]) for (int ovo = 0; ovo < 2; ovo++)
      for (int rep = 0; rep < 2; rep++)
        infer(ds_feat[d], ds_cls[d], bits[b], 1'(ovo));
    // Extreme weights: all -2^(W-1) and 2^(W-1)-1 at full feature value.
    foreach (bits[b]) begin
      int lim;
      lim = 1 << (bits[b] - 1);
      for (int c = 0; c < 3; c++) begin
        for (int j = 0; j < 34; j++) wgt[c][j] = (c == 1) ? lim - 1 : -lim;
        bias[c] = (c == 1) ? lim - 1 : -lim;
      end
      for (int j = 0; j < 34; j++) feat[j] = 15;
      infer(34, 3, bits[b], 1'b0, 1'b1);
      infer(34, 3, bits[b], 1'b1, 1'b1);
    end

    for (int k = 0; k < M_N; k++) begin
      $display("mechanism %-24s %0d", mech_name[k], mech[k]);
      checks++;
      if (mech[k] == 0) begin failures++; $display("FAIL mechanism never happened: %s", mech_name[k]); end
    end
    $display("inferences run: %0d", n_infer);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
