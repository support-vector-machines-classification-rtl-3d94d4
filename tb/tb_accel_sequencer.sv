// tb_accel_sequencer: runs the sequencer through many accelerator
// operations with a register file and an accelerator that answer after 1 or
// a random number of cycles, and checks the control sequence cycle by cycle:
// one read request and one write request per operation, exactly 32 cnt_en
// cycles in each transfer with cnt_done on the last, accel_valid starting the
// cycle after the read cnt_done (when init falls) and held until
// accel_ready, the write request the cycle after accel_ready, o_done on the
// last write bit, and busy for the whole operation. With answers in the same
// cycle (accelerator) and the next cycle (register file) it checks the
// totals: accel_valid 35 cycles after start, done 69 after start.
module tb_accel_sequencer;
  logic clk = 0, rst = 1;
  logic start = 0, rf_ready = 0, acc_ready = 0;
  logic init, rreq, wreq, cnt_en, cnt_done, valid, sin, sout, busy, done;
  int checks = 0, failures = 0;

  accel_sequencer dut (.i_clk(clk), .i_rst(rst), .i_start(start), .i_rf_ready(rf_ready),
    .i_accel_ready(acc_ready), .o_init(init), .o_rf_rreq(rreq), .o_rf_wreq(wreq),
    .o_cnt_en(cnt_en), .o_cnt_done(cnt_done), .o_accel_valid(valid), .o_shift_in(sin),
    .o_shift_out(sout), .o_busy(busy), .o_done(done));

  always #5 clk = ~clk;

  task automatic expect_true(logic c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // wait n cycles (sampling at negedge) with all strobes checked low
  task automatic run_op(int rf_lat, int acc_lat, bit timed);
    int t0, t_valid, t_done, cyc, n_en;
    @(negedge clk); start = 1; t0 = 0;
    @(negedge clk); start = 0; cyc = 1;
    expect_true(rreq && init && busy && !cnt_en, "read request with init");
    @(negedge clk); cyc++;
    expect_true(!rreq, "request is one cycle");
    for (int i = 1; i < rf_lat; i++) begin
      expect_true(init && !cnt_en, "waiting for rf_ready"); @(negedge clk); cyc++;
    end
    rf_ready = 1; @(negedge clk); rf_ready = 0; cyc++;
    n_en = 0;
    for (int i = 0; i < 32; i++) begin
      expect_true(cnt_en && sin && init && !valid, "read transfer");
      expect_true(cnt_done == (i == 31), "cnt_done on the 32nd read bit");
      n_en++; @(negedge clk); cyc++;
    end
    expect_true(!cnt_en && !cnt_done && valid && !init, "accel_valid after cnt_done, init cleared");
    t_valid = cyc;
    for (int i = 1; i < acc_lat; i++) begin
      @(negedge clk); cyc++; expect_true(valid, "valid held until ready");
    end
    acc_ready = 1; @(negedge clk); acc_ready = 0; cyc++;
    expect_true(wreq && !valid, "write request after accel_ready");
    @(negedge clk); cyc++;
    expect_true(!wreq, "write request is one cycle");
    for (int i = 1; i < rf_lat; i++) begin
      expect_true(!cnt_en, "waiting for write rf_ready"); @(negedge clk); cyc++;
    end
    rf_ready = 1; @(negedge clk); rf_ready = 0; cyc++;
    for (int i = 0; i < 32; i++) begin
      expect_true(cnt_en && sout && !sin, "write transfer");
      expect_true(cnt_done == (i == 31) && done == (i == 31), "cnt_done/done on the 32nd write bit");
      n_en++;
      if (i == 31) t_done = cyc;
      @(negedge clk); cyc++;
    end
    expect_true(!busy && !cnt_en, "idle after write-back");
    expect_true(n_en == 64, "64 cnt_en cycles");
    if (timed) begin
      expect_true(t_valid == 35, $sformatf("valid 35 cycles after start (got %0d)", t_valid));
      expect_true(t_done == 69, $sformatf("done 69 cycles after start (got %0d)", t_done));
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    expect_true(!busy && !valid && !cnt_en, "idle after reset");
    for (int i = 0; i < 5; i++) run_op(1, 1, 1);
    for (int i = 0; i < 40; i++) run_op($urandom_range(4, 1), $urandom_range(4, 1), 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
