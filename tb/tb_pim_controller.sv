// tb_pim_controller: checks the operation sequence and its cycle counts.
//
// For each precision the testbench pulses start and records, cycle by cycle,
// the strobes the controller raises. Expected: one load, P accumulate cycles
// with bit-plane index 0..P-1 in order, one en8 for 8- and 16-bit, one en16
// for 16-bit only, then a single done, P + 2, P + 3 or P + 4 cycles after
// start. A start with skip set must give done and done_skip one cycle
// after start with no load or accumulate at all. A start pulse while busy
// must be ignored.
module tb_pim_controller;
  import pim_pkg::*;

  logic       clk = 0, rst_n = 0, start = 0, skip = 0;
  prec_e      prec = PREC_2, prec_q;
  logic       busy, load, shift, acc_en, en8, en16, done, done_skip;
  logic [3:0] bitpos;
  int         checks = 0, failures = 0;

  pim_controller dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("%s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic run(prec_e p, bit s);
    int n_load = 0, n_acc = 0, n_en8 = 0, n_en16 = 0, n_skip = 0, cyc = 0;
    int next_t = 0, bad_order = 0, p_bits, exp_cyc;
    p_bits = int'(prec_bits(p));
    @(negedge clk);
    prec = p; skip = s; start = 1;
    @(negedge clk);
    start = 0;
    prec = PREC_2; skip = 0;
    cyc = 1;
    while (!done && cyc < 100) begin
      if (load) n_load++;
      if (acc_en) begin
        if (int'(bitpos) != next_t) bad_order++;
        next_t++;
        n_acc++;
      end
      if (en8) n_en8++;
      if (en16) n_en16++;
      if (cyc == 3) begin
        start = 1;          // ignored: controller is busy
        #1;
        start = 0;
      end
      @(negedge clk);
      cyc++;
    end
    if (done_skip) n_skip++;
    exp_cyc = s ? 1 : p_bits + 2 + ((p == PREC_8) ? 1 : 0) + ((p == PREC_16) ? 2 : 0);
    expect_eq($sformatf("P=%0d skip=%0b latency", p_bits, s), cyc, exp_cyc);
    expect_eq("load count", n_load, s ? 0 : 1);
    expect_eq("accumulate count", n_acc, s ? 0 : p_bits);
    expect_eq("bit-plane order errors", bad_order, 0);
    expect_eq("en8 count", n_en8, (!s && (p == PREC_8 || p == PREC_16)) ? 1 : 0);
    expect_eq("en16 count", n_en16, (!s && p == PREC_16) ? 1 : 0);
    expect_eq("done_skip", n_skip, s ? 1 : 0);
    expect_eq("prec_q", int'(prec_q), int'(p));
    @(negedge clk);
    expect_eq("idle after done", int'(busy), 0);
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 2; i++) begin
      run(PREC_2, 0);
      run(PREC_4, 0);
      run(PREC_8, 0);
      run(PREC_16, 0);
      run(PREC_16, 1);
      run(PREC_4, 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
