// tb_pim_accelerator: end-to-end test of the PIM tile at its default size.
//
// The testbench writes random weights into the array, then runs MAC
// operations at many layer bit-widths and compares every forwarded result
// with dot products it computes itself from its copy of the weights and the
// activations (64-bit integers):
//   2/4-bit  res4[i]  = sum_r en_r * a_r * W_r[4i+3:4i]
//   8-bit    res8[k]  = sum_r en_r * a_r * W_r[8k+7:8k]
//   16-bit   res16    = sum_r en_r * a_r * W_r
// with a_r reduced to the precision's low bits (the activations carry random
// upper bits that the tile must ignore). It also checks the start-to-done
// cycle count (P+2, P+3, P+4), the valid flags, and counts how often each
// mechanism happened: each of the four precisions, rounding of an
// unsupported width, the bypass of a removed layer (k = 0), the rejection of
// a width above 16, pruned rows, and a weight write ignored while busy.
// A mechanism that never happened counts as a failure.
module tb_pim_accelerator;
  import pim_pkg::*;
  localparam int unsigned ROWS = 8;
  localparam int unsigned AW   = $clog2(ROWS);
  localparam int unsigned SB   = $clog2(ROWS + 1);
  localparam int unsigned W4   = SB + 4 + MAX_PREC;
  localparam int unsigned W8   = SB + 8 + MAX_PREC;
  localparam int unsigned W16  = SB + 16 + MAX_PREC;

  logic                clk = 0, rst_n = 0;
  logic                w_we = 0;
  logic [AW-1:0]       w_addr = '0;
  logic [NUM_COLS-1:0] w_data = '0;
  logic                start = 0;
  logic [KW-1:0]       k_bits = '0;
  logic [MAX_PREC-1:0] act_in [ROWS];
  logic [ROWS-1:0]     row_en = '1;
  logic                busy, done, done_skip, layer_off, unsupported;
  logic [1:0]          prec;
  logic [KW-1:0]       eff_bits;
  logic [W4-1:0]       res4  [NUM_ACC4];
  logic [W8-1:0]       res8  [NUM_ACC8];
  logic [W16-1:0]      res16;
  logic                valid4, valid8, valid16;

  logic [NUM_COLS-1:0] wmodel [ROWS];
  int checks = 0, failures = 0;
  int n_p2 = 0, n_p4 = 0, n_p8 = 0, n_p16 = 0, n_round = 0, n_bypass = 0;
  int n_reject = 0, n_pruned = 0, n_wblock = 0;

  pim_accelerator dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("%s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic write_row(int r, logic [NUM_COLS-1:0] d);
    @(negedge clk);
    w_we = 1; w_addr = AW'(r); w_data = d;
    @(negedge clk);
    w_we = 0;
    wmodel[r] = d;
  endtask

  // Random weights that fit precision pb: pb-bit values in every lane.
  task automatic load_weights(int pb);
    for (int r = 0; r < ROWS; r++) begin
      logic [NUM_COLS-1:0] d = NUM_COLS'($urandom);
      if (pb <= 4) begin
        logic [3:0] lanemask = 4'((1 << pb) - 1);
        for (int i = 0; i < 4; i++) d[4*i +: 4] &= lanemask;
      end
      write_row(r, d);
    end
  endtask

  // One MAC operation at layer bit-width k with row mask m.
  task automatic run_op(int k, logic [ROWS-1:0] m);
    int     pb, cyc, exp_cyc;
    logic [MAX_PREC-1:0] a [ROWS];
    longint e4 [4];
    longint e8 [2];
    longint e16;
    pb = (k <= 2) ? 2 : (k <= 4) ? 4 : (k <= 8) ? 8 : 16;
    for (int r = 0; r < ROWS; r++) a[r] = MAX_PREC'($urandom);
    if (k % 3 == 0)  // all-ones activations: largest values
      for (int r = 0; r < ROWS; r++) a[r] = '1;
    @(negedge clk);
    act_in = a; row_en = m; k_bits = KW'(k); start = 1;
    #1;
    expect_eq("layer_off flag", layer_off, k == 0);
    expect_eq("unsupported flag", unsupported, k > 16);
    if (k > 0 && k <= 16) expect_eq("eff_bits", eff_bits, pb);
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!done && cyc < 100) begin
      if (cyc == 4) begin
        // a write while busy must be ignored
        w_we = 1; w_addr = '0; w_data = ~wmodel[0];
      end
      @(negedge clk);
      w_we = 0;
      cyc++;
    end
    if (cyc > 4) n_wblock++;
    if (k == 0 || k > 16) begin
      expect_eq("bypass latency", cyc, 1);
      expect_eq("done_skip", done_skip, 1);
      expect_eq("no valid result", valid4 | valid8 | valid16, 0);
      if (k == 0) n_bypass++; else n_reject++;
      return;
    end
    exp_cyc = pb + 2 + ((pb == 8) ? 1 : 0) + ((pb == 16) ? 2 : 0);
    expect_eq($sformatf("k=%0d latency", k), cyc, exp_cyc);
    expect_eq("done_skip low", done_skip, 0);
    for (int i = 0; i < 4; i++) e4[i] = 0;
    for (int j = 0; j < 2; j++) e8[j] = 0;
    e16 = 0;
    for (int r = 0; r < ROWS; r++) begin
      longint av;
      if (!m[r]) continue;
      av = longint'(a[r]) & ((longint'(1) << pb) - 1);
      for (int i = 0; i < 4; i++) e4[i] += av * longint'(wmodel[r][4*i +: 4]);
      for (int j = 0; j < 2; j++) e8[j] += av * longint'(wmodel[r][8*j +: 8]);
      e16 += av * longint'(wmodel[r]);
    end
    // check in the done cycle and once more a cycle later (results held)
    for (int rep = 0; rep < 2; rep++) begin
      expect_eq("valid4",  valid4,  pb <= 4);
      expect_eq("valid8",  valid8,  pb == 8);
      expect_eq("valid16", valid16, pb == 16);
      if (pb <= 4)
        for (int i = 0; i < 4; i++)
          expect_eq($sformatf("k=%0d ACC4,%0d", k, i + 1), longint'(res4[i]), e4[i]);
      else if (pb == 8)
        for (int j = 0; j < 2; j++)
          expect_eq($sformatf("k=%0d ACC8,%0d", k, j + 1), longint'(res8[j]), e8[j]);
      else
        expect_eq($sformatf("k=%0d ACC16,1", k), longint'(res16), e16);
      @(negedge clk);
    end
    case (pb)
      2: n_p2++;
      4: n_p4++;
      8: n_p8++;
      default: n_p16++;
    endcase
    if (k != pb) n_round++;
    if (m != '1) n_pruned++;
  endtask

  initial begin
    for (int r = 0; r < ROWS; r++) act_in[r] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k <= 24; k++) begin
      automatic int pb = (k <= 2) ? 2 : (k <= 4) ? 4 : (k <= 8) ? 8 : 16;
      load_weights(pb);
      run_op(k, '1);
      run_op(k, ROWS'($urandom) | ROWS'(1));
    end
    // largest values: all weights and activations at their maximum
    for (int r = 0; r < ROWS; r++) write_row(r, '1);
    run_op(16, '1);
    run_op(15, '1);
    $display("mechanisms: p2=%0d p4=%0d p8=%0d p16=%0d round=%0d bypass=%0d reject=%0d pruned=%0d wblock=%0d",
             n_p2, n_p4, n_p8, n_p16, n_round, n_bypass, n_reject, n_pruned, n_wblock);
    if (n_p2 == 0 || n_p4 == 0 || n_p8 == 0 || n_p16 == 0 || n_round == 0 ||
        n_bypass == 0 || n_reject == 0 || n_pruned == 0 || n_wblock == 0) begin
      failures++;
      $display("a mechanism never happened");
    end
    checks++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
