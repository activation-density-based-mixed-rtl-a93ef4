// tb_layer_sequence: runs the per-layer bit-widths of the evaluated networks
// through the PIM tile.
//
// Each network below is a list of layer bit-widths k_l found by activation
// density based quantization (VGG19 on CIFAR-10, ResNet18 on CIFAR-100 and on
// TinyImagenet, with and without channel pruning). For every layer the
// testbench loads random weights that fit the layer's rounded precision,
// applies random activations to all rows and checks the forwarded dot
// products against its own integer model, as a layer-by-layer smoke test of
// the mixed-precision mode switching. A 0 entry is a removed layer and must
// be bypassed; entries above 16 bits must be rejected. The tile is one
// 8-row slice, so each layer is represented by one MAC operation, not by its
// full tensor. The testbench also prints the tile cycles each network's
// per-layer operations took.
module tb_layer_sequence;
  import pim_pkg::*;
  localparam int unsigned ROWS = 8;
  localparam int unsigned AW   = $clog2(ROWS);
  localparam int unsigned SB   = $clog2(ROWS + 1);
  localparam int unsigned W4   = SB + 4 + MAX_PREC;
  localparam int unsigned W8   = SB + 8 + MAX_PREC;
  localparam int unsigned W16  = SB + 16 + MAX_PREC;
  localparam int NNET = 11;
  localparam int MAXL = 26;

  // bit-width lists, padded with -1
  localparam int NETS [NNET][MAXL] = '{
    // VGG19 / CIFAR-10, quantized, iteration 2
    '{16, 4, 5, 4, 3, 2, 2, 2, 3, 3, 3, 4, 3, 3, 3, 3, 16, -1, -1, -1, -1, -1, -1, -1, -1, -1},
    // VGG19 / CIFAR-10, iteration 2a (one layer removed)
    '{16, 4, 5, 4, 3, 2, 2, 2, 3, 3, 3, 4, 3, 3, 3, 0, 16, -1, -1, -1, -1, -1, -1, -1, -1, -1},
    // ResNet18 / CIFAR-100, iteration 2
    '{16, 5, 3, 3, 11, 1, 1, 11, 4, 4, 10, 4, 4, 11, 3, 3, 9, 3, 3, 9, 3, 3, 6, 1, 1, 16},
    // ResNet18 / CIFAR-100, iteration 3
    '{16, 5, 3, 3, 5, 1, 1, 8, 4, 4, 6, 4, 4, 8, 3, 3, 9, 3, 3, 9, 3, 3, 6, 1, 1, 16},
    // ResNet18 / TinyImagenet, iteration 2
    '{16, 10, 7, 7, 22, 10, 10, 24, 10, 10, 22, 6, 6, 22, 9, 9, 18, 5, 5, 16, 4, 4, 11, 3, 3, 16},
    // ResNet18 / TinyImagenet, iteration 3
    '{16, 3, 7, 7, 16, 2, 2, 17, 3, 3, 15, 6, 6, 15, 9, 9, 9, 5, 5, 7, 4, 4, 4, 3, 3, 16},
    // ResNet18 / TinyImagenet, iteration 4
    '{16, 3, 7, 7, 14, 2, 2, 14, 3, 3, 10, 6, 6, 10, 9, 9, 9, 5, 5, 7, 4, 4, 4, 3, 3, 16},
    // VGG19 / CIFAR-10, quantized and pruned
    '{16, 4, 5, 9, 4, 3, 5, 2, 2, 2, 3, 5, 3, 3, 4, 3, 4, 3, 3, 3, 16, -1, -1, -1, -1, -1},
    // ResNet18 / CIFAR-100, quantized and pruned, iteration 3
    '{16, 5, 3, 5, 1, 8, 4, 6, 4, 8, 3, 9, 3, 9, 3, 6, 1, 16, -1, -1, -1, -1, -1, -1, -1, -1},
    // ResNet18 / TinyImagenet, quantized and pruned
    '{16, 10, 7, 22, 10, 24, 10, 22, 6, 22, 9, 18, 5, 16, 4, 11, 3, 16, -1, -1, -1, -1, -1, -1, -1, -1},
    // 16-bit baseline (VGG19 depth)
    '{16, 16, 16, 16, 16, 16, 16, 16, 16, 16, 16, 16, 16, 16, 16, 16, 16, -1, -1, -1, -1, -1, -1, -1, -1, -1}
  };

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

  pim_accelerator dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
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

  // Runs one layer; returns the cycles from start to done.
  task automatic run_layer(int net, int l, int k, output int cyc);
    int pb;
    logic [MAX_PREC-1:0] a [ROWS];
    longint e;
    pb = (k <= 2) ? 2 : (k <= 4) ? 4 : (k <= 8) ? 8 : 16;
    for (int r = 0; r < ROWS; r++) begin
      logic [NUM_COLS-1:0] d = NUM_COLS'($urandom);
      if (pb <= 4)
        for (int i = 0; i < 4; i++) d[4*i +: 4] &= 4'((1 << pb) - 1);
      @(negedge clk);
      w_we = 1; w_addr = AW'(r); w_data = d;
      wmodel[r] = d;
      @(negedge clk);
      w_we = 0;
      a[r] = MAX_PREC'($urandom) & MAX_PREC'((32'd1 << pb) - 1);
    end
    @(negedge clk);
    act_in = a; k_bits = KW'(k); start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!done && cyc < 100) begin
      @(negedge clk);
      cyc++;
    end
    if (k == 0 || k > 16) begin
      expect_eq($sformatf("net %0d layer %0d bypass", net, l), done_skip, 1);
      return;
    end
    for (int i = 0; i < 4 / (pb <= 4 ? 1 : pb / 4); i++) begin
      int lw = (pb <= 4) ? 4 : pb;
      e = 0;
      for (int r = 0; r < ROWS; r++)
        e += longint'(a[r]) * longint'((wmodel[r] >> (lw * i)) & ((32'd1 << lw) - 1));
      if (pb <= 4)       expect_eq($sformatf("net %0d layer %0d ACC4,%0d", net, l, i + 1), longint'(res4[i]), e);
      else if (pb == 8)  expect_eq($sformatf("net %0d layer %0d ACC8,%0d", net, l, i + 1), longint'(res8[i]), e);
      else               expect_eq($sformatf("net %0d layer %0d ACC16", net, l), longint'(res16), e);
    end
  endtask

  initial begin
    for (int r = 0; r < ROWS; r++) act_in[r] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < NNET; n++) begin
      automatic int total = 0, nlayers = 0, nrej = 0, c = 0;
      for (int l = 0; l < MAXL; l++) begin
        if (NETS[n][l] < 0) break;
        run_layer(n, l, NETS[n][l], c);
        total += c;
        nlayers++;
        if (NETS[n][l] > 16) nrej++;
      end
      $display("network %0d: %0d layers, %0d rejected (wider than 16 bits), %0d tile cycles",
               n, nlayers, nrej, total);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
