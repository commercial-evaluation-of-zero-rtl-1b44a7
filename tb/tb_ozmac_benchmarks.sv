// tb_ozmac_benchmarks -- runs the default 8x8 OzMAC on synthetic weight
// streams whose bit sparsity matches eight pretrained INT8 vision networks
// (MobileNetV2/V3, InceptionV3, ShuffleNetV2, GoogleNet, ResNet18/50,
// ResNeXt101). For each network, 1000 weights are drawn with every bit set
// independently with probability (1 - sparsity), so the expected number of
// ones per weight equals the network's published average; activations are
// uniform 8-bit values. The 1000 products are accumulated back to back as one
// dot product.
//
// Checked per network: the final accumulator equals the sum of the products
// (mod 2**16); the number of cycles from the first accepted weight to the
// last result equals the sum over weights of max(1, ones); the measured
// average ones per weight is within 0.15 of the published figure. Printed:
// the average cycles per MAC and the resulting latency at 500 MHz.
module tb_ozmac_benchmarks;
  import oz_pkg::*;

  localparam int unsigned WW = OZ_WGT_W;
  localparam int unsigned AW = OZ_ACT_W;
  localparam int unsigned CW = OZ_ACC_W;
  localparam int NW = 1000;
  localparam int NB = 8;

  localparam string NAMES [NB] = '{"MobileNetV2", "MobileNetV3", "InceptionV3",
    "ShuffleNetV2", "GoogleNet", "ResNet18", "ResNet50", "ResNeXt101"};
  // published average number of '1' bits per 8-bit weight, times 1000
  localparam int ONES_X1000 [NB] = '{2334, 1711, 2430, 2583, 2461, 2398, 2495, 2289};

  logic          clk = 1'b0;
  logic          rst_n;
  logic          in_valid, in_ready, in_clear, out_valid, busy;
  logic [WW-1:0] in_weight;
  logic [AW-1:0] in_act;
  logic [CW-1:0] acc_out;

  ozmac dut (.*);

  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  // Cycle counter and out_valid counter sampled at the clock edge.
  longint unsigned cycle = 0;
  int              results = 0;
  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (out_valid) results <= results + 1;
  end

  initial begin
    logic [WW-1:0]   w   [NW];
    logic [AW-1:0]   a   [NW];
    longint unsigned model, exp_cycles, ones, start, stop;
    int              k, thr, base;
    rst_n = 1'b0; in_valid = 0; in_weight = '0; in_act = '0; in_clear = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int b = 0; b < NB; b++) begin
      // per-bit probability of a one, in units of 1/80000 (= ones/8)
      thr = ONES_X1000[b] * 10;
      model = 0; exp_cycles = 0; ones = 0;
      for (int i = 0; i < NW; i++) begin
        for (int j = 0; j < int'(WW); j++) w[i][j] = ($urandom % 80000) < thr;
        a[i] = AW'($urandom);
        k = $countones(w[i]);
        ones += longint'(k);
        exp_cycles += longint'((k == 0) ? 1 : k);
        model = (model + longint'(w[i]) * longint'(a[i])) % (longint'(1) << CW);
      end
      @(negedge clk);
      base = results;
      start = cycle;
      for (int i = 0; i < NW; i++) begin
        in_valid = 1; in_weight = w[i]; in_act = a[i]; in_clear = (i == 0);
        forever begin
          #1;
          if (in_ready) break;
          @(negedge clk);
        end
        @(negedge clk);
      end
      in_valid = 0;
      while (results - base < NW && cycle < start + 10 * NW) @(negedge clk);
      stop = cycle;
      // the unit was busy from the first accept until the cycle before the
      // last out_valid was sampled
      check(results - base == NW, $sformatf("%s: %0d results", NAMES[b], results - base));
      check(acc_out == CW'(model), $sformatf("%s: acc %0d expected %0d", NAMES[b], acc_out, model));
      check(stop - start - 1 == exp_cycles,
            $sformatf("%s: %0d cycles, expected %0d", NAMES[b], stop - start - 1, exp_cycles));
      check(ones * 1000 + 150 * NW >= longint'(ONES_X1000[b]) * NW &&
            ones * 1000 <= longint'(ONES_X1000[b]) * NW + 150 * NW,
            $sformatf("%s: average ones %0.3f far from %0.3f", NAMES[b],
                      real'(ones) / NW, ONES_X1000[b] / 1000.0));
      $display("%-13s sparsity %5.2f%%  ones/weight %0.3f (published %0.3f)  cycles/MAC %0.3f  latency at 500 MHz %0.2f ns",
               NAMES[b], 100.0 * (1.0 - real'(ones) / (NW * WW)), real'(ones) / NW,
               ONES_X1000[b] / 1000.0, real'(exp_cycles) / NW, 2.0 * real'(exp_cycles) / NW);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NB * NW * 10 + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
