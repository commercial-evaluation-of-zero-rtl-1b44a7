// tb_ozmac -- end-to-end, self-checking test of the OzMAC at its default size
// (8-bit weights, 8-bit activations, 16-bit accumulator).
//
// A driver offers random MAC operations through the valid/ready port, with
// random idle gaps and random dot-product boundaries (in_clear). A scoreboard
// keeps the expected accumulator (sum of weight*activation products, modulo
// 2**ACC_W, computed with the '*' operator) and checks acc_out at every
// out_valid pulse. It also checks the cycle count of each operation: an
// operation whose weight has k ones must finish k cycles after it was taken
// (one cycle for a zero weight), and the total cycle count of all operations
// must equal the sum of max(1, k).
//
// Every mechanism of the unit is counted, and a mechanism that never happened
// counts as a failure: zero bits skipped, a weight with several ones (the
// multi-cycle shift-and-add), a zero weight, a dense weight (all ones), a new
// dot product started by in_clear, back-to-back operations, idle cycles
// between operations, operands held back while the unit is busy, and the
// accumulator wrapping around.
module tb_ozmac;
  import oz_pkg::*;

  localparam int unsigned WW = OZ_WGT_W;
  localparam int unsigned AW = OZ_ACT_W;
  localparam int unsigned CW = OZ_ACC_W;
  localparam int NOPS = 20000;

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

  // mechanism counters
  int n_skip_bits = 0, n_multi = 0, n_zero_w = 0, n_dense = 0, n_clear = 0;
  int n_b2b = 0, n_idle = 0, n_held = 0, n_wrap = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  // scoreboard
  longint unsigned model = 0;
  longint unsigned cycle = 0;
  longint unsigned exp_done_cycle = 0;
  longint unsigned total_cycles = 0, expect_cycles = 0;
  bit              pending = 0;
  int              ops_done = 0;
  longint unsigned last_take = 0;
  bit              any_take = 0;

  always @(posedge clk) begin
    if (rst_n) begin
      cycle <= cycle + 1;
      if (in_valid && !in_ready) n_held++;
      if (!in_valid && in_ready) n_idle++;
      if (out_valid) begin
        check(pending, "out_valid without an operation");
        check(cycle == exp_done_cycle,
              $sformatf("op %0d finished at %0d, expected %0d", ops_done, cycle, exp_done_cycle));
        check(acc_out == CW'(model),
              $sformatf("op %0d acc_out=%0d expected %0d", ops_done, acc_out, model));
        ops_done++;
        pending = 0;
      end
      if (in_valid && in_ready) begin
        int k;
        longint unsigned nxt;
        k = $countones(in_weight);
        check(!pending, "operation taken before the previous one finished");
        if (any_take && last_take + 1 == cycle) n_b2b++;
        exp_done_cycle = cycle + ((k == 0) ? 1 : k);
        expect_cycles += (k == 0) ? 1 : k;
        nxt = in_clear ? 0 : model;
        nxt = nxt + longint'(in_weight) * longint'(in_act);
        if (nxt >= (longint'(1) << CW)) n_wrap++;
        model = nxt % (longint'(1) << CW);
        pending = 1;
        n_skip_bits += WW - k;
        if (k > 1) n_multi++;
        if (k == 0) n_zero_w++;
        if (k == WW) n_dense++;
        if (in_clear) n_clear++;
        last_take = cycle;
        any_take = 1;
      end
      if (busy || (in_valid && in_ready)) total_cycles++;
    end
  end

  task automatic need(input int n, input string what);
    checks++;
    $display("  %-34s %0d", what, n);
    if (n == 0) begin
      failures++;
      $display("FAIL mechanism never exercised: %s", what);
    end
  endtask

  initial begin
    rst_n = 1'b0; in_valid = 0; in_weight = '0; in_act = '0; in_clear = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < NOPS; t++) begin
      // idle gap now and then
      if ($urandom % 5 == 0) begin
        in_valid = 0;
        repeat (1 + $urandom % 3) @(negedge clk);
      end
      in_valid = 1;
      case ($urandom % 8)
        0:       in_weight = '0;
        1:       in_weight = '1;
        default: in_weight = WW'($urandom);
      endcase
      in_act   = AW'($urandom);
      in_clear = (t == 0) || ($urandom % 6 == 0);
      // hold the operands until they are taken
      forever begin
        #1;
        if (in_ready) break;
        @(negedge clk);
      end
      @(negedge clk);
      // the port is not looked at until the next offer
      in_valid  = 0;
      in_weight = WW'($urandom);
      in_act    = AW'($urandom);
    end
    // drain
    repeat (WW + 2) @(negedge clk);
    check(ops_done == NOPS, $sformatf("operations finished %0d of %0d", ops_done, NOPS));
    check(total_cycles == expect_cycles,
          $sformatf("compute cycles %0d expected sum max(1,k) = %0d", total_cycles, expect_cycles));
    $display("mechanisms:");
    need(n_skip_bits, "zero bits skipped");
    need(n_multi,     "multi-cycle shift-and-add ops");
    need(n_zero_w,    "zero weights");
    need(n_dense,     "all-ones weights");
    need(n_clear,     "new dot products (in_clear)");
    need(n_b2b,       "back-to-back operations");
    need(n_idle,      "idle input cycles");
    need(n_held,      "operands held while busy");
    need(n_wrap,      "accumulator wrap-arounds");
    $display("average cycles per MAC: %0.3f", real'(expect_cycles) / NOPS);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NOPS * 12 + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
