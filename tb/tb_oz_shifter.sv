// tb_oz_shifter -- self-checking test of the one-hot shifter.
//
// For every one-hot code (and the all-zero code) and every 8-bit activation,
// compares the shifter output with act * 2**i computed by multiplication, and
// with zero for the all-zero code. Includes the worked 4x4 example values
// (activation 1111 with codes 0100 and 0001 give 00111100 and 00001111).
module tb_oz_shifter;
  localparam int unsigned WW = 8;
  localparam int unsigned AW = 8;

  logic [WW-1:0]    oh;
  logic [AW-1:0]    act;
  logic [WW+AW-1:0] shifted;

  logic [3:0] oh4;
  logic [3:0] act4;
  logic [7:0] shifted4;

  int checks = 0;
  int failures = 0;
  logic clk = 1'b0;

  oz_shifter #(.WGT_W(WW), .ACT_W(AW)) dut (.oh(oh), .act(act), .shifted(shifted));
  oz_shifter #(.WGT_W(4), .ACT_W(4)) dut4 (.oh(oh4), .act(act4), .shifted(shifted4));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  initial begin
    longint unsigned expv;
    act4 = 4'b1111;
    oh4 = 4'b0100; #1; check(shifted4 == 8'b0011_1100, $sformatf("example c1 %b", shifted4));
    oh4 = 4'b0001; #1; check(shifted4 == 8'b0000_1111, $sformatf("example c2 %b", shifted4));
    for (int i = -1; i < int'(WW); i++) begin
      for (int a = 0; a < (1 << AW); a++) begin
        oh  = (i < 0) ? '0 : WW'(1) << i;
        act = AW'(a);
        #1;
        expv = (i < 0) ? 0 : longint'(a) * (longint'(1) << i);
        check(shifted == (WW+AW)'(expv),
              $sformatf("oh=%b act=%0d: %0d exp %0d", oh, a, shifted, expv));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
