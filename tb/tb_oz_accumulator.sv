// tb_oz_accumulator -- self-checking test of the adder and accumulator register.
//
// Drives random en/clear/addend sequences and compares the register and the
// adder output with a reference sum kept in the testbench (modulo 2**ACC_W),
// including the worked 4x4 example (00111100 then 00001111 -> 01001011 in an
// 8-bit register) and sequences long enough to wrap the register.
module tb_oz_accumulator;
  localparam int unsigned IW = 16;
  localparam int unsigned AW = 16;

  logic          clk = 1'b0;
  logic          rst_n;
  logic          en, clear;
  logic [IW-1:0] addend;
  logic [AW-1:0] sum, acc;

  logic          en4, clear4;
  logic [7:0]    addend4, sum4, acc4;

  int checks = 0;
  int failures = 0;
  longint unsigned model;
  int wraps = 0;

  oz_accumulator #(.IN_W(IW), .ACC_W(AW)) dut (.*);
  oz_accumulator #(.IN_W(8), .ACC_W(8)) dut4 (
    .clk(clk), .rst_n(rst_n), .en(en4), .clear(clear4),
    .addend(addend4), .sum(sum4), .acc(acc4));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  initial begin
    longint unsigned nxt;
    rst_n = 1'b0; en = 0; clear = 0; addend = '0; en4 = 0; clear4 = 0; addend4 = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    check(acc == '0 && acc4 == '0, "reset value");
    // worked example
    en4 = 1; clear4 = 1; addend4 = 8'b0011_1100;
    #1; check(sum4 == 8'b0011_1100, "example sum c1");
    @(negedge clk); check(acc4 == 8'b0011_1100, $sformatf("example reg c1 %b", acc4));
    clear4 = 0; addend4 = 8'b0000_1111;
    #1; check(sum4 == 8'b0100_1011, "example sum c2");
    @(negedge clk); check(acc4 == 8'b0100_1011, $sformatf("example reg c2 %b", acc4));
    en4 = 0;
    // random
    model = 0;
    for (int t = 0; t < 20000; t++) begin
      en     = ($urandom % 4) != 0;
      clear  = ($urandom % 16) == 0;
      addend = IW'($urandom);
      nxt = clear ? 0 : model;
      if (en) nxt = nxt + addend;
      if (nxt >= (longint'(1) << AW)) wraps++;
      nxt = nxt % (longint'(1) << AW);
      #1;
      check(sum == AW'((clear ? 0 : model) + addend), "sum output");
      @(negedge clk);
      model = nxt;
      check(acc == AW'(model), $sformatf("t=%0d acc=%0d exp %0d", t, acc, model));
    end
    check(wraps > 0, "register wrapped at least once");
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
