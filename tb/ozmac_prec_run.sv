// ozmac_prec_run -- test harness for one OzMAC size, used by
// tb_ozmac_precisions. It instantiates an OzMAC with WGT_W-bit weights and
// ACT_W-bit activations, runs NOPS random MAC operations back to back as
// dot products of random length, and checks every result against products
// computed with '*' (modulo 2**(WGT_W+ACT_W)) and every operation's cycle
// count against max(1, number of ones in the weight). For the 4x4 size it
// first replays the worked example 0101 x 1111: the register must read
// 00111100 after the first cycle and 01001011 after the second.
// It reports its check and failure counts, the total number of compute
// cycles, and raises done when finished.
module ozmac_prec_run #(
  parameter int unsigned WGT_W = 8,
  parameter int unsigned ACT_W = 8,
  parameter int          NOPS  = 2000
) (
  input  logic clk,
  output int   checks,
  output int   failures,
  output longint unsigned cycles,
  output longint unsigned ones,
  output logic done
);
  localparam int unsigned CW = WGT_W + ACT_W;

  logic             rst_n;
  logic             in_valid, in_ready, in_clear, out_valid, busy;
  logic [WGT_W-1:0] in_weight;
  logic [ACT_W-1:0] in_act;
  logic [CW-1:0]    acc_out;

  ozmac #(.WGT_W(WGT_W), .ACT_W(ACT_W)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %0dx%0d: %s", WGT_W, ACT_W, what);
    end
  endtask

  initial begin
    longint unsigned model, prod;
    int k, n;
    checks = 0; failures = 0; cycles = 0; ones = 0; done = 1'b0;
    rst_n = 1'b0; in_valid = 0; in_weight = '0; in_act = '0; in_clear = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    if (WGT_W == 4 && ACT_W == 4) begin
      in_valid = 1; in_weight = WGT_W'(4'b0101); in_act = ACT_W'(4'b1111); in_clear = 1;
      @(negedge clk);
      in_valid = 0;
      check(acc_out == CW'(8'b0011_1100), $sformatf("worked example cycle 1: %b", acc_out));
      @(negedge clk);
      check(acc_out == CW'(8'b0100_1011), $sformatf("worked example cycle 2: %b", acc_out));
      check(out_valid, "worked example out_valid");
      @(negedge clk);
    end
    model = 0;
    for (int t = 0; t < NOPS; t++) begin
      in_valid  = 1;
      in_weight = WGT_W'({$urandom, $urandom});
      in_act    = ACT_W'({$urandom, $urandom});
      in_clear  = (t == 0) || ($urandom % 8 == 0);
      #1;
      check(in_ready, "ready after previous operation");
      k = $countones(in_weight);
      ones += longint'(k);
      prod = longint'(in_weight) * longint'(in_act);
      model = ((in_clear ? 0 : model) + prod) % (longint'(1) << CW);
      n = 0;
      do begin
        @(negedge clk);
        in_valid = 0;
        n++;
      end while (!out_valid && n < WGT_W + 2);
      // out_valid is seen n cycles after the operation was taken, and the
      // operation occupied the unit for those n cycles.
      check(n == ((k == 0) ? 1 : k), $sformatf("cycles %0d for %0d ones", n, k));
      check(acc_out == CW'(model), $sformatf("acc %h expected %h", acc_out, CW'(model)));
      check(!busy, "idle when out_valid");
      cycles += longint'(n);
      // the next operation is offered in this same cycle (back to back)
    end
    done = 1'b1;
  end
endmodule
