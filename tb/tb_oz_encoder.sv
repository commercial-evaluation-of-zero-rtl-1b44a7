// tb_oz_encoder -- self-checking test of the Oz-encoder.
//
// Feeds weights through the valid/ready port (the two 4-bit worked-example
// weights first, then every 8-bit value, then random ones with random gaps in
// w_valid) and compares, cycle by cycle, the issued one-hot codes with a
// reference list built from the weight's bits, most significant '1' first.
// Also checks that a weight with k ones keeps the encoder for exactly k cycles
// (1 for a zero weight), that oh_first marks the first code, and that op_done
// marks the last.
module tb_oz_encoder;
  localparam int unsigned W = 8;

  logic         clk = 1'b0;
  logic         rst_n;
  logic         w_valid;
  logic         w_ready;
  logic [W-1:0] w_data;
  logic [W-1:0] oh;
  logic         oh_valid, oh_first, op_done;

  int checks = 0;
  int failures = 0;

  oz_encoder #(.WGT_W(W)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  // Send one weight and follow it until op_done; gap = idle cycles before it.
  task automatic send(input logic [W-1:0] w, input int gap);
    int k, n, pos;
    logic [W-1:0] exp_oh;
    w_valid = 1'b0;
    repeat (gap) begin
      @(negedge clk);
      check(!oh_valid && !op_done && w_ready, "idle outputs");
    end
    w_valid = 1'b1;
    w_data  = w;
    k = $countones(w);
    n = 0;
    pos = W - 1;
    forever begin
      #1;
      if (n == 0) check(w_ready, "ready at start");
      else        check(!w_ready, "not ready while busy");
      if (k == 0) begin
        check(oh == '0 && !oh_valid && !oh_first && op_done,
              $sformatf("zero weight outputs oh=%b", oh));
      end else begin
        while (!w[pos]) pos--;
        exp_oh = '0;
        exp_oh[pos] = 1'b1;
        pos--;
        check(oh == exp_oh && oh_valid,
              $sformatf("w=%b code %0d: oh=%b exp=%b", w, n, oh, exp_oh));
        check(oh_first == (n == 0), "oh_first");
        check(op_done == (n == k - 1), $sformatf("op_done w=%b n=%0d", w, n));
      end
      n++;
      if (op_done) break;
      @(negedge clk);
      w_valid = 1'b0;          // weight is held inside from now on
      w_data  = $urandom;      // and the port is ignored
      if (n > W + 1) break;
    end
    check(n == ((k == 0) ? 1 : k), $sformatf("cycles for w=%b: %0d", w, n));
    @(negedge clk);
    w_valid = 1'b0;
  endtask

  initial begin
    rst_n = 1'b0; w_valid = 1'b0; w_data = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    send(8'b0000_0101, 0);
    send(8'b0000_1111, 0);
    for (int v = 0; v < 256; v++) send(W'(v), 0);
    for (int t = 0; t < 2000; t++) send(W'($urandom), ($urandom % 4 == 0) ? 1 + $urandom % 3 : 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
