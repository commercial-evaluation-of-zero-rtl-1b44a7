// tb_ozmac_precisions -- runs the OzMAC at the five weight x activation sizes
// evaluated for it: 4x4, 4x8, 8x8, 8x16 and 16x16 bits. Each size gets random
// back-to-back MAC operations with uniformly random operands (so about half
// of the weight bits are ones), checked for result and cycle count by
// ozmac_prec_run; the 4x4 run also replays the worked example 0101 x 1111.
// The average cycles per MAC is printed per size: with uniform weights it is
// close to WGT_W/2, since only the weight is serialised, whatever the
// activation width.
module tb_ozmac_precisions;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  localparam int N = 5;
  localparam int NOPS = 2000;
  int              c   [N];
  int              f   [N];
  longint unsigned cyc [N];
  longint unsigned one [N];
  logic            d   [N];

  ozmac_prec_run #(.WGT_W(4),  .ACT_W(4),  .NOPS(NOPS)) r0 (.clk, .checks(c[0]), .failures(f[0]), .cycles(cyc[0]), .ones(one[0]), .done(d[0]));
  ozmac_prec_run #(.WGT_W(4),  .ACT_W(8),  .NOPS(NOPS)) r1 (.clk, .checks(c[1]), .failures(f[1]), .cycles(cyc[1]), .ones(one[1]), .done(d[1]));
  ozmac_prec_run #(.WGT_W(8),  .ACT_W(8),  .NOPS(NOPS)) r2 (.clk, .checks(c[2]), .failures(f[2]), .cycles(cyc[2]), .ones(one[2]), .done(d[2]));
  ozmac_prec_run #(.WGT_W(8),  .ACT_W(16), .NOPS(NOPS)) r3 (.clk, .checks(c[3]), .failures(f[3]), .cycles(cyc[3]), .ones(one[3]), .done(d[3]));
  ozmac_prec_run #(.WGT_W(16), .ACT_W(16), .NOPS(NOPS)) r4 (.clk, .checks(c[4]), .failures(f[4]), .cycles(cyc[4]), .ones(one[4]), .done(d[4]));

  localparam string NAMES [N] = '{"4x4", "4x8", "8x8", "8x16", "16x16"};

  initial begin
    int checks, failures;
    // done is set low by each harness at time 0; look only after that
    repeat (2) @(posedge clk);
    wait (d[0] && d[1] && d[2] && d[3] && d[4]);
    checks = 0; failures = 0;
    for (int i = 0; i < N; i++) begin
      checks += c[i];
      failures += f[i];
      $display("%-6s ops=%0d cycles=%0d avg cycles/MAC=%0.3f avg ones=%0.3f",
               NAMES[i], NOPS, cyc[i], real'(cyc[i]) / NOPS, real'(one[i]) / NOPS);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int failures;
    repeat (NOPS * 18 + 1000) @(posedge clk);
    failures = f[0] + f[1] + f[2] + f[3] + f[4] + 1;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c[0] + c[1] + c[2] + c[3] + c[4], failures);
    $finish;
  end
endmodule
