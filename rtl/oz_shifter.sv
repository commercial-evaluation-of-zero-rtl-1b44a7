// oz_shifter -- shifter of the OzMAC: shifts the activation left by the bit
// position named by a one-hot code from the Oz-encoder.
//
// Because the shift amount arrives one-hot rather than as a binary number, the
// shifter needs no decoder and no log-depth barrel stages: each output is the
// OR, over all weight positions i, of "code bit i selects activation bit
// (j - i)". In effect it is a single level of WGT_W-way AND-OR selection.
// With an all-zero code the output is zero.
//
// Interface: purely combinational. oh is WGT_W bits (at most one set), act is
// ACT_W bits, shifted is WGT_W+ACT_W bits so that act << (WGT_W-1) fits.
//
// One-hot shift control follows the design description; the AND-OR form is
// this implementation's choice of the "simplest" one-hot shifter.
module oz_shifter
  import oz_pkg::*;
#(
  parameter int unsigned WGT_W = OZ_WGT_W,
  parameter int unsigned ACT_W = OZ_ACT_W
) (
  input  logic [WGT_W-1:0]       oh,
  input  logic [ACT_W-1:0]       act,
  output logic [WGT_W+ACT_W-1:0] shifted
);

  localparam int unsigned OUT_W = WGT_W + ACT_W;

  always_comb begin
    shifted = '0;
    for (int i = 0; i < int'(WGT_W); i++) begin
      shifted |= {OUT_W{oh[i]}} & (OUT_W'(act) << i);
    end
  end

endmodule
