// oz_pkg -- shared constants of the OzMAC zero-skipping multiply-accumulate unit.
//
// The defaults describe the main configuration: 8-bit weights times 8-bit
// activations (INT8 inference). The weight is the operand that is serialised
// by the Oz-encoder, one cycle per '1' bit; the activation is applied in
// parallel to the shifter. The accumulator register is as wide as the full
// product, WGT_W+ACT_W bits, which is what the 4x4 worked example of the
// design uses (an 8-bit register); longer dot products wrap modulo 2**ACC_W
// unless ACC_W is raised.
package oz_pkg;

  parameter int unsigned OZ_WGT_W = 8;                   // weight bits (Oz-encoded)
  parameter int unsigned OZ_ACT_W = 8;                   // activation bits (shifted)
  parameter int unsigned OZ_ACC_W = OZ_WGT_W + OZ_ACT_W; // accumulator bits

  // Oz-encoder state: IDLE waits for / takes a new weight, BUSY is working
  // through the remaining '1' bits of the weight taken earlier.
  typedef enum logic {
    OZ_IDLE = 1'b0,
    OZ_BUSY = 1'b1
  } oz_state_e;

endpackage
