// oz_accumulator -- adder and accumulator register ("+" and "Reg") of the OzMAC.
//
// Each cycle that en is high the shifted activation (addend) is added to the
// register. clear starts a new sum: the old register value is dropped, and the
// register takes the addend (en high) or zero (en low). The sum is unsigned
// and wraps modulo 2**ACC_W.
//
// Interface: addend is IN_W bits, zero-extended to ACC_W. sum is the
// combinational adder output (register + addend, or addend alone under clear);
// acc is the register, updated at the rising clock edge, so a term added in
// cycle t is visible on acc from cycle t+1. Reset is synchronous, active low,
// and zeroes the register.
//
// The adder feeding a register that feeds back into the adder follows the
// design description; the clear input, the width and the reset are this
// implementation's choices.
module oz_accumulator
  import oz_pkg::*;
#(
  parameter int unsigned IN_W  = OZ_WGT_W + OZ_ACT_W,
  parameter int unsigned ACC_W = OZ_ACC_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             en,
  input  logic             clear,
  input  logic [IN_W-1:0]  addend,
  output logic [ACC_W-1:0] sum,
  output logic [ACC_W-1:0] acc
);

  logic [ACC_W-1:0] base;

  assign base = clear ? '0 : acc;
  assign sum  = base + ACC_W'(addend);

  always_ff @(posedge clk) begin
    if (!rst_n)     acc <= '0;
    else if (en)    acc <= sum;
    else if (clear) acc <= '0;
  end

endmodule
