// ozmac -- OzMAC ("omit-zero" MAC): a multiply-accumulate unit that computes
// weight x activation as a series of shift-and-add steps, one per '1' bit of
// the weight, so the zero bits of the weight cost no cycles.
//
// How it works: the Oz-encoder (oz_encoder) turns the weight into one-hot
// codes of its '1' bits, most significant first, one per cycle. The shifter
// (oz_shifter) shifts the activation left by the position of the hot bit, and
// the accumulator (oz_accumulator) adds the shifted activation to its register.
// A MAC with a weight of k ones therefore takes k cycles (a zero weight is
// accepted and retired in one cycle with nothing added). Example for 4x4:
// weight 0101, activation 1111 -> cycle 1 adds 00111100, cycle 2 adds 00001111,
// register 01001011 = 5*15.
//
// The first code of a weight is issued in the cycle the weight is accepted,
// using the incoming activation directly; the activation is also captured in a
// holding register (act_q) that feeds the shifter for the remaining cycles.
//
// Interface (valid/ready, one MAC operation per accepted beat):
//   in_valid/in_ready  operand handshake; in_ready is high while no weight is
//                      being worked through
//   in_weight, in_act  unsigned operands, WGT_W and ACT_W bits
//   in_clear           this operation starts a new dot product: the
//                      accumulator restarts from zero instead of adding on
//   acc_out            accumulator register (unsigned, wraps mod 2**ACC_W)
//   out_valid          one-cycle pulse: the operation accepted earlier has
//                      finished and acc_out holds the sum including it
//   busy               the encoder still has '1' bits of a weight to issue
// Timing: an operation accepted in cycle t with k > 0 ones finishes its last
// add in cycle t+k-1; out_valid is high and acc_out updated in cycle t+k.
// A new operation may be accepted in cycle t+k, so the unit sustains one MAC
// per max(1,k) cycles.
//
// The three blocks, their order and the one-hot link between encoder and
// shifter follow the design description. The handshake, the clear input, the
// activation holding register, unsigned arithmetic and the WGT_W+ACT_W-bit
// accumulator default (the width of the worked 4x4 example) are choices of
// this implementation.
module ozmac
  import oz_pkg::*;
#(
  parameter int unsigned WGT_W = OZ_WGT_W,
  parameter int unsigned ACT_W = OZ_ACT_W,
  parameter int unsigned ACC_W = WGT_W + ACT_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WGT_W-1:0] in_weight,
  input  logic [ACT_W-1:0] in_act,
  input  logic             in_clear,
  output logic [ACC_W-1:0] acc_out,
  output logic             out_valid,
  output logic             busy
);

  logic [WGT_W-1:0]       oh;
  logic                   oh_valid, oh_first, op_done;
  logic                   take;
  logic [ACT_W-1:0]       act_q, act_cur;
  logic [WGT_W+ACT_W-1:0] shifted;
  logic                   done_q;

  oz_encoder #(.WGT_W(WGT_W)) u_enc (
    .clk     (clk),
    .rst_n   (rst_n),
    .w_valid (in_valid),
    .w_ready (in_ready),
    .w_data  (in_weight),
    .oh      (oh),
    .oh_valid(oh_valid),
    .oh_first(oh_first),
    .op_done (op_done)
  );

  assign take    = in_valid && in_ready;
  assign busy    = !in_ready;
  // Activation used this cycle: the incoming one in the accept cycle, the
  // held one while the encoder works through the remaining '1' bits.
  assign act_cur = take ? in_act : act_q;

  always_ff @(posedge clk) begin
    if (!rst_n)    act_q <= '0;
    else if (take) act_q <= in_act;
  end

  oz_shifter #(.WGT_W(WGT_W), .ACT_W(ACT_W)) u_shf (
    .oh     (oh),
    .act    (act_cur),
    .shifted(shifted)
  );

  oz_accumulator #(.IN_W(WGT_W + ACT_W), .ACC_W(ACC_W)) u_acc (
    .clk   (clk),
    .rst_n (rst_n),
    .en    (oh_valid),
    .clear (take && in_clear),
    .addend(shifted),
    .sum   (),
    .acc   (acc_out)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) done_q <= 1'b0;
    else        done_q <= op_done;
  end
  assign out_valid = done_q;

  // The first code of a weight is issued only in its accept cycle.
  a_first_on_take: assert property (@(posedge clk) disable iff (!rst_n)
                                    oh_first |-> take);
  // While busy the operands at the input are not taken.
  a_no_take_busy: assert property (@(posedge clk) disable iff (!rst_n)
                                   busy |-> !take);

endmodule
