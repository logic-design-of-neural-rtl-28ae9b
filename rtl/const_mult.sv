// const_mult -- signed multiplier with its weight embedded as a constant.
//
// Computes p = x * WEIGHT, where WEIGHT is a parameter fixed after training
// rather than a second input. Because the weight is known when the circuit is
// built, the multiplier needs no partial-product array: WEIGHT is recoded into
// canonical signed digits at elaboration, and the product is the sum of
// x shifted by the position of each non-zero digit, added for a +1 digit and
// subtracted for a -1 digit. A zero weight (a pruned connection) leaves no
// logic, a power-of-two weight leaves only wiring and a sign change. Logic
// synthesis may simplify it further together with the adder that follows.
//
// Interface: x (IN_W-bit signed) in, p (IN_W+W_W-bit signed, exact) out.
// Timing: purely combinational.
//
// Embedding the weight so that the multiplier shrinks to the logic that
// particular value needs follows the paper (its 2-bit example: a weight of -2
// reduces the multiplier to a negation and a shift). The signed-digit
// shift-and-add structure is this design's own way of writing that out.
module const_mult #(
  parameter int unsigned IN_W = 8,
  parameter int unsigned W_W = 8,
  parameter logic signed [W_W-1:0] WEIGHT = -2
) (
  input  logic signed [IN_W-1:0]     x,
  output logic signed [IN_W+W_W-1:0] p
);

  localparam int unsigned P_W = IN_W + W_W;
  localparam logic [63:0] POS = nn_pkg::csd_pos(longint'(WEIGHT), W_W);
  localparam logic [63:0] NEG = nn_pkg::csd_neg(longint'(WEIGHT), W_W);

  logic signed [P_W:0] xe;    // one extra bit: CSD may use digit position W_W
  logic signed [P_W:0] acc;

  assign xe = (P_W + 1)'(x);

  always_comb begin
    acc = '0;
    for (int k = 0; k <= int'(W_W); k++) begin
      if (POS[k]) acc = acc + (xe <<< k);
      if (NEG[k]) acc = acc - (xe <<< k);
    end
  end

  // The exact product of an IN_W-bit and a W_W-bit signed value fits P_W bits.
  assign p = acc[P_W-1:0];

endmodule
