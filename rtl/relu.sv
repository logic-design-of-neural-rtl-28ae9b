// relu -- rectified linear activation.
//
// y = x when x is zero or positive, y = 0 when x is negative: the output is
// the input with every bit cleared when the sign bit is set. With ENABLE = 0
// the unit passes its input unchanged; the network's output layer uses that,
// since its results are regression values or class scores, not activations.
//
// Interface: x, y (W-bit signed). Timing: purely combinational.
//
// ReLU itself follows the paper; bypassing it on the output layer is this
// design's own choice.
module relu #(
  parameter int unsigned W = 8,
  parameter bit ENABLE = 1'b1
) (
  input  logic signed [W-1:0] x,
  output logic signed [W-1:0] y
);

  always_comb begin
    if (ENABLE && x[W-1]) y = '0;
    else                  y = x;
  end

endmodule
