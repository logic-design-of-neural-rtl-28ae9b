// requantizer -- scales a wide accumulator value back to an 8-bit activation.
//
// Computes  y = sat_OUT_W( round( x * MULT / 2**SHIFT ) ),  i.e. multiplies
// the ACC_W-bit accumulator by the layer's scale factor MULT / 2**SHIFT.
// The scale factor is a constant of the trained network, so the multiply is
// a const_mult with the factor embedded, followed by adding half an LSB of
// the result (round half up), an arithmetic right shift, and saturation to
// the signed OUT_W-bit range.
//
// Interface: x (IN_W-bit signed) in, y (OUT_W-bit signed) and sat (high when
// the result was clipped) out. Timing: purely combinational.
//
// Following the paper: a requantiser that multiplies by a scale factor and
// has that factor embedded in its logic. This design's own choices: the
// fixed-point form of the factor (an integer multiplier and a power-of-two
// shift), the rounding, and saturation to the output range.
module requantizer #(
  parameter int unsigned IN_W = 14,
  parameter int unsigned OUT_W = 8,
  parameter int unsigned MULT_W = 16,
  parameter logic signed [MULT_W-1:0] MULT = 16'sd2048,
  parameter int unsigned SHIFT = 16
) (
  input  logic signed [IN_W-1:0]  x,
  output logic signed [OUT_W-1:0] y,
  output logic                    sat
);

  localparam int unsigned P_W = IN_W + MULT_W;
  localparam logic signed [P_W:0] HALF = (P_W + 1)'(longint'(1) <<< (SHIFT - 1));
  localparam logic signed [P_W:0] Y_MAX = (P_W + 1)'(nn_pkg::smax(OUT_W));
  localparam logic signed [P_W:0] Y_MIN = (P_W + 1)'(nn_pkg::smin(OUT_W));

  logic signed [P_W-1:0] prod;
  logic signed [P_W:0]   scaled;

  const_mult #(
    .IN_W  (IN_W),
    .W_W   (MULT_W),
    .WEIGHT(MULT)
  ) u_scale (
    .x(x),
    .p(prod)
  );

  assign scaled = ((P_W + 1)'(prod) + HALF) >>> SHIFT;

  always_comb begin
    sat = 1'b0;
    if (scaled > Y_MAX) begin
      y   = Y_MAX[OUT_W-1:0];
      sat = 1'b1;
    end else if (scaled < Y_MIN) begin
      y   = Y_MIN[OUT_W-1:0];
      sat = 1'b1;
    end else begin
      y = scaled[OUT_W-1:0];
    end
  end

endmodule
