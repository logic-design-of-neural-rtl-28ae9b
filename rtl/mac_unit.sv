// mac_unit -- the simplified multiply-accumulate unit of one neuron.
//
// Forms  acc = sum_i x[i] * WEIGHTS[i] + BIAS  with every weight and the bias
// embedded as constants: one const_mult per input, followed by an adder over
// all products. The sum is computed at full precision and then limited to
// ACC_W bits, the accumulator width chosen by profiling the sums seen on the
// training data. A sum outside the ACC_W-bit range (an outlier the profiling
// discarded) is saturated to the nearest representable value and flagged on
// `sat`.
//
// Interface: x holds N_IN signed IN_W-bit inputs, input i in
// x[i*IN_W +: IN_W]; WEIGHTS holds the N_IN signed W_W-bit weights packed the
// same way. acc is the ACC_W-bit signed result, sat is high when it was
// clipped. Timing: purely combinational.
//
// Following the paper: multipliers with embedded weights feeding one adder,
// simplified as a whole by synthesis, and an accumulator narrower than full
// precision whose width comes from profiling. This design's own choices:
// the bias term, saturation (rather than wrap-around) of out-of-range sums,
// and the `sat` flag.
module mac_unit #(
  parameter int unsigned N_IN = 2,
  parameter int unsigned IN_W = 2,
  parameter int unsigned W_W = 2,
  parameter int unsigned ACC_W = 5,
  parameter logic [N_IN*W_W-1:0] WEIGHTS = {2'b10, 2'b11},
  parameter int BIAS = 0
) (
  input  logic [N_IN*IN_W-1:0]  x,
  output logic signed [ACC_W-1:0] acc,
  output logic                   sat
);

  localparam int unsigned P_W = IN_W + W_W;
  // Full-precision width: products, growth over N_IN terms, the bias and
  // a sign bit of headroom, and never narrower than the output.
  localparam int unsigned SUM_A = P_W + $clog2(N_IN + 1) + 1;
  localparam int unsigned SUM_B = ACC_W + 1;
  localparam int unsigned SUM_C = 33;
  localparam int unsigned SUM_W = (SUM_A > SUM_B) ?
                                  ((SUM_A > SUM_C) ? SUM_A : SUM_C) :
                                  ((SUM_B > SUM_C) ? SUM_B : SUM_C);

  localparam logic signed [SUM_W-1:0] ACC_MAX = SUM_W'(nn_pkg::smax(ACC_W));
  localparam logic signed [SUM_W-1:0] ACC_MIN = SUM_W'(nn_pkg::smin(ACC_W));

  logic signed [P_W-1:0] prod [N_IN];
  logic signed [SUM_W-1:0] sum;

  for (genvar i = 0; i < N_IN; i++) begin : g_mul
    const_mult #(
      .IN_W  (IN_W),
      .W_W   (W_W),
      .WEIGHT(WEIGHTS[i*W_W +: W_W])
    ) u_mul (
      .x(x[i*IN_W +: IN_W]),
      .p(prod[i])
    );
  end

  always_comb begin
    sum = SUM_W'(BIAS);
    for (int i = 0; i < int'(N_IN); i++) begin
      sum = sum + SUM_W'(prod[i]);
    end
  end

  always_comb begin
    sat = 1'b0;
    if (sum > ACC_MAX) begin
      acc = ACC_MAX[ACC_W-1:0];
      sat = 1'b1;
    end else if (sum < ACC_MIN) begin
      acc = ACC_MIN[ACC_W-1:0];
      sat = 1'b1;
    end else begin
      acc = sum[ACC_W-1:0];
    end
  end

endmodule
