// tb_const_mult -- self-checking test of the constant-weight multiplier.
//
// Instantiates the multiplier for the paper's 2-bit examples (weights -2 and
// -1, 4-bit products) and for 8-bit weights covering the extremes, a pruned
// weight, a power of two and weights with many signed digits, and compares
// every product over the full input range with x * w computed in integers.
module tb_const_mult;

  int checks = 0;
  int failures = 0;

  // 2-bit multipliers of the worked example: w = -2 (10b) and w = -1 (11b).
  logic signed [1:0] x2;
  logic signed [3:0] p2_m2, p2_m1;
  const_mult #(.IN_W(2), .W_W(2), .WEIGHT(-2'sd2)) u_m2 (.x(x2), .p(p2_m2));
  const_mult #(.IN_W(2), .W_W(2), .WEIGHT(-2'sd1)) u_m1 (.x(x2), .p(p2_m1));

  // 8-bit multipliers.
  localparam int NW = 9;
  localparam logic signed [7:0] WS [NW] = '{-8'sd128, 8'sd127, 8'sd0, 8'sd107, -8'sd16,
                                            8'sd1, -8'sd1, 8'sd85, -8'sd43};
  logic signed [7:0]  x8;
  logic signed [15:0] p8 [NW];
  for (genvar k = 0; k < NW; k++) begin : g_m
    const_mult #(.IN_W(8), .W_W(8), .WEIGHT(WS[k])) u_m (.x(x8), .p(p8[k]));
  end

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = -2; v < 2; v++) begin
      x2 = 2'(v);
      #1;
      check($sformatf("2b w=-2 x=%0d", v), longint'(p2_m2), longint'(v * -2));
      check($sformatf("2b w=-1 x=%0d", v), longint'(p2_m1), longint'(v * -1));
    end
    for (int v = -128; v < 128; v++) begin
      x8 = 8'(v);
      #1;
      for (int k = 0; k < NW; k++)
        check($sformatf("8b w=%0d x=%0d", WS[k], v), longint'(p8[k]), longint'(v) * longint'(WS[k]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
