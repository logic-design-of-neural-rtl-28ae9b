// tb_mac_unit -- self-checking test of the weight-embedded MAC unit.
//
// Instance a is the two-input example with 2-bit inputs, weights -1 and -2
// and a 5-bit sum S[4:0]; it is checked over all 16 input combinations.
// Instance b has six 8-bit inputs, fixed 8-bit weights including a pruned
// one, a bias and a 12-bit accumulator, so that large sums saturate; it is
// checked on random vectors and on the all-extreme vectors, and the test
// requires that saturation happened and that the sat flag agrees.
module tb_mac_unit;

  int checks = 0;
  int failures = 0;
  int sat_seen = 0;

  // Instance a: S = I1 * (-1) + I2 * (-2).
  logic [3:0]        xa;
  logic signed [4:0] acc_a;
  logic              sat_a;
  mac_unit #(.N_IN(2), .IN_W(2), .W_W(2), .ACC_W(5), .WEIGHTS({2'b10, 2'b11}), .BIAS(0))
    u_a (.x(xa), .acc(acc_a), .sat(sat_a));

  // Instance b.
  localparam int NB = 6;
  localparam int WB [NB] = '{107, -16, 0, -128, 127, 5};
  localparam int BIAS_B = -300;
  localparam logic [NB*8-1:0] WB_PACKED = {8'(WB[5]), 8'(WB[4]), 8'(WB[3]),
                                           8'(WB[2]), 8'(WB[1]), 8'(WB[0])};
  logic [NB*8-1:0]    xb;
  logic signed [11:0] acc_b;
  logic               sat_b;
  mac_unit #(.N_IN(NB), .IN_W(8), .W_W(8), .ACC_W(12), .WEIGHTS(WB_PACKED), .BIAS(BIAS_B))
    u_b (.x(xb), .acc(acc_b), .sat(sat_b));

  task automatic check_b(int xs [NB]);
    longint s = BIAS_B;
    bit es;
    for (int i = 0; i < NB; i++) begin
      xb[i*8 +: 8] = 8'(xs[i]);
      s += longint'(xs[i]) * WB[i];
    end
    es = 0;
    if (s > 2047) begin s = 2047; es = 1; end
    if (s < -2048) begin s = -2048; es = 1; end
    #1;
    checks++;
    if (longint'(acc_b) != s || sat_b != es) begin
      failures++;
      if (failures < 10) $display("FAIL b acc=%0d/%0d sat=%0b/%0b", acc_b, s, sat_b, es);
    end
    if (es) sat_seen++;
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int xs [NB];
    for (int i1 = -2; i1 < 2; i1++) begin
      for (int i2 = -2; i2 < 2; i2++) begin
        xa = {2'(i2), 2'(i1)};
        #1;
        checks++;
        if (int'(acc_a) != -i1 - 2 * i2 || sat_a) begin
          failures++;
          $display("FAIL a I1=%0d I2=%0d S=%0d", i1, i2, acc_a);
        end
      end
    end
    for (int i = 0; i < NB; i++) xs[i] = 127;
    check_b(xs);
    for (int i = 0; i < NB; i++) xs[i] = -128;
    check_b(xs);
    for (int n = 0; n < 4000; n++) begin
      for (int i = 0; i < NB; i++) begin
        // mix small and full-range inputs so both in-range and clipped sums occur
        xs[i] = (n % 2 == 0) ? int'($urandom_range(0, 40)) - 20 : int'($urandom_range(0, 255)) - 128;
      end
      check_b(xs);
    end
    checks++;
    if (sat_seen == 0) begin
      failures++;
      $display("FAIL saturation never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
