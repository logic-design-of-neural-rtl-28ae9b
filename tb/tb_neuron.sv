// tb_neuron -- self-checking test of one neuron (MAC, requantiser, ReLU).
//
// Two 4-input neurons with the weights 107, 0 (pruned), -16 and 3, bias 50,
// a 14-bit accumulator and scale 2048/2**16: one with ReLU, one with it
// bypassed as in the output layer. Random and extreme input vectors are
// compared with the integer reference model; the test requires that the
// accumulator saturated, the requantiser saturated and the ReLU cleared a
// value at least once each, and that the sat and is_zero flags agree.
module tb_neuron;

  int checks = 0;
  int failures = 0;

  localparam int N = 4;
  localparam int W [N] = '{107, 0, -16, 3};
  localparam logic [N*8-1:0] WP = {8'(W[3]), 8'(W[2]), 8'(W[1]), 8'(W[0])};
  localparam int BIAS = 50;

  logic [N*8-1:0]    x;
  logic signed [7:0] y_r, y_l;
  logic              sat_r, sat_l, zero_r, zero_l;

  neuron #(.N_IN(N), .ACC_W(14), .WEIGHTS(WP), .BIAS(BIAS), .REQ_MULT(16'sd2048),
           .RELU_EN(1'b1))
    u_r (.x(x), .y(y_r), .sat(sat_r), .is_zero(zero_r));
  neuron #(.N_IN(N), .ACC_W(14), .WEIGHTS(WP), .BIAS(BIAS), .REQ_MULT(16'sd2048),
           .RELU_EN(1'b0))
    u_l (.x(x), .y(y_l), .sat(sat_l), .is_zero(zero_l));

  int n_acc_sat = 0, n_req_sat = 0, n_zero = 0;

  task automatic run(int xs [N]);
    longint s = BIAS, a, q, p;
    bit acc_s = 0, req_s = 0;
    for (int i = 0; i < N; i++) begin
      x[i*8 +: 8] = 8'(xs[i]);
      s += longint'(xs[i]) * W[i];
    end
    a = s;
    if (a > 8191) begin a = 8191; acc_s = 1; end
    if (a < -8192) begin a = -8192; acc_s = 1; end
    p = a * 2048 + 32768;
    q = (p >= 0) ? p / 65536 : -((-p + 65535) / 65536);
    if (q > 127) begin q = 127; req_s = 1; end
    if (q < -128) begin q = -128; req_s = 1; end
    #1;
    checks += 3;
    if (longint'(y_l) != q || sat_l != (acc_s | req_s) || zero_l) begin
      failures++;
      if (failures < 10) $display("FAIL linear y=%0d/%0d", y_l, q);
    end
    if (longint'(y_r) != ((q < 0) ? 0 : q) || sat_r != (acc_s | req_s)) begin
      failures++;
      if (failures < 10) $display("FAIL relu y=%0d/%0d", y_r, q);
    end
    if (zero_r != (q < 0)) begin
      failures++;
      if (failures < 10) $display("FAIL is_zero %0b q=%0d", zero_r, q);
    end
    if (acc_s) n_acc_sat++;
    if (req_s) n_req_sat++;
    if (q < 0) n_zero++;
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int xs [N];
    xs = '{127, 0, -128, 127};
    run(xs);
    xs = '{-128, 0, 127, -128};
    run(xs);
    for (int n = 0; n < 5000; n++) begin
      for (int i = 0; i < N; i++) xs[i] = int'($urandom_range(0, 255)) - 128;
      run(xs);
    end
    checks += 3;
    if (n_acc_sat == 0) begin failures++; $display("FAIL no accumulator saturation"); end
    if (n_req_sat == 0) begin failures++; $display("FAIL no requantiser saturation"); end
    if (n_zero == 0) begin failures++; $display("FAIL ReLU never cleared a value"); end
    $display("events: acc_sat=%0d req_sat=%0d relu_zero=%0d", n_acc_sat, n_req_sat, n_zero);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
