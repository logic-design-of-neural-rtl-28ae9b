// tb_nn_layer -- self-checking test of one network layer.
//
// A 21-input layer of 6 neurons (layer index 0 of the default network,
// ReLU on, two inserted flip-flop stages) and a 6-input, 3-neuron output
// layer (ReLU bypassed, no inserted stage) are fed random vectors on every
// cycle. Outputs are compared with the reference model, and each output
// must appear exactly NUM_IFF + 1 cycles after its input.
module tb_nn_layer;

  int checks = 0;
  int failures = 0;

  logic clk = 0;
  logic rst_n;
  always #5 clk = ~clk;

  logic         v_in;
  logic [167:0] xa;
  logic         va;
  logic [47:0]  ya;
  logic [47:0]  xb;
  logic         vb;
  logic [23:0]  yb;

  nn_layer #(.N_IN(21), .N_OUT(6), .LAYER(0), .SEED(1), .ACC_W(14), .RELU_EN(1'b1), .NUM_IFF(2))
    u_a (.clk(clk), .rst_n(rst_n), .in_valid(v_in), .x(xa), .out_valid(va), .y(ya));
  nn_layer #(.N_IN(6), .N_OUT(3), .LAYER(2), .SEED(7), .ACC_W(12), .RELU_EN(1'b0), .NUM_IFF(0))
    u_b (.clk(clk), .rst_n(rst_n), .in_valid(v_in), .x(xb), .out_valid(vb), .y(yb));

  typedef struct { longint y []; int t; } exp_t;
  exp_t qa [$];
  exp_t qb [$];
  int cycle = 0;
  int na = 0, nb = 0;

  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    #1;
    if (va) begin
      exp_t e;
      e = qa.pop_front();
      checks++;
      if (cycle - e.t != 3) begin failures++; $display("FAIL a latency %0d", cycle - e.t); end
      for (int j = 0; j < 6; j++) begin
        checks++;
        if (longint'($signed(ya[j*8 +: 8])) != e.y[j]) begin
          failures++;
          if (failures < 10) $display("FAIL a y%0d=%0d exp %0d", j, $signed(ya[j*8 +: 8]), e.y[j]);
        end
      end
      na++;
    end
    if (vb) begin
      exp_t e;
      e = qb.pop_front();
      checks++;
      if (cycle - e.t != 1) begin failures++; $display("FAIL b latency %0d", cycle - e.t); end
      for (int j = 0; j < 3; j++) begin
        checks++;
        if (longint'($signed(yb[j*8 +: 8])) != e.y[j]) begin
          failures++;
          if (failures < 10) $display("FAIL b y%0d=%0d exp %0d", j, $signed(yb[j*8 +: 8]), e.y[j]);
        end
      end
      nb++;
    end
  end

  initial begin
    longint a [];
    longint b [];
    longint r [];
    exp_t e;
    rst_n = 0;
    v_in = 0;
    xa = '0;
    xb = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    a = new[21];
    b = new[6];
    for (int n = 0; n < 1000; n++) begin
      @(negedge clk);
      for (int i = 0; i < 21; i++) begin
        a[i] = longint'(int'($urandom_range(0, 255)) - 128);
        xa[i*8 +: 8] = 8'(a[i]);
      end
      for (int i = 0; i < 6; i++) begin
        b[i] = longint'(int'($urandom_range(0, 255)) - 128);
        xb[i*8 +: 8] = 8'(b[i]);
      end
      v_in = 1;
      nn_ref_pkg::layer(1, 0, 21, 6, 14, 1'b1, a, r);
      e.y = r;
      e.t = cycle;
      qa.push_back(e);
      nn_ref_pkg::layer(7, 2, 6, 3, 12, 1'b0, b, r);
      e.y = r;
      qb.push_back(e);
    end
    @(negedge clk) v_in = 0;
    repeat (6) @(posedge clk);
    checks += 2;
    if (na != 1000) begin failures++; $display("FAIL a got %0d outputs", na); end
    if (nb != 1000) begin failures++; $display("FAIL b got %0d outputs", nb); end
    $display("events: acc_sat=%0d req_sat=%0d relu_zero=%0d", nn_ref_pkg::n_acc_sat,
             nn_ref_pkg::n_req_sat, nn_ref_pkg::n_relu_zero);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
