// nn_stream_check -- stimulus and checker for a whole flattened network.
//
// Drives a logic_nn instance with N_VEC random input vectors (8-bit signed,
// full range), in bursts of back-to-back vectors separated by idle cycles,
// and compares every output vector with the integer reference model of
// nn_ref_pkg for the same sizes and seed. It checks the latency of every
// vector (exactly 1 + NUM_LAYERS * (NUM_IFF + 1) cycles), that back-to-back
// inputs give back-to-back outputs (one inference per cycle), and that a
// reset while vectors are in flight discards them. It counts how often each
// mechanism occurred (pruned connection, accumulator saturation, requantiser
// saturation, ReLU clearing a value, idle cycle, back-to-back output,
// in-flight reset) and counts a failure for each one that never did.
//
// Ports: the DUT's clock is an input; reset, valid and data toward the DUT
// are outputs; done rises when the run is over, with checks and failures.
module nn_stream_check #(
  parameter int unsigned NUM_LAYERS = 3,
  parameter nn_pkg::sizes_t SIZES = '{21, 50, 25, 1, 0, 0, 0, 0, 0},
  parameter int unsigned SEED = 1,
  parameter int unsigned ACC_W = 14,
  parameter int unsigned NUM_IFF = 2,
  parameter int unsigned N_VEC = 500,
  parameter string NAME = "net"
) (
  input  logic                    clk,
  output logic                    rst_n,
  output logic                    in_valid,
  output logic [SIZES[0]*8-1:0]   x,
  input  logic                    out_valid,
  input  logic [SIZES[NUM_LAYERS]*8-1:0] y,
  output logic                    done,
  output int                      checks,
  output int                      failures
);

  localparam int unsigned N_X = SIZES[0];
  localparam int unsigned N_Y = SIZES[NUM_LAYERS];
  localparam int LATENCY = 1 + int'(NUM_LAYERS * (NUM_IFF + 1));

  typedef struct {
    longint y [];
    int     t_in;
  } expect_t;

  expect_t exp_q [$];
  int cycle = 0;
  int n_out = 0, n_b2b = 0, n_idle = 0, n_flush = 0;
  int last_out = -10;
  // events of this network only (the reference-model counters are shared)
  longint n_acc_sat = 0, n_req_sat = 0, n_zero = 0, n_pruned = 0;
  int unsigned sizes_d [];
  bit flushing = 0;

  always @(posedge clk) cycle <= cycle + 1;

  // Output checker.
  always @(posedge clk) begin
    #1;
    if (out_valid) begin
      if (flushing) begin
        checks++;
        failures++;
        $display("FAIL %s: output after in-flight reset", NAME);
      end else if (exp_q.size() == 0) begin
        checks++;
        failures++;
        $display("FAIL %s: unexpected output", NAME);
      end else begin
        expect_t e;
        e = exp_q.pop_front();
        checks++;
        if (cycle - e.t_in != LATENCY) begin
          failures++;
          if (failures < 10) $display("FAIL %s: latency %0d", NAME, cycle - e.t_in);
        end
        for (int j = 0; j < int'(N_Y); j++) begin
          checks++;
          if (longint'($signed(y[j*8 +: 8])) != e.y[j]) begin
            failures++;
            if (failures < 10)
              $display("FAIL %s: output %0d got %0d expected %0d", NAME, j,
                       $signed(y[j*8 +: 8]), e.y[j]);
          end
        end
        if (last_out == cycle - 1) n_b2b++;
        last_out = cycle;
        n_out++;
      end
    end
  end

  task automatic drive_one();
    longint xv [];
    longint yv [];
    expect_t e;
    xv = new[N_X];
    for (int i = 0; i < int'(N_X); i++) begin
      xv[i] = longint'(int'($urandom_range(0, 255)) - 128);
      x[i*8 +: 8] = 8'(xv[i]);
    end
    begin
      int unsigned a0 = nn_ref_pkg::n_acc_sat, r0 = nn_ref_pkg::n_req_sat;
      int unsigned z0 = nn_ref_pkg::n_relu_zero, p0 = nn_ref_pkg::n_pruned;
      nn_ref_pkg::network(SEED, sizes_d, ACC_W, xv, yv);
      n_acc_sat += nn_ref_pkg::n_acc_sat - a0;
      n_req_sat += nn_ref_pkg::n_req_sat - r0;
      n_zero    += nn_ref_pkg::n_relu_zero - z0;
      n_pruned  += nn_ref_pkg::n_pruned - p0;
    end
    e.y = yv;
    in_valid = 1'b1;
    // latency is counted in rising edges from the one that captures x
    // (the counter then still holds the current cycle) to the one that
    // presents y
    e.t_in = cycle;
    exp_q.push_back(e);
  endtask

  initial begin
    int sent;
    int burst;
    sent = 0;
    done = 0;
    checks = 0;
    failures = 0;
    rst_n = 0;
    in_valid = 0;
    x = '0;
    sizes_d = new[NUM_LAYERS + 1];
    for (int l = 0; l <= int'(NUM_LAYERS); l++) sizes_d[l] = SIZES[l];
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    while (sent < int'(N_VEC)) begin
      burst = 2 + (n_idle * 5) % 11;
      for (int b = 0; b < burst && sent < int'(N_VEC); b++) begin
        @(negedge clk);
        drive_one();
        sent++;
      end
      @(negedge clk);
      in_valid = 0;
      n_idle++;
    end
    repeat (LATENCY + 2) @(posedge clk);
    // In-flight reset: send a burst, reset before it reaches the output.
    for (int b = 0; b < 3; b++) begin
      @(negedge clk);
      in_valid = 1;
    end
    @(negedge clk);
    in_valid = 0;
    rst_n = 0;
    flushing = 1;
    n_flush++;
    @(negedge clk) rst_n = 1;
    repeat (LATENCY + 2) @(posedge clk);
    checks++;
    if (n_out != int'(N_VEC) || exp_q.size() != 0) begin
      failures++;
      $display("FAIL %s: %0d of %0d outputs, %0d missing", NAME, n_out, N_VEC, exp_q.size());
    end
    $display("%s events: outputs=%0d back_to_back=%0d idle=%0d pruned_weight_uses=%0d acc_sat=%0d req_sat=%0d relu_zero=%0d inflight_reset=%0d",
             NAME, n_out, n_b2b, n_idle, n_pruned, n_acc_sat, n_req_sat, n_zero, n_flush);
    checks += 7;
    if (n_b2b == 0) begin failures++; $display("FAIL %s: no back-to-back outputs", NAME); end
    if (n_idle == 0) begin failures++; $display("FAIL %s: no idle cycles", NAME); end
    if (n_pruned == 0) begin failures++; $display("FAIL %s: no pruned connection", NAME); end
    if (n_acc_sat == 0) begin failures++; $display("FAIL %s: no accumulator saturation", NAME); end
    if (n_req_sat == 0) begin failures++; $display("FAIL %s: no requantiser saturation", NAME); end
    if (n_zero == 0) begin failures++; $display("FAIL %s: ReLU never cleared a value", NAME); end
    if (n_flush == 0) begin failures++; $display("FAIL %s: no in-flight reset", NAME); end
    done = 1;
  end

endmodule
