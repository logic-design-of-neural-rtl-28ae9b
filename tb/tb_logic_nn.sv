// tb_logic_nn -- end-to-end test of the flattened network at its default
// configuration (21 inputs, layers of 50, 25 and 1 neurons, 14-bit
// accumulators, two inserted flip-flop stages per layer).
//
// The network is instantiated with no parameter overrides; nn_stream_check
// streams random input vectors through it and checks every output, the
// 10-cycle latency, one-inference-per-cycle throughput and reset.
module tb_logic_nn;

  logic         clk = 0;
  logic         rst_n, in_valid, out_valid, done;
  logic [167:0] x;
  logic [7:0]   y;
  int           checks, failures;

  always #5 clk = ~clk;

  logic_nn dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .x(x),
    .out_valid(out_valid), .y(y));

  nn_stream_check #(.N_VEC(2000), .NAME("OFC-B")) u_chk (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .x(x),
    .out_valid(out_valid), .y(y), .done(done), .checks(checks), .failures(failures));

  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    wait (done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
