// tb_workloads -- end-to-end tests of the other eight evaluated networks.
//
// The design is a fixed circuit per network, so each network of the
// evaluation is its own logic_nn instance, built with that network's layer
// sizes: three optical-fibre equalisers (OFC, 21 inputs, 1 output), three
// jet-substructure classifiers (JSC, 16 inputs, 5 outputs) and three
// network-intrusion detectors (NID, 593 inputs, 1 output); OFC-B, the
// default configuration, is tested by tb_logic_nn. Each instance is driven
// and checked by its own nn_stream_check (random inputs, reference model,
// latency, throughput, reset and mechanism counts). All other parameters
// keep their defaults. Three more instances build OFC-B with 0, 3 and 4
// inserted flip-flop stages per layer instead of the default 2 (no inserted
// stages, and the deeper pipelines compared for retiming), checking the
// latency 1 + 3 * (NUM_IFF + 1) of each.
module tb_workloads;

  logic clk = 0;
  always #5 clk = ~clk;

  // OFC-A: layer sizes 21, 40, 25, 1
  logic rst_ofc_a, iv_ofc_a, ov_ofc_a, done_ofc_a;
  logic [167:0] x_ofc_a;
  logic [7:0] y_ofc_a;
  int chk_ofc_a, fail_ofc_a;
  logic_nn #(.NUM_LAYERS(3), .SIZES('{21, 40, 25, 1, 0, 0, 0, 0, 0})) u_ofc_a (
    .clk(clk), .rst_n(rst_ofc_a), .in_valid(iv_ofc_a), .x(x_ofc_a),
    .out_valid(ov_ofc_a), .y(y_ofc_a));
  nn_stream_check #(.NUM_LAYERS(3), .SIZES('{21, 40, 25, 1, 0, 0, 0, 0, 0}), .N_VEC(300), .NAME("OFC-A")) c_ofc_a (
    .clk(clk), .rst_n(rst_ofc_a), .in_valid(iv_ofc_a), .x(x_ofc_a),
    .out_valid(ov_ofc_a), .y(y_ofc_a), .done(done_ofc_a), .checks(chk_ofc_a), .failures(fail_ofc_a));

  // OFC-C: layer sizes 21, 50, 50, 1
  logic rst_ofc_c, iv_ofc_c, ov_ofc_c, done_ofc_c;
  logic [167:0] x_ofc_c;
  logic [7:0] y_ofc_c;
  int chk_ofc_c, fail_ofc_c;
  logic_nn #(.NUM_LAYERS(3), .SIZES('{21, 50, 50, 1, 0, 0, 0, 0, 0})) u_ofc_c (
    .clk(clk), .rst_n(rst_ofc_c), .in_valid(iv_ofc_c), .x(x_ofc_c),
    .out_valid(ov_ofc_c), .y(y_ofc_c));
  nn_stream_check #(.NUM_LAYERS(3), .SIZES('{21, 50, 50, 1, 0, 0, 0, 0, 0}), .N_VEC(300), .NAME("OFC-C")) c_ofc_c (
    .clk(clk), .rst_n(rst_ofc_c), .in_valid(iv_ofc_c), .x(x_ofc_c),
    .out_valid(ov_ofc_c), .y(y_ofc_c), .done(done_ofc_c), .checks(chk_ofc_c), .failures(fail_ofc_c));

  // JSC-A: layer sizes 16, 64, 16, 16, 8, 5
  logic rst_jsc_a, iv_jsc_a, ov_jsc_a, done_jsc_a;
  logic [127:0] x_jsc_a;
  logic [39:0] y_jsc_a;
  int chk_jsc_a, fail_jsc_a;
  logic_nn #(.NUM_LAYERS(5), .SIZES('{16, 64, 16, 16, 8, 5, 0, 0, 0})) u_jsc_a (
    .clk(clk), .rst_n(rst_jsc_a), .in_valid(iv_jsc_a), .x(x_jsc_a),
    .out_valid(ov_jsc_a), .y(y_jsc_a));
  nn_stream_check #(.NUM_LAYERS(5), .SIZES('{16, 64, 16, 16, 8, 5, 0, 0, 0}), .N_VEC(300), .NAME("JSC-A")) c_jsc_a (
    .clk(clk), .rst_n(rst_jsc_a), .in_valid(iv_jsc_a), .x(x_jsc_a),
    .out_valid(ov_jsc_a), .y(y_jsc_a), .done(done_jsc_a), .checks(chk_jsc_a), .failures(fail_jsc_a));

  // JSC-B: layer sizes 16, 64, 32, 32, 32, 5
  logic rst_jsc_b, iv_jsc_b, ov_jsc_b, done_jsc_b;
  logic [127:0] x_jsc_b;
  logic [39:0] y_jsc_b;
  int chk_jsc_b, fail_jsc_b;
  logic_nn #(.NUM_LAYERS(5), .SIZES('{16, 64, 32, 32, 32, 5, 0, 0, 0})) u_jsc_b (
    .clk(clk), .rst_n(rst_jsc_b), .in_valid(iv_jsc_b), .x(x_jsc_b),
    .out_valid(ov_jsc_b), .y(y_jsc_b));
  nn_stream_check #(.NUM_LAYERS(5), .SIZES('{16, 64, 32, 32, 32, 5, 0, 0, 0}), .N_VEC(300), .NAME("JSC-B")) c_jsc_b (
    .clk(clk), .rst_n(rst_jsc_b), .in_valid(iv_jsc_b), .x(x_jsc_b),
    .out_valid(ov_jsc_b), .y(y_jsc_b), .done(done_jsc_b), .checks(chk_jsc_b), .failures(fail_jsc_b));

  // JSC-C: layer sizes 16, 64, 48, 48, 32, 5
  logic rst_jsc_c, iv_jsc_c, ov_jsc_c, done_jsc_c;
  logic [127:0] x_jsc_c;
  logic [39:0] y_jsc_c;
  int chk_jsc_c, fail_jsc_c;
  logic_nn #(.NUM_LAYERS(5), .SIZES('{16, 64, 48, 48, 32, 5, 0, 0, 0})) u_jsc_c (
    .clk(clk), .rst_n(rst_jsc_c), .in_valid(iv_jsc_c), .x(x_jsc_c),
    .out_valid(ov_jsc_c), .y(y_jsc_c));
  nn_stream_check #(.NUM_LAYERS(5), .SIZES('{16, 64, 48, 48, 32, 5, 0, 0, 0}), .N_VEC(300), .NAME("JSC-C")) c_jsc_c (
    .clk(clk), .rst_n(rst_jsc_c), .in_valid(iv_jsc_c), .x(x_jsc_c),
    .out_valid(ov_jsc_c), .y(y_jsc_c), .done(done_jsc_c), .checks(chk_jsc_c), .failures(fail_jsc_c));

  // NID-A: layer sizes 593, 20, 1
  logic rst_nid_a, iv_nid_a, ov_nid_a, done_nid_a;
  logic [4743:0] x_nid_a;
  logic [7:0] y_nid_a;
  int chk_nid_a, fail_nid_a;
  logic_nn #(.NUM_LAYERS(2), .SIZES('{593, 20, 1, 0, 0, 0, 0, 0, 0})) u_nid_a (
    .clk(clk), .rst_n(rst_nid_a), .in_valid(iv_nid_a), .x(x_nid_a),
    .out_valid(ov_nid_a), .y(y_nid_a));
  nn_stream_check #(.NUM_LAYERS(2), .SIZES('{593, 20, 1, 0, 0, 0, 0, 0, 0}), .N_VEC(300), .NAME("NID-A")) c_nid_a (
    .clk(clk), .rst_n(rst_nid_a), .in_valid(iv_nid_a), .x(x_nid_a),
    .out_valid(ov_nid_a), .y(y_nid_a), .done(done_nid_a), .checks(chk_nid_a), .failures(fail_nid_a));

  // NID-B: layer sizes 593, 20, 20, 1
  logic rst_nid_b, iv_nid_b, ov_nid_b, done_nid_b;
  logic [4743:0] x_nid_b;
  logic [7:0] y_nid_b;
  int chk_nid_b, fail_nid_b;
  logic_nn #(.NUM_LAYERS(3), .SIZES('{593, 20, 20, 1, 0, 0, 0, 0, 0})) u_nid_b (
    .clk(clk), .rst_n(rst_nid_b), .in_valid(iv_nid_b), .x(x_nid_b),
    .out_valid(ov_nid_b), .y(y_nid_b));
  nn_stream_check #(.NUM_LAYERS(3), .SIZES('{593, 20, 20, 1, 0, 0, 0, 0, 0}), .N_VEC(300), .NAME("NID-B")) c_nid_b (
    .clk(clk), .rst_n(rst_nid_b), .in_valid(iv_nid_b), .x(x_nid_b),
    .out_valid(ov_nid_b), .y(y_nid_b), .done(done_nid_b), .checks(chk_nid_b), .failures(fail_nid_b));

  // NID-C: layer sizes 593, 25, 25, 1
  logic rst_nid_c, iv_nid_c, ov_nid_c, done_nid_c;
  logic [4743:0] x_nid_c;
  logic [7:0] y_nid_c;
  int chk_nid_c, fail_nid_c;
  logic_nn #(.NUM_LAYERS(3), .SIZES('{593, 25, 25, 1, 0, 0, 0, 0, 0})) u_nid_c (
    .clk(clk), .rst_n(rst_nid_c), .in_valid(iv_nid_c), .x(x_nid_c),
    .out_valid(ov_nid_c), .y(y_nid_c));
  nn_stream_check #(.NUM_LAYERS(3), .SIZES('{593, 25, 25, 1, 0, 0, 0, 0, 0}), .N_VEC(300), .NAME("NID-C")) c_nid_c (
    .clk(clk), .rst_n(rst_nid_c), .in_valid(iv_nid_c), .x(x_nid_c),
    .out_valid(ov_nid_c), .y(y_nid_c), .done(done_nid_c), .checks(chk_nid_c), .failures(fail_nid_c));

  // OFC-B with 0 inserted flip-flop stages per layer
  logic rst_ofc_b_iff0, iv_ofc_b_iff0, ov_ofc_b_iff0, done_ofc_b_iff0;
  logic [167:0] x_ofc_b_iff0;
  logic [7:0] y_ofc_b_iff0;
  int chk_ofc_b_iff0, fail_ofc_b_iff0;
  logic_nn #(.NUM_IFF(0)) u_ofc_b_iff0 (
    .clk(clk), .rst_n(rst_ofc_b_iff0), .in_valid(iv_ofc_b_iff0), .x(x_ofc_b_iff0),
    .out_valid(ov_ofc_b_iff0), .y(y_ofc_b_iff0));
  nn_stream_check #(.NUM_IFF(0), .N_VEC(300), .NAME("OFC-B/0 stages")) c_ofc_b_iff0 (
    .clk(clk), .rst_n(rst_ofc_b_iff0), .in_valid(iv_ofc_b_iff0), .x(x_ofc_b_iff0),
    .out_valid(ov_ofc_b_iff0), .y(y_ofc_b_iff0), .done(done_ofc_b_iff0), .checks(chk_ofc_b_iff0), .failures(fail_ofc_b_iff0));

  // OFC-B with 3 inserted flip-flop stages per layer
  logic rst_ofc_b_iff3, iv_ofc_b_iff3, ov_ofc_b_iff3, done_ofc_b_iff3;
  logic [167:0] x_ofc_b_iff3;
  logic [7:0] y_ofc_b_iff3;
  int chk_ofc_b_iff3, fail_ofc_b_iff3;
  logic_nn #(.NUM_IFF(3)) u_ofc_b_iff3 (
    .clk(clk), .rst_n(rst_ofc_b_iff3), .in_valid(iv_ofc_b_iff3), .x(x_ofc_b_iff3),
    .out_valid(ov_ofc_b_iff3), .y(y_ofc_b_iff3));
  nn_stream_check #(.NUM_IFF(3), .N_VEC(300), .NAME("OFC-B/3 stages")) c_ofc_b_iff3 (
    .clk(clk), .rst_n(rst_ofc_b_iff3), .in_valid(iv_ofc_b_iff3), .x(x_ofc_b_iff3),
    .out_valid(ov_ofc_b_iff3), .y(y_ofc_b_iff3), .done(done_ofc_b_iff3), .checks(chk_ofc_b_iff3), .failures(fail_ofc_b_iff3));

  // OFC-B with 4 inserted flip-flop stages per layer
  logic rst_ofc_b_iff4, iv_ofc_b_iff4, ov_ofc_b_iff4, done_ofc_b_iff4;
  logic [167:0] x_ofc_b_iff4;
  logic [7:0] y_ofc_b_iff4;
  int chk_ofc_b_iff4, fail_ofc_b_iff4;
  logic_nn #(.NUM_IFF(4)) u_ofc_b_iff4 (
    .clk(clk), .rst_n(rst_ofc_b_iff4), .in_valid(iv_ofc_b_iff4), .x(x_ofc_b_iff4),
    .out_valid(ov_ofc_b_iff4), .y(y_ofc_b_iff4));
  nn_stream_check #(.NUM_IFF(4), .N_VEC(300), .NAME("OFC-B/4 stages")) c_ofc_b_iff4 (
    .clk(clk), .rst_n(rst_ofc_b_iff4), .in_valid(iv_ofc_b_iff4), .x(x_ofc_b_iff4),
    .out_valid(ov_ofc_b_iff4), .y(y_ofc_b_iff4), .done(done_ofc_b_iff4), .checks(chk_ofc_b_iff4), .failures(fail_ofc_b_iff4));

  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", chk_ofc_a + chk_ofc_c + chk_jsc_a + chk_jsc_b + chk_jsc_c + chk_nid_a + chk_nid_b + chk_nid_c + chk_ofc_b_iff0 + chk_ofc_b_iff3 + chk_ofc_b_iff4, fail_ofc_a + fail_ofc_c + fail_jsc_a + fail_jsc_b + fail_jsc_c + fail_nid_a + fail_nid_b + fail_nid_c + fail_ofc_b_iff0 + fail_ofc_b_iff3 + fail_ofc_b_iff4 + 1);
    $finish;
  end

  initial begin
    wait (done_ofc_a && done_ofc_c && done_jsc_a && done_jsc_b && done_jsc_c && done_nid_a && done_nid_b && done_nid_c && done_ofc_b_iff0 && done_ofc_b_iff3 && done_ofc_b_iff4);
    $display("TB_RESULT checks=%0d failures=%0d", chk_ofc_a + chk_ofc_c + chk_jsc_a + chk_jsc_b + chk_jsc_c + chk_nid_a + chk_nid_b + chk_nid_c + chk_ofc_b_iff0 + chk_ofc_b_iff3 + chk_ofc_b_iff4, fail_ofc_a + fail_ofc_c + fail_jsc_a + fail_jsc_b + fail_jsc_c + fail_nid_a + fail_nid_b + fail_nid_c + fail_ofc_b_iff0 + fail_ofc_b_iff3 + fail_ofc_b_iff4);
    $finish;
  end

endmodule
