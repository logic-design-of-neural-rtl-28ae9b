// tb_pipe_regs -- self-checking test of the layer flip-flop chain.
//
// Three stages (two inserted stages plus the output stage) carry a random
// data stream with random gaps in valid. Every output is compared with the
// input of exactly three cycles earlier, and the first valid output must
// appear exactly three cycles after the first valid input.
module tb_pipe_regs;

  localparam int STAGES = 3;
  int checks = 0;
  int failures = 0;

  logic       clk = 0;
  logic       rst_n;
  logic       in_valid, out_valid;
  logic [7:0] in_data, out_data;

  pipe_regs #(.W(8), .STAGES(STAGES)) dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_data(in_data),
    .out_valid(out_valid), .out_data(out_data));

  always #5 clk = ~clk;

  logic [8:0] hist [$];
  int cycle = 0;
  int first_in = -1, first_out = -1;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0;
    in_valid = 0;
    in_data = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    checks++;
    if (out_valid) begin
      failures++;
      $display("FAIL valid set after reset");
    end
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      in_valid = (n < 10) ? 1'b1 : 1'($urandom_range(0, 3) != 0);
      in_data  = 8'($urandom);
      if (in_valid && first_in < 0) first_in = cycle;
    end
    @(negedge clk) in_valid = 0;
    repeat (STAGES + 2) @(posedge clk);
    checks++;
    if (first_out - first_in != STAGES) begin
      failures++;
      $display("FAIL latency %0d", first_out - first_in);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Reference: the input sampled at each rising edge, delayed STAGES edges.
  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (rst_n) begin
      hist.push_back({in_valid, in_data});
      if (hist.size() == STAGES) begin
        logic [8:0] e;
        e = hist.pop_front();
        #1;
        checks++;
        if (out_valid != e[8] || (e[8] && out_data != e[7:0])) begin
          failures++;
          if (failures < 10) $display("FAIL out %0b/%02h expected %0b/%02h", out_valid, out_data, e[8], e[7:0]);
        end
        if (out_valid && first_out < 0) first_out = cycle;
      end
    end
  end

endmodule
