// pipe_regs -- the cascaded flip-flops placed at the end of a layer.
//
// A chain of STAGES registers for a W-bit data word and its valid bit. With
// STAGES = NUM_IFF + 1 it forms the inserted flip-flops IFF1..IFFn followed
// by the layer's output flip-flop FF_out. In the RTL all stages sit after the
// activation logic; a synthesis tool with register retiming then moves the
// inserted stages back into the multiply-accumulate logic in front of them,
// shortening the longest register-to-register path, while the outputs stay
// cycle-for-cycle the same.
//
// Interface: clk, rst_n (asynchronous, active low, clears only the valid
// bits), in_valid/in_data, out_valid/out_data. Timing: out = in delayed by
// STAGES clock cycles; a new word can enter every cycle.
//
// Following the paper: flip-flops at the end of each layer and extra
// cascaded flip-flops after the ReLU for retiming (two by default, as in its
// example). This design's own choices: the valid bit and the reset of the
// valid chain only (data registers carry no reset, which keeps them free to
// be retimed).
module pipe_regs #(
  parameter int unsigned W = 8,
  parameter int unsigned STAGES = 3
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  output logic [W-1:0] out_data
);

  logic [STAGES-1:0][W-1:0] data_q;
  logic [STAGES-1:0]        valid_q;

  always_ff @(posedge clk) begin
    data_q[0] <= in_data;
    for (int s = 1; s < int'(STAGES); s++) data_q[s] <= data_q[s-1];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q <= '0;
    end else begin
      valid_q[0] <= in_valid;
      for (int s = 1; s < int'(STAGES); s++) valid_q[s] <= valid_q[s-1];
    end
  end

  assign out_valid = valid_q[STAGES-1];
  assign out_data  = data_q[STAGES-1];

endmodule
