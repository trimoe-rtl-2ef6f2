// ndp_accumulator: the accumulator with feedback loop after the adder tree.
//
// A GEMV whose reduction length K is longer than one multiplier pass (2048 elements) is
// computed chunk by chunk; each chunk's adder-tree sum is added into a running FP32 sum.
// Weights are reused across the tokens routed to the expert, so there is one accumulator
// register per token (MAX_TOK = 256). On a write with `first` set the register is loaded,
// otherwise it is added to. All registers are visible at `acc` so a finished output row can be
// handed to the activation unit in one cycle. One FP32 adder is shared by all registers,
// because at most one tree result arrives per cycle.
// From the paper: an accumulator after the multipliers (the feedback loop in the GEMV unit
// drawing). This design's choices: per-token registers, FP32, load-on-first instead of clear.
module ndp_accumulator
  import trimoe_pkg::*;
#(
  parameter int MAX_TOK = 256
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  input  logic [$clog2(MAX_TOK)-1:0] in_tok,
  input  logic                       in_first,
  input  fp32_t                      in_data,
  output fp32_t                      acc [MAX_TOK]
);
  fp32_t sum;
  assign sum = fp32_add(acc[in_tok], in_data);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int t = 0; t < MAX_TOK; t++) acc[t] <= '0;
    end else if (in_valid) begin
      acc[in_tok] <= in_first ? in_data : sum;
    end
  end
endmodule
