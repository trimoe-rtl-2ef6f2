// ndp_adder_tree: the multi-level adder tree behind the NDP multipliers.
//
// It reduces N FP32 products (N = 256 multipliers x 8 lanes = 2048 at full size) to one FP32
// partial sum. Level l adds neighbouring pairs of level l-1, and every level is registered,
// so the tree accepts a new input vector every cycle and has a latency of log2(N) cycles.
// A tag travels with each vector (token index and chunk flags in the GEMV unit).
// From the paper: a multi-level adder tree after the multipliers. This design's choices:
// binary tree, FP32 adders with round-to-nearest-even, one register stage per level.
// N must be a power of two, at least 2.
module ndp_adder_tree
  import trimoe_pkg::*;
#(
  parameter int N = 2048,
  parameter int TAG_W = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  fp32_t            in_data [N],
  input  logic [TAG_W-1:0] tag_in,
  output logic             out_valid,
  output fp32_t            sum,
  output logic [TAG_W-1:0] tag_out
);
  localparam int LEVELS = $clog2(N);

  initial assert (N >= 2 && (1 << LEVELS) == N) else $error("N must be a power of two");

  logic             vld [LEVELS+1];
  logic [TAG_W-1:0] tag [LEVELS+1];

  assign vld[0] = in_valid;
  assign tag[0] = tag_in;

  for (genvar l = 0; l < LEVELS; l++) begin : g_lvl
    localparam int W_IN = N >> l;
    localparam int W_OUT = N >> (l + 1);
    fp32_t lin  [W_IN];
    fp32_t lout [W_OUT];
    if (l == 0) begin : g_first
      assign lin = in_data;
    end else begin : g_next
      assign lin = g_lvl[l-1].lout;
    end
    for (genvar i = 0; i < W_OUT; i++) begin : g_add
      always_ff @(posedge clk) lout[i] <= fp32_add(lin[2*i], lin[2*i+1]);
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        vld[l+1] <= 1'b0;
        tag[l+1] <= '0;
      end else begin
        vld[l+1] <= vld[l];
        tag[l+1] <= tag[l];
      end
    end
  end

  assign sum = g_lvl[LEVELS-1].lout[0];
  assign out_valid = vld[LEVELS];
  assign tag_out = tag[LEVELS];
endmodule
