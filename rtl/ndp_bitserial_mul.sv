// ndp_bitserial_mul: one 128-bit multiplier of the NDP GEMV unit.
//
// The operand word holds 8 FP16 values, so one multiplier computes 8 FP16 x FP16 products
// at a time. It works bit-serially over the weight: each cycle it consumes one bit of each
// of the 8 weights, LSB first, while the 8 activations are held in parallel.
//   steps 0..4   the 5 exponent bits of the weight are added to the activation exponent with
//                a one-bit serial adder and carry flop;
//   steps 5..15  the 11 significand bits (10 stored + hidden) drive a shift-add multiplier
//                (the partial product gains the shifted activation significand when the bit is 1).
// After the 16th step the 22-bit significand product is normalised and packed as FP32, which
// holds the FP16 x FP16 product exactly (no rounding).
// Timing: `start` is taken when `ready`; the products appear with `out_valid` 17 cycles after
// `start` and stay until the next result. `ready` is also high during the last step, so
// back-to-back operations issue every 16 cycles (256 multipliers x 8 lanes x 2 flop / 16 cycles
// = 256 flop per cycle, i.e. the 256 GFLOPS of one NDP at a 1 GHz clock).
// From the paper: 128-bit multiplier, bit-serial operation, 8 FP16 values at once. This design's
// choices: exponent-then-significand bit order, 16 cycles per operation, 1 GHz clock, FP32 output,
// subnormals flushed to zero, infinities and NaNs not special-cased. `tag_in` is carried to `tag_out`.
module ndp_bitserial_mul
  import trimoe_pkg::*;
#(
  parameter int LANES = 8,
  parameter int TAG_W = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  output logic              ready,
  input  logic [LANES*16-1:0] w,     // 8 FP16 weights, lane i at [16i +: 16]
  input  logic [LANES*16-1:0] x,     // 8 FP16 activations
  input  logic [TAG_W-1:0]  tag_in,
  output logic              out_valid,
  output fp32_t             prod [LANES],
  output logic [TAG_W-1:0]  tag_out
);

  localparam int STEPS = 16;

  logic        busy;
  logic [3:0]  step;
  logic [TAG_W-1:0] tag_q;

  // per-lane state
  logic [15:0] wsr   [LANES];  // weight shift register {hidden, m[9:0], e[4:0]}, LSB out first
  logic [10:0] mc    [LANES];  // activation significand (hidden bit + 10)
  logic [21:0] pp    [LANES];  // partial product
  logic [5:0]  esum  [LANES];  // serial exponent sum
  logic        ecy   [LANES];  // serial adder carry
  logic [4:0]  xexp  [LANES];
  logic        sgn   [LANES];
  logic        zero  [LANES];

  wire last_step = busy && (step == 4'(STEPS - 1));
  assign ready = !busy || last_step;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      step <= '0;
      out_valid <= 1'b0;
      tag_q <= '0;
      tag_out <= '0;
    end else begin
      out_valid <= last_step;
      if (last_step) tag_out <= tag_q;
      if (start && ready) begin
        busy <= 1'b1;
        step <= '0;
        tag_q <= tag_in;
      end else if (busy) begin
        step <= step + 4'd1;
        if (last_step) busy <= 1'b0;
      end
    end
  end

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    wire [15:0] wl = w[16*l +: 16];
    wire [15:0] xl = x[16*l +: 16];
    wire        wb = wsr[l][0];
    wire [21:0] pp_next = pp[l] + (wb ? {11'd0, mc[l]} << (step - 4'd5) : 22'd0);

    always_ff @(posedge clk) begin
      if (start && ready) begin
        wsr[l]  <= {wl[14:10] != 5'd0, wl[9:0], wl[14:10]};
        mc[l]   <= {xl[14:10] != 5'd0, xl[9:0]};
        xexp[l] <= xl[14:10];
        pp[l]   <= '0;
        esum[l] <= '0;
        ecy[l]  <= 1'b0;
        sgn[l]  <= wl[15] ^ xl[15];
        zero[l] <= (wl[14:10] == 5'd0) || (xl[14:10] == 5'd0);
      end else if (busy) begin
        wsr[l] <= wsr[l] >> 1;
        if (step < 4'd5) begin
          // one-bit serial adder over the exponent bits
          esum[l][step[2:0]] <= wb ^ xexp[l][step[2:0]] ^ ecy[l];
          ecy[l] <= (wb & xexp[l][step[2:0]]) | (wb & ecy[l]) | (xexp[l][step[2:0]] & ecy[l]);
        end else begin
          if (step == 4'd5) esum[l][5] <= ecy[l];
          pp[l] <= pp_next;
        end
      end
    end

    // normalise and pack the finished product on the last step
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) prod[l] <= '0;
      else if (last_step) begin
        if (zero[l]) prod[l] <= {sgn[l], 31'd0};
        else if (pp_next[21])
          prod[l] <= {sgn[l], 8'(esum[l]) + 8'd98, pp_next[20:0], 2'b00};
        else
          prod[l] <= {sgn[l], 8'(esum[l]) + 8'd97, pp_next[19:0], 3'b000};
      end
    end
  end

endmodule
