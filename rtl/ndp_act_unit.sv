// ndp_act_unit: the NDP activation module (SiLU), LANES = 256 FP16 lanes.
//
// When the GEMV unit finishes an output row, the row's FP32 sums for every token (one per
// lane) enter this unit together. In ACT_SILU and ACT_SILU_MUL mode each lane computes
//   silu(x) = x * sigmoid(x) = x / (1 + exp(-x))
// with an exponentiation unit and multiplication units, in three register stages:
//   1  exp(-x) = 2^(-x*log2 e): the power of two is split into integer part i (the FP32
//      exponent) and fraction f, with 2^f from a cubic polynomial (max rel. error ~1e-4);
//      then d = 1 + exp(-x);
//   2  r = 1/d: with d = m 2^E, D = m/2, a linear first guess 48/17 - 32/17 D and three
//      Newton steps r*(2 - D*r);
//   3  silu = x * r, rounded to FP16.
// |x*log2 e| >= 64 is saturated (silu = x for large x, 0 for very negative x).
// In ACT_NONE mode the sum is only rounded to FP16. Outputs: FP16 (`y16`) and FP32 (`y32`),
// the latter for the gated product done at write-back. Latency 3 cycles, one vector per cycle.
// From the paper: activation module of 256 FP16 exponentiation and multiplication units for
// SiLU. This design's choices: the exp/reciprocal algorithms above, FP32 inside, FP16 out.
module ndp_act_unit
  import trimoe_pkg::*;
#(
  parameter int LANES = 256
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  input  act_mode_e in_mode,
  input  fp32_t     in_data [LANES],
  output logic      out_valid,
  output fp16_t     y16 [LANES],
  output fp32_t     y32 [LANES]
);
  localparam fp32_t NEG_LOG2E = 32'hBFB8AA3B;   // -1.4426950
  localparam fp32_t FP_ONE    = 32'h3F800000;
  localparam longint C1 = 45553;  // 2^f ~ 1 + f*(C1 + f*(C2 + f*C3)) in Q16
  localparam longint C2 = 14824;
  localparam longint C3 = 5158;
  localparam longint K1 = 64'd3031741621;  // 48/17 in Q2.30
  localparam longint K2 = 64'd2021161081;  // 32/17 in Q2.30

  logic      v1, v2, vout;
  act_mode_e m1, m2;
  assign out_valid = vout;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; v2 <= 1'b0; vout <= 1'b0;
      m1 <= ACT_NONE; m2 <= ACT_NONE;
    end else begin
      v1 <= in_valid; v2 <= v1; vout <= v2;
      m1 <= in_mode;  m2 <= m1;
    end
  end

  // 2^y for |y| < 64 as FP32, y given as FP32
  function automatic fp32_t exp2_fp32(input fp32_t y);
    logic [23:0] mant;
    int sh;
    longint yfix, i, f, t, p;
    mant = {1'b1, y[22:0]};
    sh = 134 - int'(y[30:23]);     // yfix = y * 2^16 = mant >> (134 - e)
    if (y[30:23] == 8'd0 || sh > 40) yfix = 0;
    else yfix = longint'(mant) >> sh;
    if (y[31]) yfix = -yfix;
    i = yfix >>> 16;
    f = yfix & 64'hFFFF;
    t = C3;
    t = C2 + ((t * f) >>> 16);
    t = C1 + ((t * f) >>> 16);
    p = 65536 + ((t * f) >>> 16);
    if (p > 131071) p = 131071;
    return {1'b0, 8'(i + 127), 16'(p), 7'd0};
  endfunction

  // 1/d for d >= 1: d = m * 2^E with m in [1, 2); D = m/2 in [0.5, 1) and 1/d = (1/D) * 2^-(E+1)
  function automatic fp32_t recip_fp32(input fp32_t d);
    longint dq, r, tq;
    int e;
    dq = longint'({1'b1, d[22:0]}) << 6;  // D in Q2.30
    e = int'(d[30:23]) - 127;
    r = K1 - ((K2 * dq) >>> 30);          // first guess of 1/D, in (1, 2]
    for (int n = 0; n < 3; n++) begin
      tq = (dq * r) >>> 30;
      r = (r * ((longint'(2) << 30) - tq)) >>> 30;
    end
    if (r >= (longint'(2) << 30)) return {1'b0, 8'(127 - e), 23'd0};
    return {1'b0, 8'(126 - e), r[29:7]};
  endfunction

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    fp32_t x1, d1, x2, r2;
    logic  sat_pos1, sat_neg1, sat_pos2, sat_neg2;  // sat_pos: silu = x, sat_neg: silu = 0
    fp32_t y;
    logic  big;

    always_comb begin
      y = fp32_mul(in_data[l], NEG_LOG2E);
      big = (y[30:23] >= 8'd133);  // |y| >= 64
    end

    always_ff @(posedge clk) begin
      // stage 1: d = 1 + 2^(-x log2 e)
      x1 <= in_data[l];
      sat_pos1 <= big && y[31];
      sat_neg1 <= big && !y[31];
      d1 <= fp32_add(FP_ONE, exp2_fp32(y));
      // stage 2: r = 1 / d
      x2 <= x1;
      sat_pos2 <= sat_pos1;
      sat_neg2 <= sat_neg1;
      r2 <= recip_fp32(d1);
    end

    always_ff @(posedge clk) begin
      // stage 3: silu = x * r
      fp32_t s;
      if (m2 == ACT_NONE || sat_pos2) s = x2;
      else if (sat_neg2) s = {x2[31], 31'd0};
      else s = fp32_mul(x2, r2);
      y32[l] <= s;
      y16[l] <= fp32_to_fp16(s);
    end
  end
endmodule
