// trimoe_pkg: types, constants and arithmetic shared by the DIMM-NDP buffer chip.
//
// The NDP datapath multiplies FP16 weights by FP16 activations. A product of two FP16
// numbers fits exactly in FP32, so products, adder-tree sums and accumulators are FP32
// and only the activation output is rounded back to FP16. The helpers below are pure
// combinational functions used by several modules:
//   fp16_to_fp32 / fp32_to_fp16  format conversion, round to nearest even
//   fp32_add / fp32_mul          IEEE-754 binary32 add and multiply, round to nearest even
// Simplifications (this design's choice, not the paper's): subnormal inputs and results are
// flushed to zero, NaN is not propagated distinctly from infinity.
// The job and task structures encode the commands the host sends to one buffer chip.
package trimoe_pkg;

  typedef logic [15:0] fp16_t;
  typedef logic [31:0] fp32_t;

  // Activation applied by the Act unit to each finished output row.
  typedef enum logic [1:0] {
    ACT_NONE     = 2'd0,   // FP32 sum rounded to FP16
    ACT_SILU     = 2'd1,   // silu(x) = x * sigmoid(x)
    ACT_SILU_MUL = 2'd2    // silu(x) * y, y already in the buffer (gated FFN, gate * up)
  } act_mode_e;

  // Layout of an expert's weights across the DIMMs.
  typedef enum logic {
    LAYOUT_STRIPED = 1'b0, // line i lives on DIMM (i mod D) at base + i / D
    LAYOUT_LOCAL   = 1'b1  // line i lives on the home DIMM at base + i
  } layout_e;

  localparam int ADDR_W = 32;  // DRAM line address width inside one DIMM
  localparam int ROWS_W = 16;
  localparam int CHUNK_W = 8;
  localparam int TOK_W = 9;    // token count 0..256
  localparam int EADDR_W = 20; // element address inside the activation buffer

  // One GEMV job: y[t][r] = act( sum_k W[r][k] * x[t][k] )
  typedef struct packed {
    logic [ADDR_W-1:0]  w_base;    // first DRAM line of W (row-major, rows padded to whole chunks)
    logic [ROWS_W-1:0]  rows;      // output rows R
    logic [CHUNK_W-1:0] k_chunks;  // K / (multipliers * 8), zero padded
    logic [TOK_W-1:0]   tokens;    // tokens T (1..MAX_TOK)
    logic [15:0]        x_base;    // buffer line of x[0] chunk 0; x[t] chunk c at x_base + t*k_chunks + c
    logic [EADDR_W-1:0] y_base;    // buffer element of y[0][0]
    logic [EADDR_W-1:0] y_stride;  // element distance between tokens in y
    act_mode_e          mode;
  } gemv_job_t;

  // One relayout / migration task, broadcast to every DIMM.
  typedef struct packed {
    layout_e           src_layout;
    logic [7:0]        src_home;   // home DIMM when src_layout is LAYOUT_LOCAL
    logic [ADDR_W-1:0] src_base;
    layout_e           dst_layout;
    logic [7:0]        dst_home;
    logic [ADDR_W-1:0] dst_base;
    logic [23:0]       n_lines;    // lines of the expert
  } relayout_task_t;

  typedef enum logic [1:0] {
    OWNER_HOST  = 2'd0,
    OWNER_GEMV  = 2'd1,
    OWNER_RELAY = 2'd2
  } mem_owner_e;

  // ---------------------------------------------------------------- conversions
  function automatic fp32_t fp16_to_fp32(input fp16_t h);
    logic [4:0] e;
    e = h[14:10];
    if (e == 5'd0) return {h[15], 31'd0};                    // zero, subnormal flushed
    if (e == 5'd31) return {h[15], 8'hff, h[9:0], 13'd0};    // inf / nan
    return {h[15], 8'(e) + 8'd112, h[9:0], 13'd0};
  endfunction

  function automatic fp16_t fp32_to_fp16(input fp32_t f);
    logic [7:0] e;
    logic [11:0] m;   // hidden bit + 10 bits + carry
    logic rnd, sticky;
    int ee;
    e = f[30:23];
    if (e == 8'hff) return {f[31], 5'h1f, (f[22:0] != 0) ? 10'h200 : 10'h000};
    if (e == 8'd0) return {f[31], 15'd0};
    ee = int'(e) - 112;
    m = {1'b0, 1'b1, f[22:13]};
    rnd = f[12];
    sticky = |f[11:0];
    if (rnd && (sticky || m[0])) m = m + 12'd1;
    if (m[11]) begin
      m = m >> 1;
      ee = ee + 1;
    end
    if (ee >= 31) return {f[31], 5'h1f, 10'd0};
    if (ee <= 0) return {f[31], 15'd0};
    return {f[31], 5'(ee), m[9:0]};
  endfunction

  // ---------------------------------------------------------------- FP32 add
  function automatic fp32_t fp32_add(input fp32_t a, input fp32_t b);
    fp32_t x, y;
    logic [7:0] ex, ey;
    logic [27:0] mx, my, s;   // 1 hidden + 23 + guard, round, sticky (+1 carry)
    logic [7:0] d;
    logic st;
    int e, lz;
    logic [23:0] mant;
    logic g, r, sk;
    if (a[30:23] == 8'd0) return (b[30:23] == 8'd0) ? {a[31] & b[31], 31'd0} : b;
    if (b[30:23] == 8'd0) return a;
    if (a[30:23] == 8'hff) return a;
    if (b[30:23] == 8'hff) return b;
    if (a[30:0] >= b[30:0]) begin x = a; y = b; end
    else begin x = b; y = a; end
    ex = x[30:23];
    ey = y[30:23];
    mx = {1'b0, 1'b1, x[22:0], 3'b000};
    my = {1'b0, 1'b1, y[22:0], 3'b000};
    d = ex - ey;
    if (d > 8'd26) my = 28'd1;     // only sticky survives
    else begin
      st = |(my & ((28'd1 << d) - 28'd1));
      my = (my >> d) | {27'd0, st};
    end
    e = int'(ex);
    if (x[31] == y[31]) begin
      s = mx + my;
      if (s[27]) begin
        s = (s >> 1) | {27'd0, s[0]};
        e = e + 1;
      end
    end else begin
      s = mx - my;
      if (s == 28'd0) return 32'd0;
      lz = 0;
      for (int i = 0; i <= 26; i++) if (s[i]) lz = 26 - i;
      s = s << lz;
      e = e - lz;
    end
    // s[26] is the hidden bit, s[25:3] mantissa, s[2:0] guard/round/sticky
    mant = s[26:3];
    g = s[2];
    r = s[1];
    sk = s[0];
    if (g && (r || sk || mant[0])) begin
      mant = mant + 24'd1;
      if (mant == 24'd0) begin   // carried out of 1.111..1
        mant = 24'h800000;
        e = e + 1;
      end
    end
    if (e >= 255) return {x[31], 8'hff, 23'd0};
    if (e <= 0) return {x[31], 31'd0};
    return {x[31], 8'(e), mant[22:0]};
  endfunction

  // ---------------------------------------------------------------- FP32 multiply
  function automatic fp32_t fp32_mul(input fp32_t a, input fp32_t b);
    logic [47:0] p;
    logic [23:0] mant;
    logic g, sk;
    int e;
    logic s;
    s = a[31] ^ b[31];
    if (a[30:23] == 8'd0 || b[30:23] == 8'd0) return {s, 31'd0};
    if (a[30:23] == 8'hff || b[30:23] == 8'hff) return {s, 8'hff, 23'd0};
    p = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    e = int'(a[30:23]) + int'(b[30:23]) - 127;
    if (p[47]) begin
      mant = p[47:24];
      g = p[23];
      sk = |p[22:0];
      e = e + 1;
    end else begin
      mant = p[46:23];
      g = p[22];
      sk = |p[21:0];
    end
    if (g && (sk || mant[0])) begin
      mant = mant + 24'd1;
      if (mant == 24'd0) begin
        mant = 24'h800000;
        e = e + 1;
      end
    end
    if (e >= 255) return {s, 8'hff, 23'd0};
    if (e <= 0) return {s, 31'd0};
    return {s, 8'(e), mant[22:0]};
  endfunction

  // Line owner and local address of line i of an expert in a given layout, D = 2**LOG_D DIMMs.
  function automatic logic [7:0] line_owner(input layout_e lay, input logic [7:0] home,
                                            input logic [23:0] i, input int log_d);
    if (lay == LAYOUT_LOCAL) return home;
    return 8'(i & ((24'd1 << log_d) - 24'd1));
  endfunction

  function automatic logic [ADDR_W-1:0] line_addr(input layout_e lay, input logic [ADDR_W-1:0] base,
                                                  input logic [23:0] i, input int log_d);
    if (lay == LAYOUT_LOCAL) return base + ADDR_W'(i);
    return base + ADDR_W'(i >> log_d);
  endfunction

endpackage
