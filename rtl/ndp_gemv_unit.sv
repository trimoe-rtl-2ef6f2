// ndp_gemv_unit: the GEMV & Act unit of one DIMM-NDP (buffer-chip side).
//
// It computes, for one expert projection on the DIMM that holds its weights,
//   y[t][r] = act( sum_k W[r][k] * x[t][k] )      r < R rows, t < T tokens, k < K
// with NUM_MULT = 256 bit-serial multipliers of 8 FP16 lanes, a 2048-input FP32 adder tree,
// a per-token accumulator, the 256-lane SiLU activation module and the 256 KB activation buffer.
// Dataflow per job:
//   * Weights stream in from the DRAM side (`w_*`, MEM_W bits per beat, row-major, each row padded
//     with zeros to whole chunks of ELEMS = 2048 elements). A chunk (4 KB) is assembled in one of
//     two weight banks while the other bank is being used (double buffering).
//   * For each chunk the unit reuses the weights for all T tokens: it reads the token's 2048
//     activations (one buffer line) and starts all multipliers together; a pass takes 16 cycles.
//   * The adder tree reduces the 2048 products; the accumulator adds the chunk sums per token.
//   * After the last chunk of the last token of a row, all T sums go through the activation
//     module at once; the write-back stage then stores the T FP16 results into the buffer at
//     y_base + t*y_stride + r. In ACT_SILU_MUL mode it first reads the value already stored there
//     and writes silu(sum) * that value (gate * up of a gated FFN).
// The unit therefore runs at the smaller of the multiplier rate (T*16 cycles per chunk) and the
// weight rate (beats per chunk); `stat_w_stall` counts cycles lost waiting for weights (the
// memory-bound case) and `stat_passes` counts multiplier passes.
// Interface: `job_valid`/`job` start a job when `job_ready` (idle); `done` pulses at the end. The
// host port `hb_*` reaches buffer port B only while idle (`hb_ready`), read data one cycle later.
// From the paper: 256 multipliers of 128 bits working bit-serially on 8 FP16 values, multi-level
// adder tree, 256 KB activation buffer, activation module of 256 exponentiation/multiplication
// units for SiLU. This design's choices: the chunk/token loop order, per-token accumulators,
// double-buffered weights, FP32 sums, the write-back addressing and the gated-product mode.
module ndp_gemv_unit
  import trimoe_pkg::*;
#(
  parameter int NUM_MULT  = 256,
  parameter int MEM_W     = 1024,
  parameter int MAX_TOK   = 256,
  parameter int BUF_BYTES = 262144,
  localparam int ELEMS    = NUM_MULT * 8,
  localparam int LINES    = BUF_BYTES / (ELEMS * 2),
  localparam int ELEM_AW  = $clog2(LINES * ELEMS)
) (
  input  logic               clk,
  input  logic               rst_n,
  // job
  input  logic               job_valid,
  input  gemv_job_t          job,
  output logic               job_ready,
  output logic               done,
  // weight stream from DRAM
  input  logic               w_valid,
  input  logic [MEM_W-1:0]   w_data,
  output logic               w_ready,
  // host access to the activation buffer (idle only)
  input  logic               hb_en,
  input  logic               hb_we,
  input  logic [ELEM_AW-1:0] hb_addr,
  input  fp16_t              hb_wdata,
  output fp16_t              hb_rdata,
  output logic               hb_ready,
  // statistics
  output logic [31:0]        stat_w_stall,
  output logic [31:0]        stat_passes
);
  localparam int CHUNK_BITS = ELEMS * 16;
  localparam int BEATS = CHUNK_BITS / MEM_W;
  localparam int BEAT_W = (BEATS > 1) ? $clog2(BEATS) : 1;
  localparam int TOKI_W = $clog2(MAX_TOK);
  localparam int LINE_AW = $clog2(LINES);
  localparam int TAG_W = TOKI_W + 2;   // {token, first chunk, last chunk}

  initial assert (CHUNK_BITS % MEM_W == 0) else $error("chunk must be whole beats");

  typedef enum logic [1:0] {S_IDLE, S_FETCH, S_HOLD, S_DRAIN} state_e;
  state_e state;
  gemv_job_t jq;

  // ---------------------------------------------------------------- weight double buffer
  logic [CHUNK_BITS-1:0] wbank [2];
  logic       wfull [2];
  logic       fill_sel, cons_sel;
  logic [BEAT_W-1:0] fill_beat;
  logic [31:0] chunks_loaded, total_chunks;

  assign w_ready = (state != S_IDLE) && !wfull[fill_sel] && (chunks_loaded < total_chunks);

  // ---------------------------------------------------------------- compute loop
  logic [ROWS_W-1:0]  r_i;
  logic [CHUNK_W-1:0] c_i;
  logic [TOK_W-1:0]   t_i;
  logic               mul_start, mul_ready, mul_valid;
  logic [TAG_W-1:0]   mul_tag;
  fp32_t              prods [ELEMS];
  logic [ELEMS*16-1:0] xline;

  wire can_start = (state == S_HOLD) && mul_ready && wfull[cons_sel];
  assign mul_start = can_start;
  wire last_t = (t_i == jq.tokens - TOK_W'(1));
  wire last_c = (c_i == jq.k_chunks - CHUNK_W'(1));
  wire last_r = (r_i == jq.rows - ROWS_W'(1));

  // ---------------------------------------------------------------- buffer ports
  logic               a_en;
  logic [LINE_AW-1:0] a_line;
  logic               b_en, b_we;
  logic [ELEM_AW-1:0] b_addr;
  fp16_t              b_wdata, b_rdata;

  assign a_en = (state == S_FETCH);
  assign a_line = LINE_AW'(jq.x_base + 16'(t_i) * 16'(jq.k_chunks) + 16'(c_i));

  ndp_act_buffer #(.ELEMS(ELEMS), .BYTES(BUF_BYTES)) u_buf (
    .clk, .a_en, .a_line, .a_rdata(xline),
    .b_en, .b_we, .b_addr, .b_wdata, .b_rdata
  );

  // ---------------------------------------------------------------- multipliers
  for (genvar m = 0; m < NUM_MULT; m++) begin : g_mul
    logic             rdy, vld;
    logic [TAG_W-1:0] tg;
    fp32_t            p [8];
    ndp_bitserial_mul #(.LANES(8), .TAG_W(TAG_W)) u_mul (
      .clk, .rst_n, .start(mul_start), .ready(rdy),
      .w(wbank[cons_sel][128*m +: 128]), .x(xline[128*m +: 128]),
      .tag_in({TOKI_W'(t_i), c_i == '0, last_c}),
      .out_valid(vld), .prod(p), .tag_out(tg)
    );
    for (genvar j = 0; j < 8; j++) begin : g_lane
      assign prods[8*m + j] = p[j];
    end
  end
  assign mul_ready = g_mul[0].rdy;
  assign mul_valid = g_mul[0].vld;
  assign mul_tag = g_mul[0].tg;

  // ---------------------------------------------------------------- adder tree + accumulator
  logic             tree_valid;
  fp32_t            tree_sum;
  logic [TAG_W-1:0] tree_tag;
  fp32_t            acc [MAX_TOK];

  ndp_adder_tree #(.N(ELEMS), .TAG_W(TAG_W)) u_tree (
    .clk, .rst_n, .in_valid(mul_valid), .in_data(prods), .tag_in(mul_tag),
    .out_valid(tree_valid), .sum(tree_sum), .tag_out(tree_tag)
  );

  ndp_accumulator #(.MAX_TOK(MAX_TOK)) u_acc (
    .clk, .rst_n, .in_valid(tree_valid), .in_tok(tree_tag[TAG_W-1:2]), .in_first(tree_tag[1]),
    .in_data(tree_sum), .acc
  );

  // a row is finished when the last chunk of the last token has been accumulated
  logic row_fin;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) row_fin <= 1'b0;
    else row_fin <= tree_valid && tree_tag[0] && (tree_tag[TAG_W-1:2] == TOKI_W'(jq.tokens - TOK_W'(1)));
  end

  // ---------------------------------------------------------------- activation + write-back
  logic  act_valid;
  fp16_t act16 [MAX_TOK];
  fp32_t act32 [MAX_TOK];

  ndp_act_unit #(.LANES(MAX_TOK)) u_act (
    .clk, .rst_n, .in_valid(row_fin), .in_mode(jq.mode), .in_data(acc),
    .out_valid(act_valid), .y16(act16), .y32(act32)
  );

  fp16_t wb16 [MAX_TOK];
  fp32_t wb32 [MAX_TOK];
  logic  wb_active, wb_phase;
  logic [TOK_W-1:0]  wb_t;
  logic [ROWS_W-1:0] wb_row;
  wire [EADDR_W-1:0] wb_addr = jq.y_base + EADDR_W'(wb_t) * jq.y_stride + EADDR_W'(wb_row);
  wire wb_mul = (jq.mode == ACT_SILU_MUL);
  wire wb_write = wb_active && (!wb_mul || wb_phase);
  wire wb_last = wb_write && (wb_t == jq.tokens - TOK_W'(1));

  always_comb begin
    if (state == S_IDLE) begin
      b_en = hb_en;
      b_we = hb_we;
      b_addr = hb_addr;
      b_wdata = hb_wdata;
    end else begin
      b_en = wb_active;
      b_we = wb_write;
      b_addr = ELEM_AW'(wb_addr);
      b_wdata = wb_mul ? fp32_to_fp16(fp32_mul(wb32[wb_t[TOKI_W-1:0]], fp16_to_fp32(b_rdata)))
                       : wb16[wb_t[TOKI_W-1:0]];
    end
  end
  assign hb_rdata = b_rdata;
  assign hb_ready = (state == S_IDLE);
  assign job_ready = (state == S_IDLE);

  always_ff @(posedge clk) begin
    if (act_valid) begin
      wb16 <= act16;
      wb32 <= act32;
    end
  end

  // ---------------------------------------------------------------- control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      jq <= '0;
      r_i <= '0; c_i <= '0; t_i <= '0;
      fill_sel <= 1'b0; cons_sel <= 1'b0; fill_beat <= '0;
      wfull[0] <= 1'b0; wfull[1] <= 1'b0;
      chunks_loaded <= '0; total_chunks <= '0;
      wb_active <= 1'b0; wb_phase <= 1'b0; wb_t <= '0; wb_row <= '0;
      done <= 1'b0;
      stat_w_stall <= '0; stat_passes <= '0;
    end else begin
      done <= 1'b0;
      // weight loader
      if (w_valid && w_ready) begin
        wbank[fill_sel][MEM_W*fill_beat +: MEM_W] <= w_data;
        if (fill_beat == BEAT_W'(BEATS - 1)) begin
          fill_beat <= '0;
          wfull[fill_sel] <= 1'b1;
          fill_sel <= ~fill_sel;
          chunks_loaded <= chunks_loaded + 32'd1;
        end else fill_beat <= fill_beat + BEAT_W'(1);
      end
      // compute sequencing
      case (state)
        S_IDLE: if (job_valid) begin
          jq <= job;
          state <= S_FETCH;
          r_i <= '0; c_i <= '0; t_i <= '0;
          fill_sel <= 1'b0; cons_sel <= 1'b0; fill_beat <= '0;
          chunks_loaded <= '0;
          total_chunks <= 32'(job.rows) * 32'(job.k_chunks);
          wb_row <= '0;
        end
        S_FETCH: state <= S_HOLD;
        S_HOLD: begin
          if (mul_ready && !wfull[cons_sel]) stat_w_stall <= stat_w_stall + 32'd1;
          if (can_start) begin
            stat_passes <= stat_passes + 32'd1;
            state <= S_FETCH;
            if (last_t) begin
              t_i <= '0;
              wfull[cons_sel] <= 1'b0;
              cons_sel <= ~cons_sel;
              if (last_c) begin
                c_i <= '0;
                if (last_r) state <= S_DRAIN;
                else r_i <= r_i + ROWS_W'(1);
              end else c_i <= c_i + CHUNK_W'(1);
            end else t_i <= t_i + TOK_W'(1);
          end
        end
        default: ;   // S_DRAIN: wait for the last write-back
      endcase
      // write-back of finished rows
      if (act_valid) begin
        wb_active <= 1'b1;
        wb_phase <= 1'b0;
        wb_t <= '0;
      end else if (wb_active) begin
        if (wb_mul && !wb_phase) wb_phase <= 1'b1;
        else begin
          wb_phase <= 1'b0;
          if (wb_last) begin
            wb_active <= 1'b0;
            wb_row <= wb_row + ROWS_W'(1);
            if (wb_row == jq.rows - ROWS_W'(1)) begin
              state <= S_IDLE;
              done <= 1'b1;
            end
          end else wb_t <= wb_t + TOK_W'(1);
        end
      end
    end
  end

  // a new row must not finish while the previous one is still being written back
  always_ff @(posedge clk) if (rst_n && act_valid) assert (!wb_active) else $error("write-back overrun");

endmodule
