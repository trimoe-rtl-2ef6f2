// tb_ndp_gemv_unit: a reduced GEMV unit (2 multipliers = 16 elements per chunk, 4 tokens max,
// 512-byte buffer, 64-bit weight beats) runs three jobs:
//   1  ACT_NONE, R=3 rows, K=2 chunks, T=3 tokens, weights supplied at full rate:
//      compute-bound, must take R*K*T = 18 passes of 16 cycles (checked with a small margin);
//   2  ACT_SILU_MUL over the same output region: silu(W2 x) * (result of job 1);
//   3  ACT_SILU with T=1 and a slow weight stream: memory-bound, weight stalls must be counted.
// Every output is read back through the host port and compared with a real-valued reference.
module tb_ndp_gemv_unit;
  import trimoe_pkg::*;
  import tb_fp_pkg::*;
  localparam int NM = 2, MW = 64, MT = 4, BB = 512, EL = NM * 8, BEATS = EL * 16 / MW;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic job_valid, job_ready, done, w_valid, w_ready, hb_en, hb_we, hb_ready;
  gemv_job_t job;
  logic [MW-1:0] w_data;
  logic [7:0] hb_addr;
  fp16_t hb_wdata, hb_rdata;
  logic [31:0] stat_w_stall, stat_passes;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  ndp_gemv_unit #(.NUM_MULT(NM), .MEM_W(MW), .MAX_TOK(MT), .BUF_BYTES(BB)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  fp16_t W [8][32];     // rows x K
  fp16_t X [4][32];     // tokens x K
  real   yprev [4][8];

  task automatic hb_write(input int a, input fp16_t v);
    @(negedge clk); hb_en = 1; hb_we = 1; hb_addr = 8'(a); hb_wdata = v;
    @(negedge clk); hb_en = 0; hb_we = 0;
  endtask
  task automatic hb_read(input int a, output fp16_t v);
    @(negedge clk); hb_en = 1; hb_we = 0; hb_addr = 8'(a);
    @(posedge clk); #1 v = hb_rdata;
    @(negedge clk); hb_en = 0;
  endtask

  // weight streamer: rows of k_chunks chunks, each chunk BEATS beats
  int slow, g_rows, g_kc;
  logic go = 0;
  initial forever begin
    @(posedge clk);
    if (go) begin stream_w(g_rows, g_kc); go = 0; end
  end
  task automatic stream_w(input int rows, input int kc);
    for (int r = 0; r < rows; r++)
      for (int c = 0; c < kc; c++)
        for (int b = 0; b < BEATS; b++) begin
          logic [MW-1:0] d;
          for (int e = 0; e < MW / 16; e++) d[16*e +: 16] = W[r][c*EL + b*(MW/16) + e];
          @(negedge clk);
          if (slow > 0) begin w_valid = 0; repeat (slow) @(negedge clk); end
          w_valid = 1; w_data = d;
          @(posedge clk); while (!w_ready) @(posedge clk);
          #1 w_valid = 0;
        end
  endtask

  task automatic run_job(input int rows, input int kc, input int T, input act_mode_e mode, input int spd);
    int t0, t1;
    real ref_v, g;
    fp16_t v;
    // load x: token t chunk c at line t*kc + c
    for (int t = 0; t < T; t++)
      for (int k = 0; k < kc * EL; k++) hb_write((t * kc) * EL + k, X[t][k]);
    @(negedge clk);
    job = '0;
    job.rows = 16'(rows); job.k_chunks = 8'(kc); job.tokens = 9'(T);
    job.x_base = 0; job.y_base = 20'(8 * EL); job.y_stride = 20'(EL); job.mode = mode;
    job_valid = 1;
    @(posedge clk); t0 = cyc;
    #1 job_valid = 0;
    slow = spd;
    g_rows = rows; g_kc = kc; go = 1;
    @(posedge clk); while (!done) @(posedge clk);
    t1 = cyc;
    while (go) @(posedge clk);
    // results
    for (int t = 0; t < T; t++)
      for (int r = 0; r < rows; r++) begin
        real s, a;
        s = 0; a = 0;
        for (int k = 0; k < kc * EL; k++) begin
          s += fp16_real(W[r][k]) * fp16_real(X[t][k]);
          a += rabs(fp16_real(W[r][k]) * fp16_real(X[t][k]));
        end
        if (mode == ACT_NONE) ref_v = s;
        else ref_v = s / (1.0 + $exp(-s));
        if (mode == ACT_SILU_MUL) ref_v = ref_v * yprev[t][r];
        hb_read(8 * EL + t * EL + r, v);
        g = fp16_real(v);
        checks++;
        if (rabs(g - ref_v) > 4e-3 * rabs(ref_v) + 1e-3 + 1e-5 * a) begin
          failures++; $display("mode %0d t%0d r%0d got %g exp %g", mode, t, r, g, ref_v);
        end
        yprev[t][r] = g;
      end
    $display("job mode %0d: %0d cycles, passes %0d, weight stalls %0d", mode, t1 - t0, stat_passes, stat_w_stall);
    if (spd == 0) begin
      checks++;
      if ((t1 - t0) < rows * kc * T * 16 || (t1 - t0) > rows * kc * T * 16 + 60) begin
        failures++; $display("compute-bound job took %0d cycles", t1 - t0);
      end
    end
  endtask

  initial begin
    int p0, s0;
    job_valid = 0; job = '0; w_valid = 0; w_data = '0; hb_en = 0; hb_we = 0; hb_addr = 0; hb_wdata = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 8; r++) for (int k = 0; k < 32; k++) W[r][k] = rand_fp16(11, 16);
    for (int t = 0; t < 4; t++) for (int k = 0; k < 32; k++) X[t][k] = rand_fp16(11, 16);
    p0 = 0;
    run_job(3, 2, 3, ACT_NONE, 0);
    checks++;
    if (stat_passes != 18) begin failures++; $display("passes %0d", stat_passes); end
    for (int r = 0; r < 8; r++) for (int k = 0; k < 32; k++) W[r][k] = rand_fp16(11, 16);
    run_job(3, 2, 3, ACT_SILU_MUL, 0);
    s0 = int'(stat_w_stall);
    for (int r = 0; r < 8; r++) for (int k = 0; k < 32; k++) W[r][k] = rand_fp16(11, 16);
    run_job(2, 1, 1, ACT_SILU, 8);
    checks++;
    if (int'(stat_w_stall) - s0 < 10) begin failures++; $display("no weight stalls counted"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
