// tb_trimoe_ndp_16dimm: the NDP system with all 16 DIMMs on DIMM-Link but narrower engines
// (16 multipliers = 128-element chunks, 256-bit lines, 4 tokens, 16 KB buffers), taken through one
// complete operation: an expert of 2 rows x 128 K is written striped over the 16 DIMMs, relaid
// out to be localized on DIMM 5 (15 DIMMs send to one receiver, so the bridge's round robin and
// its receiver-free rule are exercised at full width), and DIMM 5 computes silu(W x) for 2 tokens.
// Results are compared with real arithmetic; the pass count must be rows x chunks x tokens and
// DIMM 5 must have received every line it did not already hold.
module tb_trimoe_ndp_16dimm;
  import trimoe_pkg::*;
  import tb_fp_pkg::*;
  localparam int ND = 16, NM = 16, MW = 256, MT = 4, BB = 16384;
  localparam int EL = NM * 8, BEATS = EL * 16 / MW, EAW = $clog2(BB / 2);
  localparam int R = 2, T = 2, NLINES = R * BEATS, HOME = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic job_valid [ND], job_ready [ND], gemv_done [ND];
  gemv_job_t job [ND];
  logic rl_valid, rl_ready, rl_done;
  relayout_task_t rl_task;
  logic h_valid [ND], h_we [ND], h_ready [ND], h_rsp_valid [ND];
  logic [31:0] h_addr [ND], d_addr [ND];
  logic [MW-1:0] h_wdata [ND], h_rsp_data [ND], d_wdata [ND], d_rsp_data [ND];
  logic hb_en [ND], hb_we [ND], hb_ready [ND];
  logic [EAW-1:0] hb_addr [ND];
  fp16_t hb_wdata [ND], hb_rdata [ND];
  logic d_valid [ND], d_we [ND], d_ready [ND], d_rsp_valid [ND];
  logic [31:0] stat_w_stall [ND], stat_passes [ND], stat_host_block [ND];
  logic [31:0] stat_rl_local [ND], stat_rl_sent [ND], stat_rl_recv [ND];

  trimoe_ndp_system #(.NUM_DIMMS(ND), .NUM_MULT(NM), .MEM_W(MW), .MAX_TOK(MT), .BUF_BYTES(BB)) dut (.*);

  for (genvar i = 0; i < ND; i++) begin : g_mem
    dram_model #(.DATA_W(MW), .LAT(20), .BUSY_PCT(5)) u_mem (
      .clk, .req_valid(d_valid[i]), .req_we(d_we[i]), .req_addr(d_addr[i]), .req_wdata(d_wdata[i]),
      .req_ready(d_ready[i]), .rsp_valid(d_rsp_valid[i]), .rsp_data(d_rsp_data[i])
    );
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  fp16_t W [R][EL];
  fp16_t X [T][EL];

  function automatic logic [MW-1:0] wline(input int l);
    int r, b;
    logic [MW-1:0] d;
    r = l / BEATS; b = l % BEATS;
    for (int e = 0; e < MW / 16; e++) d[16*e +: 16] = W[r][b*(MW/16) + e];
    return d;
  endfunction

  task automatic host_write(input int d, input int a, input logic [MW-1:0] v);
    @(negedge clk); h_valid[d] = 1; h_we[d] = 1; h_addr[d] = 32'(a); h_wdata[d] = v;
    @(posedge clk); while (!h_ready[d]) @(posedge clk);
    #1 h_valid[d] = 0; h_we[d] = 0;
  endtask

  initial begin
    fp16_t v;
    int t0;
    rl_valid = 0; rl_task = '0;
    for (int i = 0; i < ND; i++) begin
      job_valid[i] = 0; job[i] = '0; h_valid[i] = 0; h_we[i] = 0; h_addr[i] = 0; h_wdata[i] = 0;
      hb_en[i] = 0; hb_we[i] = 0; hb_addr[i] = 0; hb_wdata[i] = 0;
    end
    for (int r = 0; r < R; r++) for (int k = 0; k < EL; k++) W[r][k] = rand_fp16(9, 14);
    for (int t = 0; t < T; t++) for (int k = 0; k < EL; k++) X[t][k] = rand_fp16(9, 14);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int l = 0; l < NLINES; l++) host_write(l % ND, 'h100 + l / ND, wline(l));
    // relayout striped -> localized on HOME
    @(negedge clk);
    rl_task = '{src_layout: LAYOUT_STRIPED, src_home: 8'd0, src_base: 32'h100, dst_layout: LAYOUT_LOCAL,
                dst_home: 8'(HOME), dst_base: 32'h400, n_lines: 24'(NLINES)};
    rl_valid = 1;
    @(posedge clk); while (!rl_ready) @(posedge clk);
    #1 rl_valid = 0;
    @(posedge clk); while (!rl_done) @(posedge clk);
    // activations
    for (int t = 0; t < T; t++) for (int k = 0; k < EL; k++) begin
      @(negedge clk); hb_en[HOME] = 1; hb_we[HOME] = 1; hb_addr[HOME] = EAW'(t * EL + k); hb_wdata[HOME] = X[t][k];
    end
    @(negedge clk); hb_en[HOME] = 0; hb_we[HOME] = 0;
    job[HOME] = '0;
    job[HOME].w_base = 32'h400; job[HOME].rows = 16'(R); job[HOME].k_chunks = 8'd1; job[HOME].tokens = 9'(T);
    job[HOME].x_base = 0; job[HOME].y_base = 20'(8 * EL); job[HOME].y_stride = 20'(EL); job[HOME].mode = ACT_SILU;
    job_valid[HOME] = 1;
    @(posedge clk); while (!job_ready[HOME]) @(posedge clk);
    t0 = $time / 10;
    #1 job_valid[HOME] = 0;
    @(posedge clk); while (!gemv_done[HOME]) @(posedge clk);
    $display("GEMV took %0d cycles, %0d passes, %0d weight-stall cycles", $time / 10 - t0, stat_passes[HOME], stat_w_stall[HOME]);
    for (int t = 0; t < T; t++) for (int r = 0; r < R; r++) begin
      real s, ref_v, g;
      s = 0;
      for (int k = 0; k < EL; k++) s += fp16_real(W[r][k]) * fp16_real(X[t][k]);
      ref_v = s / (1.0 + $exp(-s));
      @(negedge clk); hb_en[HOME] = 1; hb_we[HOME] = 0; hb_addr[HOME] = EAW'(8 * EL + t * EL + r);
      @(posedge clk); #1 v = hb_rdata[HOME];
      @(negedge clk); hb_en[HOME] = 0;
      g = fp16_real(v);
      checks++;
      if (rabs(g - ref_v) > 4e-3 * rabs(ref_v) + 2e-3) begin
        failures++; $display("t%0d r%0d got %g exp %g", t, r, g, ref_v);
      end
    end
    checks += 2;
    if (stat_passes[HOME] != R * T) begin failures++; $display("passes %0d", stat_passes[HOME]); end
    if (stat_rl_recv[HOME] != NLINES - NLINES / ND) begin failures++; $display("relayout received %0d", stat_rl_recv[HOME]); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
