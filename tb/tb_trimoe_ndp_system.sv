// tb_trimoe_ndp_system: end-to-end run of the NDP system at reduced size (4 DIMMs, 2 multipliers
// per DIMM = 16-element chunks, 64-bit memory lines, 4 tokens, 512-byte buffers).
//   1  The host writes an expert's weights (3 rows x 32 K) striped over the 4 DIMMs.
//   2  Relayout: striped -> localized on DIMM 1, over DIMM-Link.
//   3  GEMV on DIMM 1 (ACT_NONE, 3 tokens) while the host keeps reading DIMM 1 (host priority).
//   4  Rebalancing: the expert migrates from DIMM 1 to DIMM 3.
//   5  GEMV on DIMM 3 with SiLU, 1 token, while DRAM is made slow (weight-bound stalls).
// Results are read through the buffer ports and checked against real arithmetic; each mechanism
// (link transfer, local copy, migration, host priority, weight stall, multi-token weight reuse,
// SiLU) is counted and must have happened.
module tb_trimoe_ndp_system;
  import trimoe_pkg::*;
  import tb_fp_pkg::*;
  localparam int ND = 4, NM = 2, MW = 64, MT = 4, BB = 512;
  localparam int EL = NM * 8, BEATS = EL * 16 / MW, EAW = $clog2(BB / 2);
  localparam int R = 3, KC = 2, NLINES = R * KC * BEATS;
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

  int busy_pct = 5;
  for (genvar i = 0; i < ND; i++) begin : g_mem
    logic rdy, gate;
    dram_model #(.DATA_W(MW), .LAT(10), .BUSY_PCT(0)) u_mem (
      .clk, .req_valid(d_valid[i] && gate), .req_we(d_we[i]), .req_addr(d_addr[i]), .req_wdata(d_wdata[i]),
      .req_ready(rdy), .rsp_valid(d_rsp_valid[i]), .rsp_data(d_rsp_data[i])
    );
    // extra throttling controlled by the test
    always @(negedge clk) gate = int'($urandom % 100) >= busy_pct;
    assign d_ready[i] = rdy && gate;
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  fp16_t W [R][KC*EL];
  fp16_t X [MT][KC*EL];

  function automatic logic [MW-1:0] wline(input int l);
    int r, c, b;
    logic [MW-1:0] d;
    r = l / (KC * BEATS); c = (l / BEATS) % KC; b = l % BEATS;
    for (int e = 0; e < MW / 16; e++) d[16*e +: 16] = W[r][c*EL + b*(MW/16) + e];
    return d;
  endfunction

  task automatic host_write(input int d, input int a, input logic [MW-1:0] v);
    @(negedge clk); h_valid[d] = 1; h_we[d] = 1; h_addr[d] = 32'(a); h_wdata[d] = v;
    @(posedge clk); while (!h_ready[d]) @(posedge clk);
    #1 h_valid[d] = 0; h_we[d] = 0;
  endtask

  task automatic hb_write(input int d, input int a, input fp16_t v);
    @(negedge clk); hb_en[d] = 1; hb_we[d] = 1; hb_addr[d] = EAW'(a); hb_wdata[d] = v;
    @(negedge clk); hb_en[d] = 0; hb_we[d] = 0;
  endtask
  task automatic hb_read(input int d, input int a, output fp16_t v);
    @(negedge clk); hb_en[d] = 1; hb_we[d] = 0; hb_addr[d] = EAW'(a);
    @(posedge clk); #1 v = hb_rdata[d];
    @(negedge clk); hb_en[d] = 0;
  endtask

  task automatic relayout(input layout_e sl, input int sh, input int sb, input layout_e dl, input int dh, input int db);
    @(negedge clk);
    rl_task = '{src_layout: sl, src_home: 8'(sh), src_base: 32'(sb), dst_layout: dl, dst_home: 8'(dh),
                dst_base: 32'(db), n_lines: 24'(NLINES)};
    rl_valid = 1;
    @(posedge clk); while (!rl_ready) @(posedge clk);
    #1 rl_valid = 0;
    @(posedge clk); while (!rl_done) @(posedge clk);
  endtask

  int host_reads = 0;
  logic host_traffic [ND];
  for (genvar i = 0; i < ND; i++) begin : g_ht
    always @(negedge clk) if (host_traffic[i] && !h_valid[i]) begin
      h_valid[i] = ($urandom % 3) == 0; h_we[i] = 0; h_addr[i] = 32'($urandom % 64);
    end else if (host_traffic[i] && h_valid[i] && h_ready[i]) begin
      h_valid[i] = 0; host_reads++;
    end
  end

  task automatic gemv(input int d, input int wb, input int T, input act_mode_e mode);
    fp16_t v;
    for (int t = 0; t < T; t++) for (int k = 0; k < KC * EL; k++) hb_write(d, t * KC * EL + k, X[t][k]);
    @(negedge clk);
    job[d] = '0;
    job[d].w_base = 32'(wb); job[d].rows = 16'(R); job[d].k_chunks = 8'(KC); job[d].tokens = 9'(T);
    job[d].x_base = 0; job[d].y_base = 20'(12 * EL); job[d].y_stride = 20'(EL); job[d].mode = mode;
    job_valid[d] = 1;
    @(posedge clk); while (!job_ready[d]) @(posedge clk);
    #1 job_valid[d] = 0;
    @(posedge clk); while (!gemv_done[d]) @(posedge clk);
    for (int t = 0; t < T; t++) for (int r = 0; r < R; r++) begin
      real s, ref_v, g;
      s = 0;
      for (int k = 0; k < KC * EL; k++) s += fp16_real(W[r][k]) * fp16_real(X[t][k]);
      ref_v = (mode == ACT_NONE) ? s : s / (1.0 + $exp(-s));
      hb_read(d, 12 * EL + t * EL + r, v);
      g = fp16_real(v);
      checks++;
      if (rabs(g - ref_v) > 4e-3 * rabs(ref_v) + 2e-3) begin
        failures++; $display("DIMM %0d t%0d r%0d got %g exp %g", d, t, r, g, ref_v);
      end
    end
  endtask

  initial begin
    int s_loc, s_sent, s_hb, s_ws, s_pass;
    rl_valid = 0; rl_task = '0;
    for (int i = 0; i < ND; i++) begin
      job_valid[i] = 0; job[i] = '0; h_valid[i] = 0; h_we[i] = 0; h_addr[i] = 0; h_wdata[i] = 0;
      hb_en[i] = 0; hb_we[i] = 0; hb_addr[i] = 0; hb_wdata[i] = 0; host_traffic[i] = 0;
    end
    for (int r = 0; r < R; r++) for (int k = 0; k < KC * EL; k++) W[r][k] = rand_fp16(11, 16);
    for (int t = 0; t < MT; t++) for (int k = 0; k < KC * EL; k++) X[t][k] = rand_fp16(11, 16);
    repeat (3) @(posedge clk);
    rst_n = 1;
    // 1 striped weights written by the host
    for (int l = 0; l < NLINES; l++) host_write(l % ND, 'h100 + l / ND, wline(l));
    // 2 relayout to DIMM 1
    relayout(LAYOUT_STRIPED, 0, 'h100, LAYOUT_LOCAL, 1, 'h400);
    // 3 GEMV on DIMM 1 with host traffic
    host_traffic[1] = 1;
    gemv(1, 'h400, 3, ACT_NONE);
    host_traffic[1] = 0;
    @(negedge clk) h_valid[1] = 0;
    // 4 migration to DIMM 3
    relayout(LAYOUT_LOCAL, 1, 'h400, LAYOUT_LOCAL, 3, 'h600);
    // 5 GEMV on DIMM 3, slow DRAM
    busy_pct = 70;
    gemv(3, 'h600, 1, ACT_SILU);
    busy_pct = 5;
    s_loc = 0; s_sent = 0; s_hb = 0; s_ws = 0; s_pass = 0;
    for (int i = 0; i < ND; i++) begin
      s_loc += stat_rl_local[i]; s_sent += stat_rl_sent[i]; s_hb += stat_host_block[i];
      s_ws += stat_w_stall[i]; s_pass += stat_passes[i];
    end
    $display("mechanisms: link transfers %0d, local copies %0d, migrated lines %0d, host-priority cycles %0d,",
             s_sent, s_loc, stat_rl_recv[3], s_hb);
    $display("            weight stalls %0d (DIMM 3), passes %0d (DIMM 1) %0d (DIMM 3)",
             stat_w_stall[3], stat_passes[1], stat_passes[3]);
    checks += 7;
    if (s_sent != NLINES - NLINES / ND + NLINES) begin failures++; $display("link transfers"); end
    if (s_loc != NLINES / ND) begin failures++; $display("local copies"); end
    if (stat_rl_recv[3] != NLINES) begin failures++; $display("migration"); end
    if (s_hb == 0) begin failures++; $display("host priority never exercised"); end
    if (stat_w_stall[3] == 0) begin failures++; $display("no weight stall"); end
    if (stat_passes[1] != R * KC * 3) begin failures++; $display("multi-token passes"); end
    if (stat_passes[3] != R * KC) begin failures++; $display("single-token passes"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
