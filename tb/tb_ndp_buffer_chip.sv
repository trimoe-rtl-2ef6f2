// tb_ndp_buffer_chip: one buffer chip at reduced size (2 multipliers = 16-element chunks, 64-bit
// lines, 4 tokens, 512-byte buffer, 4 DIMMs in the system, this chip is DIMM 1). The testbench
// plays the DRAM devices, the host and the DL bridge.
//   1  host writes an expert (3 rows x 32 K) on this DIMM and reads some lines back
//   2  relayout command localized -> localized (all lines copied inside the DIMM)
//   3  relayout command localized -> striped: lines that stay on DIMM 1 are copied locally, the
//      others leave as DIMM-Link packets; the bridge model checks each packet's destination id
//   4  a packet arriving from the link is written to DRAM and read back by the host
//   5  GEMV command with silu(gate) * up on the copied weights, checked against real arithmetic
module tb_ndp_buffer_chip;
  import trimoe_pkg::*;
  import tb_fp_pkg::*;
  localparam int NM = 2, MW = 64, MT = 4, BB = 512, LOG_D = 2, ID = 1;
  localparam int EL = NM * 8, BEATS = EL * 16 / MW, EAW = $clog2(BB / 2);
  localparam int R = 3, KC = 2, NLINES = R * KC * BEATS, FLITS = (8 + 32 + MW) / 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cmd_valid, cmd_relayout, cmd_ready;
  gemv_job_t cmd_job;
  relayout_task_t cmd_task;
  logic h_valid, h_we, h_ready, h_rsp_valid;
  logic [31:0] h_addr, d_addr;
  logic [MW-1:0] h_wdata, h_rsp_data, d_wdata, d_rsp_data;
  logic hb_en, hb_we, hb_ready, gemv_done, relayout_done;
  logic [EAW-1:0] hb_addr;
  fp16_t hb_wdata, hb_rdata;
  logic d_valid, d_we, d_ready, d_rsp_valid;
  logic bus_req, bus_gnt, out_valid, out_last, in_valid, in_sof, rx_free;
  logic [7:0] bus_dst, out_flit, in_flit;
  logic [31:0] stat_w_stall, stat_passes, stat_host_block, stat_rl_local, stat_rl_sent, stat_rl_recv;
  logic [7:0] my_id = 8'(ID);

  ndp_buffer_chip #(.NUM_MULT(NM), .MEM_W(MW), .MAX_TOK(MT), .BUF_BYTES(BB), .LOG_D(LOG_D)) dut (.*);
  dram_model #(.DATA_W(MW), .LAT(8), .BUSY_PCT(10)) u_mem (
    .clk, .req_valid(d_valid), .req_we(d_we), .req_addr(d_addr), .req_wdata(d_wdata),
    .req_ready(d_ready), .rsp_valid(d_rsp_valid), .rsp_data(d_rsp_data)
  );

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // bridge model: grant whenever the chip asks, check every outgoing packet
  assign bus_gnt = bus_req;
  int pkts = 0, fl = 0;
  logic [7:0] pdst;
  always @(posedge clk) if (rst_n && out_valid) begin
    if (fl == 0) pdst = out_flit;
    fl++;
    if (out_last) begin
      checks++;
      if (fl != FLITS || pdst != bus_dst || pdst == 8'(ID) || pdst >= 8'(1 << LOG_D)) begin
        failures++; $display("bad packet: %0d flits to %0d", fl, pdst);
      end
      pkts++; fl = 0;
    end
  end

  fp16_t W [R][KC*EL];
  fp16_t X [MT][KC*EL];
  fp16_t U [MT][R];

  function automatic logic [MW-1:0] wline(input int l);
    int r, c, b;
    logic [MW-1:0] d;
    r = l / (KC * BEATS); c = (l / BEATS) % KC; b = l % BEATS;
    for (int e = 0; e < MW / 16; e++) d[16*e +: 16] = W[r][c*EL + b*(MW/16) + e];
    return d;
  endfunction

  task automatic host_write(input int a, input logic [MW-1:0] v);
    @(negedge clk); h_valid = 1; h_we = 1; h_addr = 32'(a); h_wdata = v;
    @(posedge clk); while (!h_ready) @(posedge clk);
    #1 h_valid = 0; h_we = 0;
  endtask
  task automatic host_read(input int a, output logic [MW-1:0] v);
    @(negedge clk); h_valid = 1; h_we = 0; h_addr = 32'(a);
    @(posedge clk); while (!h_ready) @(posedge clk);
    #1 h_valid = 0;
    while (!h_rsp_valid) @(posedge clk);
    v = h_rsp_data;
    @(posedge clk);
  endtask
  task automatic hb_write(input int a, input fp16_t v);
    @(negedge clk); hb_en = 1; hb_we = 1; hb_addr = EAW'(a); hb_wdata = v;
    @(negedge clk); hb_en = 0; hb_we = 0;
  endtask
  task automatic hb_read(input int a, output fp16_t v);
    @(negedge clk); hb_en = 1; hb_we = 0; hb_addr = EAW'(a);
    @(posedge clk); #1 v = hb_rdata;
    @(negedge clk); hb_en = 0;
  endtask
  task automatic relayout(input layout_e sl, input int sb, input layout_e dl, input int db);
    @(negedge clk);
    cmd_task = '{src_layout: sl, src_home: 8'(ID), src_base: 32'(sb), dst_layout: dl, dst_home: 8'(ID),
                 dst_base: 32'(db), n_lines: 24'(NLINES)};
    cmd_relayout = 1; cmd_valid = 1;
    @(posedge clk); while (!cmd_ready) @(posedge clk);
    #1 cmd_valid = 0;
    @(posedge clk); while (!relayout_done) @(posedge clk);
  endtask

  initial begin
    logic [MW-1:0] v, pk_data;
    logic [8+32+MW-1:0] pk;
    fp16_t h;
    cmd_valid = 0; cmd_relayout = 0; cmd_job = '0; cmd_task = '0;
    h_valid = 0; h_we = 0; h_addr = 0; h_wdata = 0;
    hb_en = 0; hb_we = 0; hb_addr = 0; hb_wdata = 0;
    in_valid = 0; in_sof = 0; in_flit = 0;
    for (int r = 0; r < R; r++) for (int k = 0; k < KC * EL; k++) W[r][k] = rand_fp16(11, 16);
    for (int t = 0; t < MT; t++) for (int k = 0; k < KC * EL; k++) X[t][k] = rand_fp16(11, 16);
    for (int t = 0; t < MT; t++) for (int r = 0; r < R; r++) U[t][r] = rand_fp16(12, 16);
    repeat (3) @(posedge clk);
    rst_n = 1;
    // 1
    for (int l = 0; l < NLINES; l++) host_write('h100 + l, wline(l));
    for (int l = 0; l < NLINES; l += 5) begin
      host_read('h100 + l, v);
      checks++;
      if (v !== wline(l)) begin failures++; $display("host read line %0d", l); end
    end
    // 2
    relayout(LAYOUT_LOCAL, 'h100, LAYOUT_LOCAL, 'h400);
    checks++;
    if (stat_rl_local != NLINES) begin failures++; $display("local copies %0d", stat_rl_local); end
    for (int l = 0; l < NLINES; l += 7) begin
      host_read('h400 + l, v);
      checks++;
      if (v !== wline(l)) begin failures++; $display("copied line %0d", l); end
    end
    // 3
    relayout(LAYOUT_LOCAL, 'h100, LAYOUT_STRIPED, 'h800);
    while (bus_req) @(posedge clk);   // the last packet may still be on the link
    @(posedge clk);
    checks += 2;
    if (stat_rl_sent != NLINES - NLINES / (1 << LOG_D) || pkts != int'(stat_rl_sent)) begin
      failures++; $display("sent %0d packets %0d", stat_rl_sent, pkts);
    end
    if (stat_rl_local != NLINES + NLINES / (1 << LOG_D)) begin failures++; $display("striped local copies"); end
    for (int l = ID; l < NLINES; l += (1 << LOG_D)) begin
      host_read('h800 + l / (1 << LOG_D), v);
      checks++;
      if (v !== wline(l)) begin failures++; $display("striped line %0d", l); end
    end
    // 4 incoming packet
    pk_data = {$urandom, $urandom};
    pk = {pk_data, 32'h0000_0c00, 8'(ID)};
    while (!rx_free) @(posedge clk);
    for (int f = 0; f < FLITS; f++) begin
      @(negedge clk); in_valid = 1; in_sof = (f == 0); in_flit = pk[8*f +: 8];
    end
    @(negedge clk); in_valid = 0; in_sof = 0;
    repeat (20) @(posedge clk);
    host_read('h0c00, v);
    checks += 2;
    if (v !== pk_data) begin failures++; $display("link packet not written"); end
    if (stat_rl_recv != 1) begin failures++; $display("recv count %0d", stat_rl_recv); end
    // 5 GEMV silu(W x) * u
    for (int t = 0; t < 3; t++) for (int k = 0; k < KC * EL; k++) hb_write(t * KC * EL + k, X[t][k]);
    for (int t = 0; t < 3; t++) for (int r = 0; r < R; r++) hb_write(12 * EL + t * EL + r, U[t][r]);
    @(negedge clk);
    cmd_job = '0;
    cmd_job.w_base = 32'h400; cmd_job.rows = 16'(R); cmd_job.k_chunks = 8'(KC); cmd_job.tokens = 9'd3;
    cmd_job.x_base = 0; cmd_job.y_base = 20'(12 * EL); cmd_job.y_stride = 20'(EL); cmd_job.mode = ACT_SILU_MUL;
    cmd_relayout = 0; cmd_valid = 1;
    @(posedge clk); while (!cmd_ready) @(posedge clk);
    #1 cmd_valid = 0;
    @(posedge clk); while (!gemv_done) @(posedge clk);
    for (int t = 0; t < 3; t++) for (int r = 0; r < R; r++) begin
      real s, ref_v, g;
      s = 0;
      for (int k = 0; k < KC * EL; k++) s += fp16_real(W[r][k]) * fp16_real(X[t][k]);
      ref_v = s / (1.0 + $exp(-s)) * fp16_real(U[t][r]);
      hb_read(12 * EL + t * EL + r, h);
      g = fp16_real(h);
      checks++;
      if (rabs(g - ref_v) > 6e-3 * rabs(ref_v) + 2e-3) begin
        failures++; $display("t%0d r%0d got %g exp %g", t, r, g, ref_v);
      end
    end
    checks++;
    if (stat_passes != R * KC * 3) begin failures++; $display("passes %0d", stat_passes); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
