// tb_ndp_local_ctl: the Local CTL with a DRAM model (64-bit lines, line a holds {~a, a}).
// A GEMV command must produce the weight stream w_base .. w_base + rows*chunks*BEATS - 1 in order
// while the consumer stalls at random; at the same time the host reads random lines and a
// relayout requester reads and writes lines. All returned data are checked, host traffic must
// have delayed NDP requests at least once (host priority), and the relayout writes must land.
module tb_ndp_local_ctl;
  import trimoe_pkg::*;
  localparam int MW = 64, BEATS = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cmd_valid, cmd_relayout, cmd_ready, h_valid, h_we, h_ready, h_rsp_valid;
  gemv_job_t cmd_job, g_job;
  relayout_task_t cmd_task, r_task;
  logic [31:0] h_addr, r_addr, d_addr, stat_host_block;
  logic [MW-1:0] h_wdata, h_rsp_data, w_data, r_wdata, r_rsp_data, d_wdata, d_rsp_data;
  logic g_job_valid, g_job_ready, w_valid, w_ready, r_task_valid, r_task_ready;
  logic r_valid, r_we, r_ready, r_rsp_valid, d_valid, d_we, d_ready, d_rsp_valid;

  ndp_local_ctl #(.MEM_W(MW), .BEATS(BEATS), .WQ(8), .OQ(16)) dut (.*);
  dram_model #(.DATA_W(MW), .LAT(12)) u_mem (
    .clk, .req_valid(d_valid), .req_we(d_we), .req_addr(d_addr), .req_wdata(d_wdata),
    .req_ready(d_ready), .rsp_valid(d_rsp_valid), .rsp_data(d_rsp_data)
  );

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [MW-1:0] pat(input int a);
    return {~32'(a), 32'(a)};
  endfunction

  // weight consumer
  int wexp, wgot;
  always @(negedge clk) w_ready = ($urandom % 3) != 0;
  always @(posedge clk) if (rst_n && w_valid && w_ready) begin
    checks++;
    if (w_data != pat(wexp)) begin failures++; $display("weight %0d wrong", wexp); end
    wexp++; wgot++;
  end
  assign g_job_ready = 1'b1;
  assign r_task_ready = 1'b1;

  // host and relayout responses
  int hq[$], rq[$];
  always @(posedge clk) if (rst_n) begin
    if (h_rsp_valid) begin
      checks++;
      if (h_rsp_data != pat(hq.pop_front())) begin failures++; $display("host data wrong"); end
    end
    if (r_rsp_valid) begin
      checks++;
      if (r_rsp_data != pat(rq.pop_front())) begin failures++; $display("relayout data wrong"); end
    end
  end

  initial begin
    cmd_valid = 0; cmd_relayout = 0; cmd_job = '0; cmd_task = '0;
    h_valid = 0; h_we = 0; h_addr = 0; h_wdata = 0;
    r_valid = 0; r_we = 0; r_addr = 0; r_wdata = 0;
    for (int a = 0; a < 4096; a++) u_mem.mem[a] = pat(a);
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    cmd_job.w_base = 32'd1000; cmd_job.rows = 16'd5; cmd_job.k_chunks = 8'd3;
    wexp = 1000; wgot = 0;
    cmd_valid = 1;
    @(posedge clk); #1 cmd_valid = 0;
    fork
      for (int n = 0; n < 60; n++) begin
        @(negedge clk);
        h_valid = ($urandom % 2) == 0; h_we = 0; h_addr = $urandom % 4096;
        @(posedge clk);
        if (h_valid && h_ready) hq.push_back(int'(h_addr));
        #1 h_valid = 0;
      end
      for (int n = 0; n < 40; n++) begin
        @(negedge clk);
        r_valid = 1; r_we = (n % 4 == 3); r_addr = r_we ? 32'(3000 + n) : $urandom % 1000; r_wdata = pat(7000 + n);
        @(posedge clk); while (!r_ready) @(posedge clk);
        if (!r_we) rq.push_back(int'(r_addr));
        #1 r_valid = 0;
      end
    join
    repeat (400) @(posedge clk);
    checks++;
    if (wgot != 5 * 3 * BEATS) begin failures++; $display("weights received %0d", wgot); end
    checks++;
    if (stat_host_block == 0) begin failures++; $display("host never took priority"); end
    for (int n = 3; n < 40; n += 4) begin
      checks++;
      if (u_mem.mem[3000 + n] != pat(7000 + n)) begin failures++; $display("relayout write lost"); end
    end
    checks++;
    if (hq.size() != 0 || rq.size() != 0) begin failures++; $display("responses missing"); end
    $display("host-priority cycles %0d", stat_host_block);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
