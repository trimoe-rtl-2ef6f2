// ndp_local_ctl: Local CTL of one buffer chip: command decode and DRAM access arbitration.
//
// The DRAM devices of the DIMM are shared by three requesters:
//   host   regular CPU/GPU reads and writes passing through the buffer chip (highest priority, so
//          NDP work never delays normal memory traffic),
//   GEMV   weight reads for the running NDP job (a fetch engine walks w_base .. w_base + lines-1),
//   relay  the Relayout Unit's reads and writes (background, lowest priority).
// One request is granted per cycle when the DRAM port is ready. Read data return in request
// order; an owner FIFO records who issued each outstanding read and routes the data back. Weight
// data go through a WQ-deep FIFO to the GEMV unit; the fetch engine only issues a read when the
// FIFO has room for it counting all reads in flight, so the FIFO never overflows.
// Host commands (`cmd_*`) start a GEMV job (sent to the GEMV unit, plus the weight fetch) or a
// relayout task. `stat_host_block` counts cycles in which an NDP request waited for host traffic.
// From the paper: a Local CTL between the DQ/CA buffer and the NDP, and the requirement that NDP
// access stay compatible with normal host access. This design's choices: fixed priorities, the
// owner FIFO and the credit rule.
module ndp_local_ctl
  import trimoe_pkg::*;
#(
  parameter int MEM_W = 1024,
  parameter int BEATS = 32,       // weight lines per chunk
  parameter int WQ = 16,
  parameter int OQ = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  // host commands
  input  logic              cmd_valid,
  input  logic              cmd_relayout,   // 0: GEMV job, 1: relayout task
  input  gemv_job_t         cmd_job,
  input  relayout_task_t    cmd_task,
  output logic              cmd_ready,
  // host memory access
  input  logic              h_valid,
  input  logic              h_we,
  input  logic [ADDR_W-1:0] h_addr,
  input  logic [MEM_W-1:0]  h_wdata,
  output logic              h_ready,
  output logic              h_rsp_valid,
  output logic [MEM_W-1:0]  h_rsp_data,
  // GEMV unit
  output logic              g_job_valid,
  output gemv_job_t         g_job,
  input  logic              g_job_ready,
  output logic              w_valid,
  output logic [MEM_W-1:0]  w_data,
  input  logic              w_ready,
  // relayout unit
  output logic              r_task_valid,
  output relayout_task_t    r_task,
  input  logic              r_task_ready,
  input  logic              r_valid,
  input  logic              r_we,
  input  logic [ADDR_W-1:0] r_addr,
  input  logic [MEM_W-1:0]  r_wdata,
  output logic              r_ready,
  output logic              r_rsp_valid,
  output logic [MEM_W-1:0]  r_rsp_data,
  // DRAM port
  output logic              d_valid,
  output logic              d_we,
  output logic [ADDR_W-1:0] d_addr,
  output logic [MEM_W-1:0]  d_wdata,
  input  logic              d_ready,
  input  logic              d_rsp_valid,
  input  logic [MEM_W-1:0]  d_rsp_data,
  output logic [31:0]       stat_host_block
);
  localparam int WQ_AW = $clog2(WQ);
  localparam int OQ_AW = $clog2(OQ);

  // ---------------------------------------------------------------- commands
  assign g_job = cmd_job;
  assign r_task = cmd_task;
  logic        wf_active;
  logic [ADDR_W-1:0] wf_addr;
  logic [31:0] wf_left;
  assign g_job_valid = cmd_valid && !cmd_relayout && !wf_active;
  assign r_task_valid = cmd_valid && cmd_relayout;
  assign cmd_ready = cmd_relayout ? r_task_ready : (g_job_ready && !wf_active);

  // ---------------------------------------------------------------- weight FIFO and credits
  logic [MEM_W-1:0] wq [WQ];
  logic [WQ_AW:0]   wq_cnt;
  logic [WQ_AW-1:0] wq_rd, wq_wr;
  logic [WQ_AW:0]   w_inflight;
  assign w_valid = (wq_cnt != '0);
  assign w_data = wq[wq_rd];
  wire wf_req = wf_active && (wf_left != 0) && (32'(wq_cnt) + 32'(w_inflight) < WQ);

  // ---------------------------------------------------------------- owner FIFO
  mem_owner_e       oq [OQ];
  logic [OQ_AW:0]   oq_cnt;
  logic [OQ_AW-1:0] oq_rd, oq_wr;
  wire oq_full = (oq_cnt == (OQ_AW+1)'(OQ));

  // ---------------------------------------------------------------- arbitration
  wire host_go  = h_valid && (h_we || !oq_full);
  wire gemv_go  = !h_valid && wf_req && !oq_full;
  wire relay_go = !h_valid && !wf_req && r_valid && (r_we || !oq_full);
  assign h_ready = d_ready && host_go;
  assign r_ready = d_ready && relay_go;

  always_comb begin
    d_valid = host_go || gemv_go || relay_go;
    d_we = 1'b0;
    d_addr = '0;
    d_wdata = '0;
    if (host_go) begin
      d_we = h_we; d_addr = h_addr; d_wdata = h_wdata;
    end else if (gemv_go) begin
      d_addr = wf_addr;
    end else if (relay_go) begin
      d_we = r_we; d_addr = r_addr; d_wdata = r_wdata;
    end
  end

  wire issue_rd = d_valid && d_ready && !d_we;
  mem_owner_e issue_owner;
  assign issue_owner = host_go ? OWNER_HOST : (gemv_go ? OWNER_GEMV : OWNER_RELAY);
  mem_owner_e rsp_owner;
  assign rsp_owner = oq[oq_rd];

  assign h_rsp_valid = d_rsp_valid && rsp_owner == OWNER_HOST;
  assign h_rsp_data = d_rsp_data;
  assign r_rsp_valid = d_rsp_valid && rsp_owner == OWNER_RELAY;
  assign r_rsp_data = d_rsp_data;
  wire w_push = d_rsp_valid && rsp_owner == OWNER_GEMV;
  wire w_pop = w_valid && w_ready;

  always_ff @(posedge clk) begin
    if (w_push) wq[wq_wr] <= d_rsp_data;
    if (issue_rd) oq[oq_wr] <= issue_owner;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wf_active <= 1'b0; wf_addr <= '0; wf_left <= '0;
      wq_cnt <= '0; wq_rd <= '0; wq_wr <= '0; w_inflight <= '0;
      oq_cnt <= '0; oq_rd <= '0; oq_wr <= '0;
      stat_host_block <= '0;
    end else begin
      if (g_job_valid && g_job_ready) begin
        wf_active <= 1'b1;
        wf_addr <= cmd_job.w_base;
        wf_left <= 32'(cmd_job.rows) * 32'(cmd_job.k_chunks) * 32'(BEATS);
      end else if (gemv_go && d_ready) begin
        wf_addr <= wf_addr + ADDR_W'(1);
        wf_left <= wf_left - 32'd1;
      end else if (wf_active && wf_left == 0) wf_active <= 1'b0;
      if (h_valid && (wf_req || r_valid)) stat_host_block <= stat_host_block + 32'd1;
      // weight FIFO
      if (w_push) wq_wr <= wq_wr + WQ_AW'(1);
      if (w_pop) wq_rd <= wq_rd + WQ_AW'(1);
      wq_cnt <= wq_cnt + (w_push ? 1 : 0) - (w_pop ? 1 : 0);
      w_inflight <= w_inflight + ((gemv_go && d_ready) ? 1 : 0) - (w_push ? 1 : 0);
      // owner FIFO
      if (issue_rd) oq_wr <= oq_wr + OQ_AW'(1);
      if (d_rsp_valid) oq_rd <= oq_rd + OQ_AW'(1);
      oq_cnt <= oq_cnt + (issue_rd ? 1 : 0) - (d_rsp_valid ? 1 : 0);
    end
  end

  always_ff @(posedge clk) if (rst_n) begin
    assert (!(w_push && wq_cnt == (WQ_AW+1)'(WQ) && !w_pop)) else $error("weight FIFO overflow");
    assert (!(d_rsp_valid && oq_cnt == '0)) else $error("read data without a request");
  end
endmodule
