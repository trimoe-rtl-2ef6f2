// trimoe_ndp_system: the near-data side of a GPU-CPU-NDP MoE offloading system.
//
// NUM_DIMMS = 16 DIMMs each carry an NDP buffer chip (ndp_buffer_chip); their DIMM-Link
// controllers share one DL bridge for host-free line transfers between DIMMs. The host runtime
// (scheduler and expert load predictor on the CPU), the GPU, the AMX CPU cores and the DRAM
// devices are outside: each DIMM's host command, host memory, activation buffer and DRAM ports are
// brought out as arrays indexed by DIMM. Cold experts whose weights are localized on a DIMM run
// on that DIMM's GEMV unit; relayout and migration tasks are broadcast by the host to all DIMMs
// with `rl_valid` (accepted when `rl_ready`, i.e. every relayout unit is idle).
// From the paper: 16 DIMM-NDPs joined by DIMM-Link, each with GEMV & Act unit, Relayout Unit,
// Local CTL and DIMM-Link CTL. This design's choices: the port grouping and the broadcast of tasks.
module trimoe_ndp_system
  import trimoe_pkg::*;
#(
  parameter int NUM_DIMMS = 16,
  parameter int NUM_MULT  = 256,
  parameter int MEM_W     = 1024,
  parameter int MAX_TOK   = 256,
  parameter int BUF_BYTES = 262144,
  localparam int LOG_D    = $clog2(NUM_DIMMS),
  localparam int ELEM_AW  = $clog2(BUF_BYTES / 2)
) (
  input  logic               clk,
  input  logic               rst_n,
  // per-DIMM GEMV jobs
  input  logic               job_valid    [NUM_DIMMS],
  input  gemv_job_t          job          [NUM_DIMMS],
  output logic               job_ready    [NUM_DIMMS],
  output logic               gemv_done    [NUM_DIMMS],
  // relayout / migration task, broadcast
  input  logic               rl_valid,
  input  relayout_task_t     rl_task,
  output logic               rl_ready,
  output logic               rl_done,
  // host memory access per DIMM
  input  logic               h_valid      [NUM_DIMMS],
  input  logic               h_we         [NUM_DIMMS],
  input  logic [ADDR_W-1:0]  h_addr       [NUM_DIMMS],
  input  logic [MEM_W-1:0]   h_wdata      [NUM_DIMMS],
  output logic               h_ready      [NUM_DIMMS],
  output logic               h_rsp_valid  [NUM_DIMMS],
  output logic [MEM_W-1:0]   h_rsp_data   [NUM_DIMMS],
  // activation buffer access per DIMM
  input  logic               hb_en        [NUM_DIMMS],
  input  logic               hb_we        [NUM_DIMMS],
  input  logic [ELEM_AW-1:0] hb_addr      [NUM_DIMMS],
  input  fp16_t              hb_wdata     [NUM_DIMMS],
  output fp16_t              hb_rdata     [NUM_DIMMS],
  output logic               hb_ready     [NUM_DIMMS],
  // DRAM devices per DIMM
  output logic               d_valid      [NUM_DIMMS],
  output logic               d_we         [NUM_DIMMS],
  output logic [ADDR_W-1:0]  d_addr       [NUM_DIMMS],
  output logic [MEM_W-1:0]   d_wdata      [NUM_DIMMS],
  input  logic               d_ready      [NUM_DIMMS],
  input  logic               d_rsp_valid  [NUM_DIMMS],
  input  logic [MEM_W-1:0]   d_rsp_data   [NUM_DIMMS],
  // statistics per DIMM
  output logic [31:0]        stat_w_stall [NUM_DIMMS],
  output logic [31:0]        stat_passes  [NUM_DIMMS],
  output logic [31:0]        stat_host_block [NUM_DIMMS],
  output logic [31:0]        stat_rl_local [NUM_DIMMS],
  output logic [31:0]        stat_rl_sent [NUM_DIMMS],
  output logic [31:0]        stat_rl_recv [NUM_DIMMS]
);
  logic       bus_req [NUM_DIMMS], bus_gnt [NUM_DIMMS], o_valid [NUM_DIMMS], o_last [NUM_DIMMS];
  logic       rx_free [NUM_DIMMS], cmd_ready [NUM_DIMMS], rl_dn [NUM_DIMMS];
  logic [7:0] bus_dst [NUM_DIMMS], o_flit [NUM_DIMMS];
  logic       bus_valid, bus_sof;
  logic [7:0] bus_flit;
  logic [NUM_DIMMS-1:0] rl_rdy_v, rl_done_v, rl_pend;

  // a relayout task is accepted when every DIMM can take it; done when every DIMM has finished
  for (genvar i = 0; i < NUM_DIMMS; i++) begin : g_rdy
    assign rl_rdy_v[i] = cmd_ready[i] || !rl_valid;
    assign rl_done_v[i] = rl_dn[i];
  end
  assign rl_ready = &rl_rdy_v;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rl_pend <= '0;
      rl_done <= 1'b0;
    end else begin
      rl_done <= 1'b0;
      if (rl_valid && rl_ready) rl_pend <= '1;
      else begin
        rl_pend <= rl_pend & ~rl_done_v;
        if (rl_pend != '0 && (rl_pend & ~rl_done_v) == '0) rl_done <= 1'b1;
      end
    end
  end

  for (genvar i = 0; i < NUM_DIMMS; i++) begin : g_dimm
    wire use_rl = rl_valid;
    ndp_buffer_chip #(
      .NUM_MULT(NUM_MULT), .MEM_W(MEM_W), .MAX_TOK(MAX_TOK), .BUF_BYTES(BUF_BYTES), .LOG_D(LOG_D)
    ) u_chip (
      .clk, .rst_n, .my_id(8'(i)),
      .cmd_valid(use_rl ? rl_ready : job_valid[i]), .cmd_relayout(use_rl), .cmd_job(job[i]),
      .cmd_task(rl_task), .cmd_ready(cmd_ready[i]),
      .h_valid(h_valid[i]), .h_we(h_we[i]), .h_addr(h_addr[i]), .h_wdata(h_wdata[i]),
      .h_ready(h_ready[i]), .h_rsp_valid(h_rsp_valid[i]), .h_rsp_data(h_rsp_data[i]),
      .hb_en(hb_en[i]), .hb_we(hb_we[i]), .hb_addr(hb_addr[i]), .hb_wdata(hb_wdata[i]),
      .hb_rdata(hb_rdata[i]), .hb_ready(hb_ready[i]),
      .gemv_done(gemv_done[i]), .relayout_done(rl_dn[i]),
      .d_valid(d_valid[i]), .d_we(d_we[i]), .d_addr(d_addr[i]), .d_wdata(d_wdata[i]),
      .d_ready(d_ready[i]), .d_rsp_valid(d_rsp_valid[i]), .d_rsp_data(d_rsp_data[i]),
      .bus_req(bus_req[i]), .bus_dst(bus_dst[i]), .bus_gnt(bus_gnt[i]),
      .out_valid(o_valid[i]), .out_flit(o_flit[i]), .out_last(o_last[i]),
      .in_valid(bus_valid), .in_sof(bus_sof), .in_flit(bus_flit), .rx_free(rx_free[i]),
      .stat_w_stall(stat_w_stall[i]), .stat_passes(stat_passes[i]), .stat_host_block(stat_host_block[i]),
      .stat_rl_local(stat_rl_local[i]), .stat_rl_sent(stat_rl_sent[i]), .stat_rl_recv(stat_rl_recv[i])
    );
    assign job_ready[i] = !rl_valid && cmd_ready[i];
  end

  dimm_link_bridge #(.N(NUM_DIMMS), .LANES(8)) u_bridge (
    .clk, .rst_n, .req(bus_req), .dst(bus_dst), .gnt(bus_gnt), .o_valid, .o_flit, .o_last,
    .rx_free, .bus_valid, .bus_sof, .bus_flit
  );
endmodule
