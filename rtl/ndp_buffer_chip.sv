// ndp_buffer_chip: the DIMM-NDP logic on one DIMM's buffer chip.
//
// It sits between the host memory channel and the DIMM's DRAM devices and contains
//   Local CTL       command decode and DRAM arbitration (host first, then NDP weights, then relayout),
//   GEMV & Act unit 256 bit-serial multipliers, adder tree, accumulators, SiLU, 256 KB buffer,
//   Relayout Unit   striped/localized conversion and migration of expert weights,
//   DIMM-Link CTL   packet interface to the other DIMMs through the DL bridge.
// The host drives commands (`cmd_*`), ordinary memory accesses (`h_*`) and the activation buffer
// (`hb_*`, while the GEMV unit is idle). The DRAM devices are outside (`d_*` port, one line of
// MEM_W bits per beat, in-order read data). `gemv_done`/`relayout_done` pulse when work finishes.
// From the paper: the block set of the buffer-chip drawing (Local CTL, GEMV & Act unit, Relayout
// Unit, DIMM-Link CTL). The DQ/CA buffer re-drive and the DRAM devices are not modelled here.
module ndp_buffer_chip
  import trimoe_pkg::*;
#(
  parameter int NUM_MULT  = 256,
  parameter int MEM_W     = 1024,
  parameter int MAX_TOK   = 256,
  parameter int BUF_BYTES = 262144,
  parameter int LOG_D     = 4,
  localparam int ELEMS    = NUM_MULT * 8,
  localparam int ELEM_AW  = $clog2(BUF_BYTES / 2)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [7:0]         my_id,
  // host
  input  logic               cmd_valid,
  input  logic               cmd_relayout,
  input  gemv_job_t          cmd_job,
  input  relayout_task_t     cmd_task,
  output logic               cmd_ready,
  input  logic               h_valid,
  input  logic               h_we,
  input  logic [ADDR_W-1:0]  h_addr,
  input  logic [MEM_W-1:0]   h_wdata,
  output logic               h_ready,
  output logic               h_rsp_valid,
  output logic [MEM_W-1:0]   h_rsp_data,
  input  logic               hb_en,
  input  logic               hb_we,
  input  logic [ELEM_AW-1:0] hb_addr,
  input  fp16_t              hb_wdata,
  output fp16_t              hb_rdata,
  output logic               hb_ready,
  output logic               gemv_done,
  output logic               relayout_done,
  // DRAM devices
  output logic               d_valid,
  output logic               d_we,
  output logic [ADDR_W-1:0]  d_addr,
  output logic [MEM_W-1:0]   d_wdata,
  input  logic               d_ready,
  input  logic               d_rsp_valid,
  input  logic [MEM_W-1:0]   d_rsp_data,
  // DL bridge
  output logic               bus_req,
  output logic [7:0]         bus_dst,
  input  logic               bus_gnt,
  output logic               out_valid,
  output logic [7:0]         out_flit,
  output logic               out_last,
  input  logic               in_valid,
  input  logic               in_sof,
  input  logic [7:0]         in_flit,
  output logic               rx_free,
  // statistics
  output logic [31:0]        stat_w_stall,
  output logic [31:0]        stat_passes,
  output logic [31:0]        stat_host_block,
  output logic [31:0]        stat_rl_local,
  output logic [31:0]        stat_rl_sent,
  output logic [31:0]        stat_rl_recv
);
  localparam int BEATS = ELEMS * 16 / MEM_W;

  logic g_job_valid, g_job_ready, w_valid, w_ready;
  gemv_job_t g_job;
  logic [MEM_W-1:0] w_data;
  logic r_task_valid, r_task_ready, r_valid, r_we, r_ready, r_rsp_valid;
  relayout_task_t r_task;
  logic [ADDR_W-1:0] r_addr;
  logic [MEM_W-1:0] r_wdata, r_rsp_data;
  logic lt_valid, lt_ready, lr_valid, lr_ready;
  logic [7:0] lt_dst;
  logic [ADDR_W-1:0] lt_addr, lr_addr;
  logic [MEM_W-1:0] lt_data, lr_data;

  ndp_local_ctl #(.MEM_W(MEM_W), .BEATS(BEATS)) u_ctl (
    .clk, .rst_n,
    .cmd_valid, .cmd_relayout, .cmd_job, .cmd_task, .cmd_ready,
    .h_valid, .h_we, .h_addr, .h_wdata, .h_ready, .h_rsp_valid, .h_rsp_data,
    .g_job_valid, .g_job, .g_job_ready, .w_valid, .w_data, .w_ready,
    .r_task_valid, .r_task, .r_task_ready, .r_valid, .r_we, .r_addr, .r_wdata, .r_ready,
    .r_rsp_valid, .r_rsp_data,
    .d_valid, .d_we, .d_addr, .d_wdata, .d_ready, .d_rsp_valid, .d_rsp_data,
    .stat_host_block
  );

  ndp_gemv_unit #(.NUM_MULT(NUM_MULT), .MEM_W(MEM_W), .MAX_TOK(MAX_TOK), .BUF_BYTES(BUF_BYTES)) u_gemv (
    .clk, .rst_n,
    .job_valid(g_job_valid), .job(g_job), .job_ready(g_job_ready), .done(gemv_done),
    .w_valid, .w_data, .w_ready,
    .hb_en, .hb_we, .hb_addr, .hb_wdata, .hb_rdata, .hb_ready,
    .stat_w_stall, .stat_passes
  );

  ndp_relayout_unit #(.LOG_D(LOG_D), .DATA_W(MEM_W)) u_rl (
    .clk, .rst_n, .my_id,
    .task_valid(r_task_valid), .task_in(r_task), .task_ready(r_task_ready), .done(relayout_done),
    .mreq_valid(r_valid), .mreq_we(r_we), .mreq_addr(r_addr), .mreq_wdata(r_wdata), .mreq_ready(r_ready),
    .mrsp_valid(r_rsp_valid), .mrsp_data(r_rsp_data),
    .lt_valid, .lt_dst, .lt_addr, .lt_data, .lt_ready,
    .lr_valid, .lr_addr, .lr_data, .lr_ready,
    .stat_local(stat_rl_local), .stat_sent(stat_rl_sent), .stat_recv(stat_rl_recv)
  );

  dimm_link_ctl #(.DATA_W(MEM_W)) u_link (
    .clk, .rst_n, .my_id,
    .tx_valid(lt_valid), .tx_dst(lt_dst), .tx_addr(lt_addr), .tx_data(lt_data), .tx_ready(lt_ready),
    .rx_valid(lr_valid), .rx_addr(lr_addr), .rx_data(lr_data), .rx_ready(lr_ready),
    .bus_req, .bus_dst, .bus_gnt, .out_valid, .out_flit, .out_last,
    .in_valid, .in_sof, .in_flit, .rx_free
  );
endmodule
