// tb_ndp_relayout_unit: four DIMMs, each with a relayout unit, a DIMM-Link controller and a DRAM
// model, joined by the bridge (64-bit lines). One expert of 13 lines is taken through
//   1 striped -> localized on DIMM 2 (relayout),
//   2 localized on DIMM 2 -> localized on DIMM 0 (cold-expert migration),
//   3 localized on DIMM 0 -> striped (relayout back),
// and after each task every destination line is compared with the original data. Local copies
// and link transfers must both occur and the counts must match the layouts.
module tb_ndp_relayout_unit;
  import trimoe_pkg::*;
  localparam int N = 4, LOGD = 2, DW = 64, NL = 13;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic task_valid;
  relayout_task_t tsk;
  logic tready [N], tdone [N];
  logic req [N], gnt [N], ov [N], ol [N], rf [N];
  logic [7:0] bd [N], of [N];
  logic bus_valid, bus_sof;
  logic [7:0] bus_flit;
  logic [31:0] s_local [N], s_sent [N], s_recv [N];

  for (genvar i = 0; i < N; i++) begin : g_d
    logic mv, mw, mr, rv, ltv, ltr, lrv, lrr;
    logic [31:0] ma, lta, lra;
    logic [DW-1:0] md, rd, ltd, lrd;
    logic [7:0] ltdst;
    ndp_relayout_unit #(.LOG_D(LOGD), .DATA_W(DW)) u_rl (
      .clk, .rst_n, .my_id(8'(i)), .task_valid, .task_in(tsk), .task_ready(tready[i]), .done(tdone[i]),
      .mreq_valid(mv), .mreq_we(mw), .mreq_addr(ma), .mreq_wdata(md), .mreq_ready(mr),
      .mrsp_valid(rv), .mrsp_data(rd),
      .lt_valid(ltv), .lt_dst(ltdst), .lt_addr(lta), .lt_data(ltd), .lt_ready(ltr),
      .lr_valid(lrv), .lr_addr(lra), .lr_data(lrd), .lr_ready(lrr),
      .stat_local(s_local[i]), .stat_sent(s_sent[i]), .stat_recv(s_recv[i])
    );
    dram_model #(.DATA_W(DW), .LAT(6)) u_mem (
      .clk, .req_valid(mv), .req_we(mw), .req_addr(ma), .req_wdata(md), .req_ready(mr),
      .rsp_valid(rv), .rsp_data(rd)
    );
    dimm_link_ctl #(.DATA_W(DW)) u_lk (
      .clk, .rst_n, .my_id(8'(i)),
      .tx_valid(ltv), .tx_dst(ltdst), .tx_addr(lta), .tx_data(ltd), .tx_ready(ltr),
      .rx_valid(lrv), .rx_addr(lra), .rx_data(lrd), .rx_ready(lrr),
      .bus_req(req[i]), .bus_dst(bd[i]), .bus_gnt(gnt[i]), .out_valid(ov[i]), .out_flit(of[i]), .out_last(ol[i]),
      .in_valid(bus_valid), .in_sof(bus_sof), .in_flit(bus_flit), .rx_free(rf[i])
    );
  end
  dimm_link_bridge #(.N(N)) u_br (
    .clk, .rst_n, .req, .dst(bd), .gnt, .o_valid(ov), .o_flit(of), .o_last(ol), .rx_free(rf),
    .bus_valid, .bus_sof, .bus_flit
  );

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [DW-1:0] orig [NL];

  function automatic logic [DW-1:0] peek(input int d, input int a);
    case (d)
      0: return g_d[0].u_mem.mem.exists(a) ? g_d[0].u_mem.mem[a] : '0;
      1: return g_d[1].u_mem.mem.exists(a) ? g_d[1].u_mem.mem[a] : '0;
      2: return g_d[2].u_mem.mem.exists(a) ? g_d[2].u_mem.mem[a] : '0;
      default: return g_d[3].u_mem.mem.exists(a) ? g_d[3].u_mem.mem[a] : '0;
    endcase
  endfunction

  task automatic run(input layout_e sl, input int sh, input int sb, input layout_e dl, input int dh, input int db);
    int ndone;
    @(negedge clk);
    tsk = '{src_layout: sl, src_home: 8'(sh), src_base: 32'(sb), dst_layout: dl, dst_home: 8'(dh),
            dst_base: 32'(db), n_lines: 24'(NL)};
    task_valid = 1;
    @(negedge clk) task_valid = 0;
    ndone = 0;
    while (ndone < N) begin
      @(posedge clk);
      for (int i = 0; i < N; i++) if (tdone[i]) ndone++;
    end
    repeat (2) @(posedge clk);
    for (int i = 0; i < NL; i++) begin
      int d, a;
      d = (dl == LAYOUT_LOCAL) ? dh : i % N;
      a = (dl == LAYOUT_LOCAL) ? db + i : db + i / N;
      checks++;
      if (peek(d, a) != orig[i]) begin failures++; $display("line %0d wrong on DIMM %0d", i, d); end
    end
  endtask

  initial begin
    int tl, ts, tr;
    task_valid = 0; tsk = '0;
    for (int i = 0; i < NL; i++) begin
      orig[i] = {$urandom, $urandom};
      case (i % N)
        0: g_d[0].u_mem.mem[32'h100 + i / N] = orig[i];
        1: g_d[1].u_mem.mem[32'h100 + i / N] = orig[i];
        2: g_d[2].u_mem.mem[32'h100 + i / N] = orig[i];
        default: g_d[3].u_mem.mem[32'h100 + i / N] = orig[i];
      endcase
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(LAYOUT_STRIPED, 0, 'h100, LAYOUT_LOCAL, 2, 'h400);
    run(LAYOUT_LOCAL, 2, 'h400, LAYOUT_LOCAL, 0, 'h800);
    run(LAYOUT_LOCAL, 0, 'h800, LAYOUT_STRIPED, 0, 'h200);
    tl = 0; ts = 0; tr = 0;
    for (int i = 0; i < N; i++) begin tl += s_local[i]; ts += s_sent[i]; tr += s_recv[i]; end
    // task 1: lines i%4==2 stay local (3), 10 sent; task 2: 13 sent; task 3: lines i%4==0 local (4), 9 sent
    checks += 3;
    if (tl != 7) begin failures++; $display("local copies %0d", tl); end
    if (ts != 32) begin failures++; $display("link transfers %0d", ts); end
    if (tr != ts) begin failures++; $display("received %0d", tr); end
    $display("local %0d sent %0d received %0d", tl, ts, tr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
