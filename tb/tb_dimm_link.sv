// tb_dimm_link: four DIMM-Link controllers on one bridge (64-bit lines for speed). Every node
// sends random lines to random other nodes while receivers drain at random times. Each received
// {address, data} must match one sent to that node; at the end nothing may be missing. The link
// moves one flit per cycle, so the run cannot be shorter than packets x flits per packet.
module tb_dimm_link;
  import trimoe_pkg::*;
  localparam int N = 4, DW = 64, FLITS = 1 + 4 + DW / 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic tx_valid [N], tx_ready [N], rx_valid [N], rx_ready [N];
  logic [7:0] tx_dst [N];
  logic [ADDR_W-1:0] tx_addr [N], rx_addr [N];
  logic [DW-1:0] tx_data [N], rx_data [N];
  logic req [N], gnt [N], ov [N], ol [N], rf [N];
  logic [7:0] bd [N], of [N];
  logic bus_valid, bus_sof;
  logic [7:0] bus_flit;

  for (genvar i = 0; i < N; i++) begin : g_n
    dimm_link_ctl #(.DATA_W(DW)) u_ctl (
      .clk, .rst_n, .my_id(8'(i)),
      .tx_valid(tx_valid[i]), .tx_dst(tx_dst[i]), .tx_addr(tx_addr[i]), .tx_data(tx_data[i]), .tx_ready(tx_ready[i]),
      .rx_valid(rx_valid[i]), .rx_addr(rx_addr[i]), .rx_data(rx_data[i]), .rx_ready(rx_ready[i]),
      .bus_req(req[i]), .bus_dst(bd[i]), .bus_gnt(gnt[i]), .out_valid(ov[i]), .out_flit(of[i]), .out_last(ol[i]),
      .in_valid(bus_valid), .in_sof(bus_sof), .in_flit(bus_flit), .rx_free(rf[i])
    );
  end
  dimm_link_bridge #(.N(N)) u_br (
    .clk, .rst_n, .req, .dst(bd), .gnt, .o_valid(ov), .o_flit(of), .o_last(ol), .rx_free(rf),
    .bus_valid, .bus_sof, .bus_flit
  );

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [ADDR_W+DW-1:0] expq [N][$];
  int sent = 0, recvd = 0, busy_cyc = 0;
  always @(posedge clk) if (rst_n && bus_valid) busy_cyc++;

  // receivers
  always @(negedge clk) for (int i = 0; i < N; i++) rx_ready[i] = ($urandom % 4) == 0;
  always @(posedge clk) if (rst_n) for (int i = 0; i < N; i++) if (rx_valid[i] && rx_ready[i]) begin
    int k;
    k = -1;
    foreach (expq[i][j]) if (expq[i][j] == {rx_addr[i], rx_data[i]}) k = j;
    checks++; recvd++;
    if (k < 0) begin failures++; $display("node %0d got unexpected line %h", i, rx_addr[i]); end
    else expq[i].delete(k);
  end

  // senders
  for (genvar i = 0; i < N; i++) begin : g_s
    initial begin
      tx_valid[i] = 0; tx_dst[i] = 0; tx_addr[i] = 0; tx_data[i] = 0;
      wait (rst_n);
      for (int n = 0; n < 30; n++) begin
        int d;
        @(negedge clk);
        d = (i + 1 + int'($urandom % (N - 1))) % N;
        tx_valid[i] = 1; tx_dst[i] = 8'(d); tx_addr[i] = $urandom; tx_data[i] = {$urandom, $urandom};
        @(posedge clk); while (!tx_ready[i]) @(posedge clk);
        expq[d].push_back({tx_addr[i], tx_data[i]}); sent++;
        #1 tx_valid[i] = 0;
      end
    end
  end

  initial begin
    int t0;
    repeat (3) @(posedge clk);
    rst_n = 1; t0 = cyc;
    wait (sent == N * 30);
    while (recvd < sent && cyc < 30000) @(posedge clk);
    repeat (5) @(posedge clk);
    for (int i = 0; i < N; i++) begin
      checks++;
      if (expq[i].size() != 0) begin failures++; $display("node %0d missing %0d lines", i, expq[i].size()); end
    end
    checks++;
    if (busy_cyc != sent * FLITS) begin failures++; $display("link carried %0d flits for %0d packets", busy_cyc, sent); end
    checks++;
    if (cyc - t0 < sent * FLITS) begin failures++; $display("faster than the link rate"); end
    $display("%0d packets in %0d cycles (%0d flits each)", sent, cyc - t0, FLITS);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
