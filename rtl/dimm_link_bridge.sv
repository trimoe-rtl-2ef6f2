// dimm_link_bridge: the DL bridge joining the DIMM-Link controllers of all DIMMs.
//
// The DIMMs share one byte-wide link medium. A controller that wants to send raises `req` with
// its destination; the bridge grants one sender at a time, round robin, and only when the
// destination reports a free receive buffer (so no packet is ever dropped and the link cannot
// deadlock). The owner's flits are broadcast to all DIMMs with a start-of-frame mark on the first
// flit; ownership ends with the owner's `last` flit, and the next grant can follow in the cycle
// after. One flit per cycle is moved.
// From the paper: the DL bridge and DIMM-Link CTL of the NDP drawing. This design's choices: a
// shared medium with round-robin arbitration and destination-free checking.
module dimm_link_bridge #(
  parameter int N = 16,
  parameter int LANES = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             req      [N],
  input  logic [7:0]       dst      [N],
  output logic             gnt      [N],
  input  logic             o_valid  [N],
  input  logic [LANES-1:0] o_flit   [N],
  input  logic             o_last   [N],
  input  logic             rx_free  [N],
  output logic             bus_valid,
  output logic             bus_sof,
  output logic [LANES-1:0] bus_flit
);
  localparam int IW = (N > 1) ? $clog2(N) : 1;
  logic          busy, first;
  logic [IW-1:0] owner, rr;

  // round-robin choice of a requester whose destination is free
  logic          pick_ok;
  logic [IW-1:0] pick;
  always_comb begin
    pick_ok = 1'b0;
    pick = '0;
    for (int k = N - 1; k >= 0; k--) begin
      if (req[(int'(rr) + k) % N] && int'(dst[(int'(rr) + k) % N]) < N
          && rx_free[dst[(int'(rr) + k) % N][IW-1:0]]) begin
        pick_ok = 1'b1;
        pick = IW'((int'(rr) + k) % N);
      end
    end
  end

  always_comb begin
    for (int i = 0; i < N; i++) gnt[i] = busy && (owner == IW'(i));
    bus_valid = busy && o_valid[owner];
    bus_flit = o_flit[owner];
    bus_sof = bus_valid && first;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      first <= 1'b0;
      owner <= '0;
      rr <= '0;
    end else if (!busy) begin
      if (pick_ok) begin
        busy <= 1'b1;
        first <= 1'b1;
        owner <= pick;
        rr <= pick + IW'(1);
      end
    end else begin
      if (bus_valid) first <= 1'b0;
      if (bus_valid && o_last[owner]) busy <= 1'b0;
    end
  end
endmodule
