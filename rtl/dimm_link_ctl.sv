// dimm_link_ctl: DIMM-Link controller of one buffer chip.
//
// DIMM-Link is the host-free link between DIMMs used for relayout and migration traffic. This
// controller turns one DRAM line transfer {destination DIMM, destination line address, data}
// into a packet of byte-wide flits, one flit per cycle on the 8 link lanes:
//   flit 0: destination id, flits 1..4: address (LSB first), then DATA_W/8 data bytes (LSB first).
// Transmit: a request (`tx_valid`, taken when `tx_ready`) is held in a shift register, the bus is
// requested from the bridge with the destination id, and after `bus_gnt` the flits are sent with
// `out_last` on the final one. Receive: the controller watches the bridge broadcast; a packet whose
// first flit carries its own id is collected and offered at `rx_*` until the chip takes it.
// `rx_free` tells the bridge that a new packet may be sent to this DIMM.
// From the paper: DIMM-Link, 8 lanes, 25 GB/s per link, host-free cross-DIMM transfers. This
// design's choices: the packet format, one byte per cycle of the link clock, one receive buffer.
module dimm_link_ctl
  import trimoe_pkg::*;
#(
  parameter int DATA_W = 1024,
  parameter int LANES = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [7:0]        my_id,
  // local transmit request
  input  logic              tx_valid,
  input  logic [7:0]        tx_dst,
  input  logic [ADDR_W-1:0] tx_addr,
  input  logic [DATA_W-1:0] tx_data,
  output logic              tx_ready,
  // local receive
  output logic              rx_valid,
  output logic [ADDR_W-1:0] rx_addr,
  output logic [DATA_W-1:0] rx_data,
  input  logic              rx_ready,
  // bridge side
  output logic              bus_req,
  output logic [7:0]        bus_dst,
  input  logic              bus_gnt,
  output logic              out_valid,
  output logic [LANES-1:0]  out_flit,
  output logic              out_last,
  input  logic              in_valid,
  input  logic              in_sof,
  input  logic [LANES-1:0]  in_flit,
  output logic              rx_free
);
  localparam int PK_W = 8 + ADDR_W + DATA_W;
  localparam int FLITS = PK_W / LANES;
  localparam int FI_W = $clog2(FLITS + 1);

  initial assert (LANES == 8 && PK_W % LANES == 0) else $error("byte-wide flits expected");

  // transmit
  logic [PK_W-1:0] tpk;
  logic            tbusy;
  logic [FI_W-1:0] tidx;
  assign tx_ready = !tbusy;
  assign bus_req = tbusy;
  assign bus_dst = tpk[7:0];
  assign out_valid = tbusy && bus_gnt;
  assign out_flit = tpk[LANES*tidx +: LANES];
  assign out_last = out_valid && (tidx == FI_W'(FLITS - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tbusy <= 1'b0;
      tidx <= '0;
      tpk <= '0;
    end else if (!tbusy) begin
      if (tx_valid) begin
        tpk <= {tx_data, tx_addr, tx_dst};
        tbusy <= 1'b1;
        tidx <= '0;
      end
    end else if (out_valid) begin
      if (out_last) tbusy <= 1'b0;
      tidx <= tidx + FI_W'(1);
    end
  end

  // receive
  logic [PK_W-1:0] rpk;
  logic            rbusy, rfull;
  logic [FI_W-1:0] ridx;
  assign rx_valid = rfull;
  assign rx_addr = rpk[8 +: ADDR_W];
  assign rx_data = rpk[8 + ADDR_W +: DATA_W];
  assign rx_free = !rbusy && !rfull;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rbusy <= 1'b0;
      rfull <= 1'b0;
      ridx <= '0;
      rpk <= '0;
    end else begin
      if (rfull && rx_ready) rfull <= 1'b0;
      if (in_valid) begin
        if (in_sof) begin
          if (in_flit == my_id) begin
            rbusy <= 1'b1;
            rpk[7:0] <= in_flit;
            ridx <= FI_W'(1);
          end
        end else if (rbusy) begin
          rpk[LANES*ridx +: LANES] <= in_flit;
          ridx <= ridx + FI_W'(1);
          if (ridx == FI_W'(FLITS - 1)) begin
            rbusy <= 1'b0;
            rfull <= 1'b1;
          end
        end
      end
    end
  end

  always_ff @(posedge clk) if (rst_n && in_valid && in_sof && in_flit == my_id)
    assert (!rbusy && !rfull) else $error("packet to a busy receiver");
endmodule
