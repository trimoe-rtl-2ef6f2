// ndp_relayout_unit: the Relayout Unit of one buffer chip.
//
// It moves one expert's weights between layouts without the host:
//   striped:   line i of the expert lives on DIMM (i mod D) at base + i/D (good for CPU/GPU
//              reads, which then use the bandwidth of all DIMMs);
//   localized: all lines live on one home DIMM at base + i (needed by that DIMM's NDP).
// A task names a source and a destination layout (with home DIMMs and base addresses); relayout
// (striped <-> localized) and cold-expert migration (localized on DIMM a -> localized on DIMM b)
// are the same operation with different layouts. The host broadcasts the task to every DIMM in the
// same cycle. Each unit walks i = 0..n-1, one index per cycle: lines it owns in the source layout
// are read from its DRAM and either written back locally (if it also owns them in the destination
// layout) or sent over DIMM-Link to the destination DIMM. While walking it also counts the lines
// it must receive. Lines arriving from the link are written to local DRAM at once (they take
// priority over the unit's own requests). The task ends (`done`) when the walk is over and every
// expected line has arrived.
// Memory port: requests `mreq_*` with ready, read data `mrsp_*` in request order.
// From the paper: the Relayout Unit as control engine for striped/localized conversion and
// migration of localized cold experts over DIMM-Link. This design's choices: the line-address
// mapping, D a power of two, one line in flight per unit, non-overlapping source and destination.
module ndp_relayout_unit
  import trimoe_pkg::*;
#(
  parameter int LOG_D = 4,
  parameter int DATA_W = 1024
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [7:0]        my_id,
  input  logic              task_valid,
  input  relayout_task_t    task_in,
  output logic              task_ready,
  output logic              done,
  // DRAM
  output logic              mreq_valid,
  output logic              mreq_we,
  output logic [ADDR_W-1:0] mreq_addr,
  output logic [DATA_W-1:0] mreq_wdata,
  input  logic              mreq_ready,
  input  logic              mrsp_valid,
  input  logic [DATA_W-1:0] mrsp_data,
  // DIMM-Link
  output logic              lt_valid,
  output logic [7:0]        lt_dst,
  output logic [ADDR_W-1:0] lt_addr,
  output logic [DATA_W-1:0] lt_data,
  input  logic              lt_ready,
  input  logic              lr_valid,
  input  logic [ADDR_W-1:0] lr_addr,
  input  logic [DATA_W-1:0] lr_data,
  output logic              lr_ready,
  // statistics
  output logic [31:0]       stat_local,
  output logic [31:0]       stat_sent,
  output logic [31:0]       stat_recv
);
  typedef enum logic [2:0] {R_IDLE, R_SCAN, R_READ, R_WAIT, R_WLOCAL, R_SEND, R_FINISH} rstate_e;
  rstate_e st;
  relayout_task_t tq;
  logic [23:0] idx;
  logic [31:0] expect_rx, got_rx;
  logic [7:0]  d_own;
  logic [ADDR_W-1:0] d_addr;
  logic [DATA_W-1:0] line;

  wire [7:0] so = line_owner(tq.src_layout, tq.src_home, idx, LOG_D);
  wire [7:0] dO = line_owner(tq.dst_layout, tq.dst_home, idx, LOG_D);

  assign task_ready = (st == R_IDLE);

  // memory request mux: link receive writes first
  wire fsm_req = (st == R_READ) || (st == R_WLOCAL);
  assign lr_ready = mreq_ready;
  always_comb begin
    if (lr_valid) begin
      mreq_valid = 1'b1;
      mreq_we = 1'b1;
      mreq_addr = lr_addr;
      mreq_wdata = lr_data;
    end else begin
      mreq_valid = fsm_req;
      mreq_we = (st == R_WLOCAL);
      mreq_addr = (st == R_WLOCAL) ? d_addr : line_addr(tq.src_layout, tq.src_base, idx, LOG_D);
      mreq_wdata = line;
    end
  end
  wire fsm_acc = fsm_req && !lr_valid && mreq_ready;

  assign lt_valid = (st == R_SEND);
  assign lt_dst = d_own;
  assign lt_addr = d_addr;
  assign lt_data = line;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= R_IDLE;
      tq <= '0;
      idx <= '0;
      expect_rx <= '0;
      got_rx <= '0;
      d_own <= '0;
      d_addr <= '0;
      line <= '0;
      done <= 1'b0;
      stat_local <= '0; stat_sent <= '0; stat_recv <= '0;
    end else begin
      done <= 1'b0;
      if (lr_valid && lr_ready) begin
        got_rx <= got_rx + 32'd1;
        stat_recv <= stat_recv + 32'd1;
      end
      case (st)
        R_IDLE: if (task_valid) begin
          tq <= task_in;
          idx <= '0;
          expect_rx <= '0;
          got_rx <= (lr_valid && lr_ready) ? 32'd1 : 32'd0;
          st <= R_SCAN;
        end
        R_SCAN: begin
          if (idx == tq.n_lines) st <= R_FINISH;
          else if (so == my_id) begin
            d_own <= dO;
            d_addr <= line_addr(tq.dst_layout, tq.dst_base, idx, LOG_D);
            st <= R_READ;
          end else begin
            if (dO == my_id) expect_rx <= expect_rx + 32'd1;
            idx <= idx + 24'd1;
          end
        end
        R_READ: if (fsm_acc) st <= R_WAIT;
        R_WAIT: if (mrsp_valid) begin
          line <= mrsp_data;
          st <= (d_own == my_id) ? R_WLOCAL : R_SEND;
        end
        R_WLOCAL: if (fsm_acc) begin
          stat_local <= stat_local + 32'd1;
          idx <= idx + 24'd1;
          st <= R_SCAN;
        end
        R_SEND: if (lt_ready) begin
          stat_sent <= stat_sent + 32'd1;
          idx <= idx + 24'd1;
          st <= R_SCAN;
        end
        R_FINISH: if (got_rx == expect_rx) begin
          done <= 1'b1;
          st <= R_IDLE;
        end
        default: st <= R_IDLE;
      endcase
    end
  end
endmodule
