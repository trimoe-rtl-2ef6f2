// ndp_act_buffer: the NDP's 256 KB internal buffer for intermediate activations.
//
// It holds FP16 activation vectors (the token inputs x of an expert and the intermediate
// results between its projections). Port A reads one whole line of ELEMS elements per cycle,
// which is one multiplier pass (256 multipliers x 8 FP16 = 2048 elements = 4 KB), to feed all
// multipliers at once. Port B reads or writes single FP16 elements, addressed linearly
// (element = line * ELEMS + offset), for the result write-back and for host loads and reads.
// Both ports are synchronous: read data appears the cycle after the address.
// From the paper: 256 KB internal buffer storing intermediate activations. This design's
// choices: line width equal to one multiplier pass, two ports, element-granular port B.
// Default: 64 lines x 2048 elements x 2 bytes = 256 KB.
module ndp_act_buffer
  import trimoe_pkg::*;
#(
  parameter int ELEMS = 2048,
  parameter int BYTES = 262144,
  parameter int LINES = BYTES / (ELEMS * 2),
  parameter int LINE_AW = $clog2(LINES),
  parameter int ELEM_AW = $clog2(LINES * ELEMS)
) (
  input  logic                    clk,
  // port A: line read
  input  logic                    a_en,
  input  logic [LINE_AW-1:0]      a_line,
  output logic [ELEMS*16-1:0]     a_rdata,
  // port B: element read / write
  input  logic                    b_en,
  input  logic                    b_we,
  input  logic [ELEM_AW-1:0]      b_addr,
  input  fp16_t                   b_wdata,
  output fp16_t                   b_rdata
);
  localparam int OFS_W = $clog2(ELEMS);

  logic [ELEMS*16-1:0] mem [LINES];

  wire [LINE_AW-1:0] b_line = b_addr[ELEM_AW-1:OFS_W];
  wire [OFS_W-1:0]   b_ofs  = b_addr[OFS_W-1:0];

  always_ff @(posedge clk) begin
    if (a_en) a_rdata <= mem[a_line];
  end

  always_ff @(posedge clk) begin
    if (b_en) begin
      if (b_we) mem[b_line][16*b_ofs +: 16] <= b_wdata;
      else      b_rdata <= mem[b_line][16*b_ofs +: 16];
    end
  end
endmodule
