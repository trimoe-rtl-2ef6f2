// tb_ndp_bitserial_mul: random FP16 operand words are multiplied lane by lane; every FP32
// product must equal the exact real product. Also checks the 17-cycle result latency and the
// 16-cycle issue interval of back-to-back operations, and that zero operands give zero.
module tb_ndp_bitserial_mul;
  import trimoe_pkg::*;
  import tb_fp_pkg::*;

  localparam int LANES = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, ready, out_valid;
  logic [LANES*16-1:0] w, x;
  logic [7:0] tag_in, tag_out;
  fp32_t prod [LANES];
  int checks = 0, failures = 0;

  ndp_bitserial_mul #(.LANES(LANES), .TAG_W(8)) dut (.*);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected results queue
  logic [LANES*16-1:0] qw[$], qx[$];
  logic [7:0] qt[$];
  int issue_cyc[$];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (rst_n && out_valid) begin
    logic [LANES*16-1:0] ew, ex;
    int ic;
    ew = qw.pop_front(); ex = qx.pop_front(); ic = issue_cyc.pop_front();
    checks++;
    if (tag_out != qt.pop_front()) begin failures++; $display("tag mismatch"); end
    checks++;
    if (cyc - ic != 17) begin failures++; $display("latency %0d", cyc - ic); end
    for (int l = 0; l < LANES; l++) begin
      real ref_v, got;
      ref_v = fp16_real(ew[16*l +: 16]) * fp16_real(ex[16*l +: 16]);
      got = fp32_real(prod[l]);
      checks++;
      if (got != ref_v) begin
        failures++;
        $display("lane %0d w=%h x=%h got %g exp %g", l, ew[16*l +: 16], ex[16*l +: 16], got, ref_v);
      end
    end
  end

  task automatic issue(input logic [LANES*16-1:0] wv, input logic [LANES*16-1:0] xv, input logic [7:0] t);
    @(negedge clk);
    while (!ready) @(negedge clk);
    start = 1; w = wv; x = xv; tag_in = t;
    @(posedge clk);
    qw.push_back(wv); qx.push_back(xv); qt.push_back(t); issue_cyc.push_back(cyc);
    #1 start = 0;
  endtask

  int last_issue;
  initial begin
    start = 0; w = '0; x = '0; tag_in = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int n = 0; n < 200; n++) begin
      logic [LANES*16-1:0] wv, xv;
      for (int l = 0; l < LANES; l++) begin
        wv[16*l +: 16] = rand_fp16(1, 30);
        xv[16*l +: 16] = rand_fp16(1, 30);
      end
      if (n == 5) wv[15:0] = 16'h0000;
      if (n == 6) xv[31:16] = 16'h8000;
      issue(wv, xv, 8'(n));
      // back-to-back issue interval
      if (n > 0) begin
        checks++;
        if (issue_cyc[$] - last_issue != 16 && issue_cyc.size() > 1) begin
          failures++; $display("issue interval %0d", issue_cyc[$] - last_issue);
        end
      end
      last_issue = issue_cyc[$];
    end
    repeat (40) @(posedge clk);
    checks++;
    if (qw.size() != 0) begin failures++; $display("missing results"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
