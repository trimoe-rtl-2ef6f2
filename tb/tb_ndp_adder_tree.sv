// tb_ndp_adder_tree: streams one random 16-element vector per cycle into the tree and compares
// each sum with a real-valued reference (tolerance 1e-6 of the sum of magnitudes); checks the
// log2(N) = 4 cycle latency and that tags stay with their vectors.
module tb_ndp_adder_tree;
  import trimoe_pkg::*;
  import tb_fp_pkg::*;
  localparam int N = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, out_valid;
  fp32_t in_data [N];
  fp32_t sum;
  logic [7:0] tag_in, tag_out;
  int checks = 0, failures = 0, cyc = 0;
  ndp_adder_tree #(.N(N), .TAG_W(8)) dut (.*);
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real qs[$], qa[$];
  int qc[$];
  logic [7:0] qt[$];
  always @(posedge clk) if (rst_n && out_valid) begin
    real r, a, g;
    r = qs.pop_front(); a = qa.pop_front();
    g = fp32_real(sum);
    checks += 3;
    if (rabs(g - r) > 1e-6 * a + 1e-30) begin failures++; $display("sum got %g exp %g", g, r); end
    if (tag_out != qt.pop_front()) begin failures++; $display("tag"); end
    if (cyc - qc.pop_front() != 4) begin failures++; $display("latency"); end
  end

  initial begin
    in_valid = 0; tag_in = 0;
    for (int i = 0; i < N; i++) in_data[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      real s, a;
      @(negedge clk);
      s = 0; a = 0;
      in_valid = ($urandom % 4) != 0;
      tag_in = 8'(n);
      for (int i = 0; i < N; i++) begin
        logic [15:0] h1, h2;
        h1 = rand_fp16(8, 22); h2 = rand_fp16(8, 22);
        if (n % 7 == 0 && i < N / 2) h1 = {~h2[15], h2[14:0]};   // cancellation
        in_data[i] = fp16_to_fp32(h1) ^ 32'h0;
        in_data[i] = (i % 2 == 0) ? fp16_to_fp32(h1) : fp16_to_fp32(h2);
        s += fp32_real(in_data[i]);
        a += rabs(fp32_real(in_data[i]));
      end
      if (in_valid) begin
        qs.push_back(s); qa.push_back(a); qt.push_back(tag_in); qc.push_back(cyc);
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (10) @(posedge clk);
    checks++;
    if (qs.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
