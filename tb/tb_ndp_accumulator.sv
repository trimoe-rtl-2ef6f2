// tb_ndp_accumulator: random chunk sums for 8 tokens are loaded (first) or added, and every
// register is compared with a real-valued running sum after each update.
module tb_ndp_accumulator;
  import trimoe_pkg::*;
  import tb_fp_pkg::*;
  localparam int T = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_first;
  logic [2:0] in_tok;
  fp32_t in_data;
  fp32_t acc [T];
  int checks = 0, failures = 0;
  real model [T], mag [T];
  ndp_accumulator #(.MAX_TOK(T)) dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; in_first = 0; in_tok = 0; in_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < T; t++) begin model[t] = 0; mag[t] = 0; end
    for (int n = 0; n < 1000; n++) begin
      @(negedge clk);
      in_valid = ($urandom % 5) != 0;
      in_tok = 3'($urandom);
      in_first = ($urandom % 6) == 0;
      in_data = fp16_to_fp32(rand_fp16(10, 20));
      if (in_valid) begin
        if (in_first) begin model[in_tok] = fp32_real(in_data); mag[in_tok] = rabs(model[in_tok]); end
        else begin model[in_tok] += fp32_real(in_data); mag[in_tok] += rabs(fp32_real(in_data)); end
      end
      @(posedge clk); #1;
      for (int t = 0; t < T; t++) begin
        checks++;
        if (rabs(fp32_real(acc[t]) - model[t]) > 1e-6 * mag[t] + 1e-30) begin
          failures++;
          $display("tok %0d got %g exp %g", t, fp32_real(acc[t]), model[t]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
