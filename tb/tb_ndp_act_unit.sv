// tb_ndp_act_unit: random FP32 inputs, some saturating, go through the SiLU lanes; outputs are
// compared with x / (1 + exp(-x)) computed in real arithmetic (tolerance 0.3% + 1e-3 absolute
// for FP16). ACT_NONE must return FP16-representable inputs unchanged. Latency must be 3.
module tb_ndp_act_unit;
  import trimoe_pkg::*;
  import tb_fp_pkg::*;
  localparam int L = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, out_valid;
  act_mode_e in_mode;
  fp32_t in_data [L];
  fp16_t y16 [L];
  fp32_t y32 [L];
  int checks = 0, failures = 0, cyc = 0;
  ndp_act_unit #(.LANES(L)) dut (.*);
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { real x [L]; act_mode_e m; int c; } item_t;
  item_t q[$];
  always @(posedge clk) if (rst_n && out_valid) begin
    item_t it;
    it = q.pop_front();
    checks++;
    if (cyc - it.c != 3) begin failures++; $display("latency %0d", cyc - it.c); end
    for (int l = 0; l < L; l++) begin
      real r, g;
      r = (it.m == ACT_NONE) ? it.x[l] : it.x[l] / (1.0 + $exp(-it.x[l]));
      g = fp16_real(y16[l]);
      checks++;
      if (rabs(g - r) > 3e-3 * rabs(r) + 1e-3) begin
        failures++; $display("m=%0d l=%0d x=%g got %g exp %g", it.m, l, it.x[l], g, r);
      end
    end
  end

  initial begin
    in_valid = 0; in_mode = ACT_NONE;
    for (int l = 0; l < L; l++) in_data[l] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      item_t it;
      @(negedge clk);
      in_valid = ($urandom % 3) != 0;
      in_mode = (n % 5 == 0) ? ACT_NONE : ACT_SILU;
      for (int l = 0; l < L; l++) begin
        logic [15:0] h;
        h = rand_fp16(5, 20);
        if (n % 9 == 0 && l == 0) h = 16'hD240;   // -50
        if (n % 9 == 0 && l == 1) h = 16'h5640;   // 100
        in_data[l] = fp16_to_fp32(h);
        it.x[l] = fp16_real(h);
      end
      it.m = in_mode; it.c = cyc;
      if (in_valid) q.push_back(it);
    end
    @(negedge clk) in_valid = 0;
    repeat (10) @(posedge clk);
    checks++;
    if (q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
