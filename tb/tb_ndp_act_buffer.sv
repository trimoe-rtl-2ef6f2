// tb_ndp_act_buffer: random element writes through port B, then line reads through port A and
// element reads through port B, all compared with a reference array.
module tb_ndp_act_buffer;
  import trimoe_pkg::*;
  localparam int ELEMS = 16, BYTES = 512, LINES = 16;
  logic clk = 0;
  always #5 clk = ~clk;
  logic a_en, b_en, b_we;
  logic [3:0] a_line;
  logic [7:0] b_addr;
  logic [ELEMS*16-1:0] a_rdata;
  fp16_t b_wdata, b_rdata;
  fp16_t model [LINES*ELEMS];
  int checks = 0, failures = 0;
  ndp_act_buffer #(.ELEMS(ELEMS), .BYTES(BYTES)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a_en = 0; b_en = 0; b_we = 0; a_line = 0; b_addr = 0; b_wdata = 0;
    for (int i = 0; i < LINES * ELEMS; i++) begin
      @(negedge clk);
      b_en = 1; b_we = 1; b_addr = 8'(i); b_wdata = 16'($urandom); model[i] = b_wdata;
    end
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      b_en = 1; b_we = ($urandom % 3) == 0; b_addr = 8'($urandom); b_wdata = 16'($urandom);
      a_en = 1; a_line = 4'($urandom);
      @(posedge clk); #1;
      checks++;
      for (int e = 0; e < ELEMS; e++)
        if (a_rdata[16*e +: 16] != model[a_line*ELEMS+e]) begin failures++; $display("A mismatch"); break; end
      if (!b_we) begin
        checks++;
        if (b_rdata != model[b_addr]) begin failures++; $display("B mismatch"); end
      end else model[b_addr] = b_wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
