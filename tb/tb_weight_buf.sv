// tb_weight_buf: checks all 16 power-of-2 codes against +/-2^e (code 7 = zero) and random
// 8-bit weights sent as low/high nibble pairs, including that w_valid is only raised on the
// high nibble in 8-bit mode.
module tb_weight_buf;
  import eg2c_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, hi = 0;
  logic [3:0] nib = '0;
  wfmt_e wfmt = WF_POT4;
  logic w_valid;
  wgt_t w;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  weight_buf dut (.*);
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int c = 0; c < 16; c++) begin
      int e, exp;
      @(negedge clk); in_valid = 1; wfmt = WF_POT4; nib = 4'(c); hi = 0; #1;
      e = c % 8;
      exp = (e == 7) ? 0 : (1 << e);
      if (c >= 8) exp = -exp;
      checks++; if (!w_valid || int'(w) != exp) begin failures++; $display("pot %0d -> %0d exp %0d", c, w, exp); end
    end
    for (int t = 0; t < 300; t++) begin
      logic [7:0] v;
      v = 8'($urandom);
      @(negedge clk); in_valid = 1; wfmt = WF_INT8; hi = 0; nib = v[3:0]; #1;
      checks++; if (w_valid) failures++;
      @(negedge clk); hi = 1; nib = v[7:4]; #1;
      checks++; if (!w_valid || w !== wgt_t'(v)) begin failures++; $display("int8 %h -> %h", v, w); end
    end
    @(negedge clk); in_valid = 0; #1;
    checks++; if (w_valid) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
