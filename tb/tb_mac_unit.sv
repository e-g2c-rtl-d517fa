// tb_mac_unit: random signed 8-bit operand streams with random restarts, compared with an
// integer model of the accumulator, including runs that saturate the 16-bit result.
module tb_mac_unit;
  import eg2c_pkg::*;
  logic clk = 0, rst_n = 0, en = 0, clr = 0;
  act_t a = '0;
  wgt_t w = '0;
  res_t res;
  longint acc = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  mac_unit dut (.*);
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      longint exp;
      @(negedge clk);
      en = ($urandom_range(4) != 0); clr = ($urandom_range(30) == 0);
      a = 8'($urandom); w = 8'($urandom);
      if (t > 1500 && t < 1600) begin a = 8'd127; w = 8'sd127; clr = 0; end  // drive into saturation
      if (en) acc = (clr ? 0 : acc) + longint'($signed(a)) * longint'(w);
      @(negedge clk); en = 0; #1;
      exp = acc > 32767 ? 32767 : (acc < -32768 ? -32768 : acc);
      checks++; if (longint'(res) != exp) begin failures++; if (failures < 10) $display("t=%0d res %0d exp %0d", t, res, exp); end
      if (acc > 4000000 || acc < -4000000) begin @(negedge clk); en = 1; clr = 1; a = 0; w = 0; acc = 0; @(negedge clk); en = 0; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
