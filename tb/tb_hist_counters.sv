// tb_hist_counters: random increments into random bins with occasional clears, compared with a
// saturating model; one bin is driven well past 255 to check saturation.
module tb_hist_counters;
  import eg2c_pkg::*;
  logic clk = 0, rst_n = 0, clr = 0, inc = 0;
  logic [$clog2(NBINS)-1:0] bin = '0;
  logic [NBINS-1:0][CNTW-1:0] num;
  int model [NBINS];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  hist_counters dut (.*);
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    foreach (model[k]) model[k] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      inc = ($urandom_range(3) != 0); clr = ($urandom_range(999) == 0);
      bin = (t > 1000 && t < 1400) ? 4'd5 : 4'($urandom);
      @(posedge clk); #1;
      if (clr) foreach (model[k]) model[k] = 0;
      else if (inc && model[bin] < 255) model[bin]++;
      for (int k = 0; k < NBINS; k++) begin
        checks++; if (int'(num[k]) != model[k]) begin failures++; if (failures < 10) $display("bin %0d %0d exp %0d", k, num[k], model[k]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
