// tb_adapt_cmp: random ascending bounds and random scores (plus scores equal to a bound), the
// bin compared with the number of bounds the score strictly exceeds.
module tb_adapt_cmp;
  import eg2c_pkg::*;
  logic signed [SCOREW-1:0] score;
  score_t [NBINS-2:0] bound;
  logic [$clog2(NBINS)-1:0] bin;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  adapt_cmp dut (.*);
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int t = 0; t < 3000; t++) begin
      int b, e;
      b = $urandom_range(0, 200) - 500;
      for (int k = 0; k < NBINS - 1; k++) begin b += $urandom_range(1, 60); bound[k] = 16'(b); end
      score = (t % 4 == 0) ? bound[$urandom_range(NBINS-2)] : 16'($urandom_range(0, 1400) - 600);
      #1;
      e = 0;
      for (int k = 0; k < NBINS - 1; k++) if (int'(score) > int'($signed(bound[k]))) e++;
      checks++; if (int'(bin) != e) begin failures++; if (failures < 10) $display("score %0d bin %0d exp %0d", score, bin, e); end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
