// tb_argmin_tree: random counter sets, many with ties, compared with a linear search that
// returns the lowest index of the minimum.
module tb_argmin_tree;
  import eg2c_pkg::*;
  logic [NSENS-1:0][CNTW-1:0] val;
  logic [$clog2(NSENS)-1:0] idx;
  logic [CNTW-1:0] min;
  logic clk = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  argmin_tree dut (.*);
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int t = 0; t < 5000; t++) begin
      int m, mi;
      for (int i = 0; i < NSENS; i++) val[i] = (t % 2) ? 8'($urandom_range(0, 3)) : 8'($urandom);
      #1;
      m = 1000; mi = 0;
      for (int i = 0; i < NSENS; i++) if (int'(val[i]) < m) begin m = val[i]; mi = i; end
      checks++; if (int'(idx) != mi || int'(min) != m) begin failures++; if (failures < 10) $display("idx %0d exp %0d", idx, mi); end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
