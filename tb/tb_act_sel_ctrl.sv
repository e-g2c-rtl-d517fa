// tb_act_sel_ctrl: feeds random 2-bit index streams to all 32 lanes with random restarts and
// row offsets, and checks each lane's selected row against a running sum kept in the bench.
module tb_act_sel_ctrl;
  import eg2c_pkg::*;
  logic clk = 0, rst_n = 0, upd = 0, first = 0;
  logic [NLANES-1:0][IDXW-1:0] idx = '0;
  logic [1:0] ofs = '0;
  logic [NLANES-1:0][SELW-1:0] sel;
  int model [NLANES];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  act_sel_ctrl dut (.*);
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    foreach (model[l]) model[l] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      int cur [NLANES];
      @(negedge clk);
      upd = ($urandom_range(3) != 0); first = ($urandom_range(9) == 0);
      ofs = 2'($urandom_range(2));
      for (int l = 0; l < NLANES; l++) idx[l] = 2'($urandom);
      #1;
      for (int l = 0; l < NLANES; l++) begin
        cur[l] = upd ? (((first ? 0 : model[l]) + int'(idx[l])) % 16) : model[l];
        checks++;
        if (int'(sel[l]) != (cur[l] + int'(ofs)) % 16) begin
          failures++;
          if (failures < 10) $display("t=%0d lane %0d sel %0d exp %0d", t, l, sel[l], (cur[l]+ofs)%16);
        end
      end
      @(posedge clk);
      foreach (model[l]) model[l] = cur[l];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
