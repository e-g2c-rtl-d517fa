// tb_mac_lane: runs random 3-tap 1-D convolutions (load on the first tap, shift after) and
// random point-wise sequences (load every tap), accumulated over several vectors, and compares
// the 4 lane results with directly computed sums; also checks that cycles without fire change
// nothing.
module tb_mac_lane;
  import eg2c_pkg::*;
  logic clk = 0, rst_n = 0, fire = 0, load = 0, clr = 0;
  act_row_t row_in = '0;
  wgt_t w = '0;
  lane_res_t res;
  longint exp [NMAC];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  mac_lane dut (.*);
  function automatic longint sat(longint v);
    return v > 32767 ? 32767 : (v < -32768 ? -32768 : v);
  endfunction
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      bit pw;
      int nv;
      pw = t[0];
      nv = $urandom_range(1, 4);
      foreach (exp[i]) exp[i] = 0;
      for (int v = 0; v < nv; v++) begin
        act_row_t r [KTAPS];
        wgt_t ws [KTAPS];
        for (int k = 0; k < KTAPS; k++) begin
          for (int j = 0; j < ROWLEN; j++) r[k][j] = 8'($urandom_range(0, 40) - 20);
          ws[k] = 8'($urandom_range(0, 60) - 30);
        end
        for (int k = 0; k < KTAPS; k++) begin
          @(negedge clk);
          fire = 1; load = pw || (k == 0); clr = (v == 0 && k == 0);
          row_in = pw ? r[k] : ((k == 0) ? r[0] : r[1]);   // non-loaded rows must be ignored
          w = ws[k];
          if ($urandom_range(3) == 0) begin  // idle cycle in between
            fire = 0; @(negedge clk); fire = 1;
          end
        end
        for (int i = 0; i < NMAC; i++)
          for (int k = 0; k < KTAPS; k++)
            exp[i] += longint'($signed(pw ? r[k][i] : r[0][i+k])) * longint'(ws[k]);
      end
      @(negedge clk); fire = 0; #1;
      for (int i = 0; i < NMAC; i++) begin
        checks++;
        if (longint'(res[i]) != sat(exp[i])) begin
          failures++; if (failures < 10) $display("t=%0d pw=%0d mac %0d res %0d exp %0d", t, pw, i, res[i], exp[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
