// tb_input_act_buf: fills the 16 temporary rows of both banks from random GB words at random
// byte offsets (including offsets running past the word end, which must read as zero), then
// drives index streams while reading either bank, and checks that every lane receives the row
// its accumulated index names in the bank asked for.
module tb_input_act_buf;
  import eg2c_pkg::*;
  logic clk = 0, rst_n = 0, wr_en = 0, idx_upd = 0, idx_first = 0, wr_bank = 0, rd_bank = 0;
  logic [3:0] wr_row = '0;
  logic [5:0] wr_ofs = '0;
  logic [GBW-1:0] wr_word = '0;
  logic [NLANES-1:0][IDXW-1:0] idx = '0;
  logic [1:0] row_ofs = '0;
  act_row_t [NLANES-1:0] lane_row;
  act_row_t rows [2][TMPROWS];
  int acc [NLANES];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  input_act_buf dut (.*);
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    foreach (acc[l]) acc[l] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int rep = 0; rep < 20; rep++) begin
      for (int r = 0; r < 2 * TMPROWS; r++) begin
        int o, bk;
        bk = r / TMPROWS;
        @(negedge clk);
        wr_en = 1; wr_row = 4'(r % TMPROWS); wr_bank = 1'(bk);
        o = (r % TMPROWS == 15) ? 61 : $urandom_range(63);
        wr_ofs = 6'(o);
        for (int i = 0; i < GBW/32; i++) wr_word[32*i +: 32] = $urandom;
        for (int j = 0; j < ROWLEN; j++) rows[bk][r % TMPROWS][j] = (o + j < 64) ? wr_word[8*(o+j) +: 8] : 8'h00;
      end
      @(negedge clk); wr_en = 0;
      for (int t = 0; t < 50; t++) begin
        int cur [NLANES];
        @(negedge clk);
        idx_upd = 1; idx_first = (t == 0); row_ofs = 2'($urandom_range(2)); rd_bank = 1'($urandom);
        for (int l = 0; l < NLANES; l++) idx[l] = 2'($urandom);
        #1;
        for (int l = 0; l < NLANES; l++) begin
          cur[l] = ((idx_first ? 0 : acc[l]) + int'(idx[l])) % 16;
          checks++;
          if (lane_row[l] !== rows[rd_bank][(cur[l] + int'(row_ofs)) % 16]) begin
            failures++;
            if (failures < 10) $display("lane %0d row mismatch", l);
          end
        end
        @(posedge clk);
        foreach (acc[l]) acc[l] = cur[l];
      end
      @(negedge clk); idx_upd = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
