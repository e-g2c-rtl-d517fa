// tb_output_act_buf: gives random lane results, then (a) an 8-bit STORE with shift/ReLU whose
// GB writes are captured and compared with requantized values, changing the lane inputs right
// after the start to show the snapshot is used, (b) a 16-bit STORE, and (c) a DET whose pooled
// score is compared with the shifted sum; also checks the number of busy cycles (one per lane).
module tb_output_act_buf;
  import eg2c_pkg::*;
  localparam int AW = 9;
  logic clk = 0, rst_n = 0, store = 0, det = 0, relu = 0, w16 = 0;
  lane_res_t [NLANES-1:0] lane_res = '0, held;
  logic [AW-1:0] base = '0;
  logic [5:0] ofs = '0;
  logic [4:0] nl_m1 = '0;
  logic [3:0] shift = '0;
  logic busy, gb_we, score_valid;
  logic [AW-1:0] gb_waddr;
  logic [GBBYTES-1:0] gb_wbe;
  logic [GBW-1:0] gb_wdata;
  logic signed [SCOREW-1:0] score;
  logic [7:0] mem [512][64];
  logic       wr  [512][64];
  int checks = 0, failures = 0, busy_cycles = 0;
  always #5 clk = ~clk;
  output_act_buf dut (.*);
  always @(posedge clk) begin
    if (busy) busy_cycles++;
    if (gb_we) for (int b = 0; b < 64; b++) if (gb_wbe[b]) begin
      mem[gb_waddr][b] = gb_wdata[8*b +: 8]; wr[gb_waddr][b] = 1;
    end
  end
  function automatic int q8(int v, int sh, bit rl);
    int y;
    y = v >>> sh;
    if (rl && y < 0) y = 0;
    return y > 127 ? 127 : (y < -128 ? -128 : y);
  endfunction
  task automatic randomize_lanes();
    for (int l = 0; l < NLANES; l++) for (int i = 0; i < NMAC; i++) lane_res[l][i] = 16'($urandom);
  endtask
  task automatic clear_mem();
    foreach (wr[a, b]) wr[a][b] = 0;
  endtask
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    clear_mem();
    repeat (2) @(negedge clk); rst_n = 1;
    for (int rep = 0; rep < 40; rep++) begin
      int nl, sh, o, bsv;
      bit rl, is16;
      randomize_lanes();
      held = lane_res;
      nl = $urandom_range(1, 32); sh = $urandom_range(0, 15); rl = 1'($urandom); is16 = rep[0];
      o  = is16 ? 8 * $urandom_range(0, 7) : 4 * $urandom_range(0, 15);
      bsv = $urandom_range(0, 400);
      clear_mem();
      busy_cycles = 0;
      @(negedge clk); store = 1; base = AW'(bsv); ofs = 6'(o); nl_m1 = 5'(nl - 1);
      shift = 4'(sh); relu = rl; w16 = is16;
      @(negedge clk); store = 0; randomize_lanes();   // must not disturb the stored snapshot
      while (busy) @(negedge clk);
      checks++; if (busy_cycles != nl) begin failures++; $display("busy %0d cycles for %0d lanes", busy_cycles, nl); end
      for (int l = 0; l < nl; l++) for (int i = 0; i < NMAC; i++) begin
        if (is16) begin
          checks++;
          if (!wr[bsv+l][o+2*i] || {mem[bsv+l][o+2*i+1], mem[bsv+l][o+2*i]} !== held[l][i]) failures++;
        end else begin
          checks++;
          if (!wr[bsv+l][o+i] || int'($signed(mem[bsv+l][o+i])) != q8(int'(held[l][i]), sh, rl)) begin
            failures++; if (failures < 10) $display("lane %0d mac %0d got %0d exp %0d", l, i, $signed(mem[bsv+l][o+i]), q8(int'(held[l][i]), sh, rl));
          end
        end
      end
      // nothing outside the lanes' bytes is written
      begin
        int cnt; cnt = 0;
        foreach (wr[a, b]) if (wr[a][b]) cnt++;
        checks++; if (cnt != nl * (is16 ? 8 : 4)) begin failures++; $display("wrote %0d bytes", cnt); end
      end
      // detection pooling
      begin
        longint s, e;
        int dn, dsh;
        bit got;
        dn = $urandom_range(1, 32); dsh = $urandom_range(0, 8);
        for (int l = 0; l < NLANES; l++) for (int i = 0; i < NMAC; i++) lane_res[l][i] = 16'($urandom_range(0, 2000) - 1000);
        s = 0;
        for (int l = 0; l < dn; l++) for (int i = 0; i < NMAC; i++) s += longint'(lane_res[l][i]);
        e = s >>> dsh;
        e = e > 32767 ? 32767 : (e < -32768 ? -32768 : e);
        @(negedge clk); det = 1; nl_m1 = 5'(dn - 1); shift = 4'(dsh);
        @(negedge clk); det = 0;
        got = 0;
        for (int c = 0; c < 40 && !got; c++) begin
          if (score_valid) begin
            got = 1; checks++;
            if (longint'(score) != e) begin failures++; $display("score %0d exp %0d", score, e); end
          end else @(negedge clk);
        end
        checks++; if (!got) failures++;
        checks++; if (busy) failures++;   // score_valid coincides with the end of busy
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
