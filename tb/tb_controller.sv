// tb_controller: runs a short program from a behavioural instruction memory and checks the
// streams the controller produces: weight/index read addresses and the lane control one cycle
// later for a 4-bit and an 8-bit COMP, the Act GB reads and temporary-row writes of LDACT, a
// STORE that must stall while the output buffer is busy, SWAP, SETA, a taken and a not-taken
// BRN, and HALT raising done. Expected values are written out by hand from the instruction set.
module tb_controller;
  import eg2c_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  logic done, running, i_en, w_en, x_en, g_re, t_we, t_bank, src;
  logic [9:0] i_addr;
  logic [31:0] i_rdata;
  logic [10:0] w_addr, x_addr;
  lane_ctrl_t lctrl;
  logic [8:0] g_raddr, ob_base;
  logic [3:0] t_row, ob_shift;
  logic [5:0] t_ofs, ob_ofs;
  logic ob_store, ob_det, ob_relu, ob_w16, ob_busy = 0, a_we, a_busy = 0, a_normal = 0;
  logic [4:0] ob_nl_m1, a_sel;
  logic [19:0] a_data;
  logic [31:0] stall_cycles;
  logic [15:0] branches_taken;
  logic [31:0] overlap_cycles;
  logic [31:0] imem [1024];
  int checks = 0, failures = 0, cyc = 0;
  int w_log[$], x_log[$], g_log[$], t_log[$], tap_log[$], hi_log[$], nv_log[$], fv_log[$];
  int store_cnt = 0, seta_cnt = 0, det_cnt = 0, ob_left = 0;
  always #5 clk = ~clk;
  controller dut (.*);

  task automatic chk(bit c, string msg);
    checks++; if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  always_ff @(posedge clk) if (i_en) i_rdata <= imem[i_addr];
  // a COMP on bank 1 must not start while the bank-1 load is running
  bit stall_seen_comp = 0;
  always @(posedge clk) if (rst_n && g_re && w_en && dut.cmp_bank) begin
    failures++; $display("FAIL: COMP read bank 1 while it was loading");
  end
  always @(posedge clk) if (rst_n && dut.state == dut.C_EXEC && dut.op == OP_COMP && i_rdata[11] && g_re) stall_seen_comp = 1;

  // output buffer model: busy for 5 cycles after a store / det
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (w_en) w_log.push_back(w_addr);
    if (x_en) x_log.push_back(x_addr);
    if (g_re) g_log.push_back(g_raddr);
    if (t_we) t_log.push_back({t_bank, t_row, t_ofs});
    if (lctrl.valid) begin
      tap_log.push_back(lctrl.tap); hi_log.push_back(lctrl.hi);
      nv_log.push_back(lctrl.new_vec); fv_log.push_back(lctrl.first_vec);
    end
    if (ob_left > 0) ob_left--;
    if (ob_store) begin
      store_cnt++; ob_left = 5;
      chk(ob_base == 9'd17 && ob_ofs == 6'd8 && ob_nl_m1 == 5'd3 && ob_shift == 4'd2 && ob_relu && !ob_w16, "store fields");
    end
    if (ob_det) begin det_cnt++; ob_left = 3; end
    if (a_we) begin seta_cnt++; chk(a_sel == 5'd16 && a_data == 20'd12345, "seta fields"); end
    ob_busy <= (ob_left > 0);
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int pc;
    foreach (imem[i]) imem[i] = {OP_HALT, 28'd0};
    pc = 0;
    imem[pc++] = {OP_SETW, 6'd0, 11'd5, 11'd100};          // index ptr 5, weight ptr 100
    imem[pc++] = {OP_COMP, 17'd0, 1'b1, 1'b0, 1'b0, 8'd1};        // 2 vectors, pot4, RIR, clear
    imem[pc++] = {OP_COMP, 17'd0, 1'b0, 1'b1, 1'b1, 8'd0};        // 1 vector, int8, PW
    imem[pc++] = {OP_LDACT, 4'd0, 1'b1, 4'd15, 4'd7, 6'd12, 9'd40}; // bank 1: 16 rows from word 40, ofs 12, row 7
    imem[pc++] = {OP_COMP, 16'd0, 1'b0, 1'b1, 1'b0, 1'b0, 8'd0};  // bank 0: runs during the load
    imem[pc++] = {OP_COMP, 16'd0, 1'b1, 1'b1, 1'b0, 1'b0, 8'd0};  // bank 1: must wait for the load
    imem[pc++] = {OP_STORE, 2'd0, 1'b0, 1'b1, 4'd2, 5'd3, 6'd8, 9'd17};
    imem[pc++] = {OP_STORE, 2'd0, 1'b0, 1'b1, 4'd2, 5'd3, 6'd8, 9'd17}; // stalls on busy
    imem[pc++] = {OP_SWAP, 28'd0};
    imem[pc++] = {OP_SETA, 3'd0, 5'd16, 20'd12345};
    imem[pc++] = {OP_DET, 19'd0, 4'd3, 5'd1};
    imem[pc++] = {OP_BRN, 18'd0, 10'd20};                         // a_normal = 0: not taken
    imem[pc++] = {OP_JMP, 18'd0, 10'd30};
    imem[30]   = {OP_BRN, 18'd0, 10'd40};                         // a_normal = 1 by then: taken
    imem[31]   = {OP_JMP, 18'd0, 10'd31};                         // must not be reached
    imem[40]   = {OP_HALT, 28'd0};
    repeat (3) @(negedge clk); rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    wait (i_addr == 10'd30 && i_en);
    a_normal = 1;
    wait (done);
    @(negedge clk);
    // COMP 1: 2 vectors x 3 pot words; COMP 2: 1 vector x 6 int8 words; COMP 3, 4: 3 words each
    chk(w_log.size() == 18, $sformatf("weight reads %0d", w_log.size()));
    chk(overlap_cycles > 0, "load overlapped with COMP");
    for (int i = 0; i < w_log.size(); i++) chk(w_log[i] == 100 + i, "weight address");
    chk(x_log.size() == 5 && x_log[0] == 5 && x_log[1] == 6 && x_log[2] == 7 && x_log[4] == 9, "index addresses");
    begin
      int et[12] = '{0,1,2,0,1,2, 0,0,1,1,2,2};
      int eh[12] = '{0,0,0,0,0,0, 0,1,0,1,0,1};
      int en[12] = '{1,0,0,1,0,0, 1,0,0,0,0,0};
      int ef[12] = '{1,1,1,0,0,0, 1,1,1,1,1,1};
      chk(tap_log.size() == 18, "lane control count");
      for (int i = 0; i < 12 && i < tap_log.size(); i++)
        chk(tap_log[i] == et[i] && hi_log[i] == eh[i] && nv_log[i] == en[i] && fv_log[i] == ef[i],
            $sformatf("lane control %0d", i));
    end
    chk(g_log.size() == 16 && g_log[0] == 40 && g_log[15] == 55, "LDACT reads");
    chk(t_log.size() == 16 && t_log[0] == {1'b1, 4'd7, 6'd12} && t_log[2] == {1'b1, 4'd9, 6'd12}, "LDACT row writes");
    chk(stall_seen_comp, "COMP on the bank being loaded waited");
    chk(store_cnt == 2, "two stores");
    chk(stall_cycles >= 4, $sformatf("stall cycles %0d", stall_cycles));
    chk(src == 1'b1, "swap");
    chk(seta_cnt == 1 && det_cnt == 1, "seta/det");
    chk(branches_taken == 16'd1, "one branch taken");
    chk(!running, "halted");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
