// tb_act_gb: fills both banks of an activation GB, then does byte-masked writes and reads,
// including a read and a write to different banks in the same cycle, and compares every read
// with a shadow copy kept with the same byte masks.
module tb_act_gb;
  import eg2c_pkg::*;
  localparam int BW = 200, AW = $clog2(2*BW);
  logic clk = 0, re = 0, we = 0;
  logic [AW-1:0] raddr = '0, waddr = '0;
  logic [GBW-1:0] rdata, wdata = '0;
  logic [GBBYTES-1:0] wbe = '0;
  logic [GBW-1:0] shadow [2*BW];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  act_gb #(.BANK_WORDS(BW)) dut (.*);
  function automatic logic [GBW-1:0] rnd();
    logic [GBW-1:0] v;
    for (int i = 0; i < GBW/32; i++) v[32*i +: 32] = $urandom;
    return v;
  endfunction
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i < 2*BW; i++) begin
      @(negedge clk); we = 1; wbe = '1; waddr = AW'(i); wdata = rnd(); shadow[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 600; i++) begin
      int a, b;
      a = $urandom_range(2*BW-1);
      b = (a < BW) ? $urandom_range(2*BW-1, BW) : $urandom_range(BW-1);   // other bank
      @(negedge clk);
      re = 1; raddr = AW'(a);
      we = 1; waddr = AW'(b); wdata = rnd(); wbe = {$urandom, $urandom};
      for (int k = 0; k < GBBYTES; k++) if (wbe[k]) shadow[b][8*k +: 8] = wdata[8*k +: 8];
      @(negedge clk); re = 0; we = 0;
      checks++; if (rdata !== shadow[a]) begin failures++; $display("read mismatch %0d", a); end
      @(negedge clk); re = 1; raddr = AW'(b);
      @(negedge clk); re = 0;
      checks++; if (rdata !== shadow[b]) begin failures++; $display("mask mismatch %0d", b); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
