// tb_sram_1p: writes random words to the weight-GB-sized single-port SRAM, reads them back in
// random order and checks data and the one-cycle read latency against a shadow array.
module tb_sram_1p;
  localparam int W = 128, D = 2048;
  logic clk = 0, en = 0, we = 0;
  logic [$clog2(D)-1:0] addr = '0;
  logic [W-1:0] wdata = '0, rdata;
  logic [W-1:0] shadow [D];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  sram_1p #(.WIDTH(W), .DEPTH(D)) dut (.*);
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i < D; i++) begin
      @(negedge clk); en = 1; we = 1; addr = i[$clog2(D)-1:0];
      wdata = {$urandom, $urandom, $urandom, $urandom}; shadow[i] = wdata;
    end
    for (int i = 0; i < 500; i++) begin
      int a;
      logic [W-1:0] hold;
      a = $urandom_range(D-1);
      @(negedge clk); en = 1; we = 0; addr = a[$clog2(D)-1:0];
      @(negedge clk); en = 0; hold = rdata;
      checks++; if (rdata !== shadow[a]) begin failures++; $display("mismatch at %0d", a); end
      @(negedge clk);
      checks++; if (rdata !== hold) failures++;   // output holds while idle
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
