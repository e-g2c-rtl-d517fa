// hist_counters: the histogram counters Num_0..Num_n of the adaptation engine.
//
// Each detector output adds one (the "+1" of the architecture diagram) to the counter of its
// bin; counters saturate at their maximum instead of wrapping, which keeps the least-occurrence
// search meaningful over long periods. clr empties all counters (the "reset histogram counters"
// step after a threshold update) and takes priority over inc. Counter width 8 bits follows the
// 8*8b bus into the Argmin; the saturation is this design's choice. Updates at the clock edge.
module hist_counters #(
  parameter int unsigned NB = eg2c_pkg::NBINS,
  parameter int unsigned CW = eg2c_pkg::CNTW
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  clr,
  input  logic                  inc,
  input  logic [$clog2(NB)-1:0] bin,
  output logic [NB-1:0][CW-1:0] num
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   num <= '0;
    else if (clr) num <= '0;
    else if (inc && num[bin] != {CW{1'b1}}) num[bin] <= num[bin] + 1'b1;
  end
endmodule
