// adapt_cmp: the comparator (Cmp.) of the adaptation engine.
//
// It places a detector output in a histogram bin by the cascade of the threshold-adaptation
// flow: the output is compared with Interval_0, Interval_1, ... in turn, and the first bound it
// does not exceed gives the bin (Num_k counts outputs in (Interval_{k-1}, Interval_k]); an output
// above every bound falls in the last bin. With bounds in ascending order this is the number of
// bounds the output exceeds. Purely combinational. The cascade follows the adaptation-flow
// figure; 16 bins and signed 16-bit values are this design's sizes.
module adapt_cmp #(
  parameter int unsigned NB = eg2c_pkg::NBINS
) (
  input  logic signed [eg2c_pkg::SCOREW-1:0]          score,
  input  eg2c_pkg::score_t [NB-2:0]                    bound,
  output logic [$clog2(NB)-1:0]                       bin
);
  always_comb begin
    logic found;
    found = 1'b0;
    bin   = $clog2(NB)'(NB - 1);
    for (int k = 0; k < int'(NB) - 1; k++) begin
      if (!found && !(score > bound[k])) begin
        bin   = $clog2(NB)'(k);
        found = 1'b1;
      end
    end
  end
endmodule
