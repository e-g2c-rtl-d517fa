// argmin_tree: the Argmin of the adaptation engine.
//
// A binary tree of ">" comparators (4, 2, then 1 for the 8 inputs drawn in the architecture
// diagram) finds the smallest of the sensitive-range counters Num_s0..Num_sn. Each node passes on
// its right input only when the left one is strictly greater, so ties go to the lower index.
// Combinational; the number of inputs must be a power of two.
module argmin_tree #(
  parameter int unsigned N  = eg2c_pkg::NSENS,
  parameter int unsigned CW = eg2c_pkg::CNTW
) (
  input  logic [N-1:0][CW-1:0]   val,
  output logic [$clog2(N)-1:0]   idx,
  output logic [CW-1:0]          min
);
  localparam int unsigned LV = $clog2(N);
  // node storage per level: level 0 = inputs
  logic [LV:0][N-1:0][CW-1:0]   v;
  logic [LV:0][N-1:0][LV-1:0]   ix;

  always_comb begin
    v  = '0;
    ix = '0;
    for (int i = 0; i < int'(N); i++) begin
      v[0][i]  = val[i];
      ix[0][i] = LV'(i);
    end
    for (int s = 0; s < int'(LV); s++) begin
      for (int i = 0; i < (int'(N) >> (s + 1)); i++) begin
        if (v[s][2*i] > v[s][2*i+1]) begin
          v[s+1][i]  = v[s][2*i+1];
          ix[s+1][i] = ix[s][2*i+1];
        end else begin
          v[s+1][i]  = v[s][2*i];
          ix[s+1][i] = ix[s][2*i];
        end
      end
    end
    idx = ix[LV][0];
    min = v[LV][0];
  end
endmodule
