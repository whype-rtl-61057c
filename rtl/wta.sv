// wta: winner-take-all stage of an IMC core.
//
// Picks the class whose similarity is largest and outputs its index and
// value; the class label of the search is the index. Ties go to the lowest
// index (this design's choice). Combinational: a linear compare chain, which
// synthesis may rebalance.
module wta #(
  parameter int unsigned K = whype_pkg::K_DEF,
  parameter int unsigned W = $clog2(whype_pkg::D_DEF + 1),
  localparam int unsigned KW = (K > 1) ? $clog2(K) : 1
) (
  input  logic [W-1:0]  sim_i [K],
  output logic [KW-1:0] idx_o,
  output logic [W-1:0]  max_o
);
  always_comb begin
    idx_o = '0;
    max_o = sim_i[0];
    for (int k = 1; k < K; k++) begin
      if (sim_i[k] > max_o) begin
        idx_o = KW'(k);
        max_o = sim_i[k];
      end
    end
  end
endmodule
