// ota_decoder: over-the-air majority decoder of a receiver chiplet.
//
// Each receiver sees the superposition of the M transmitted symbols as one
// point of a 2^M-point constellation. The transmitter phases are chosen so the
// points split into two clusters, majority 0 and majority 1; the paper finds
// the decision regions with K-means (K = 2). This block holds the two cluster
// centroids (per-receiver configuration computed offline) and decides the
// majority bit as the nearest centroid in squared Euclidean distance, which
// is exactly the pair of K-means regions. Ties decide 0 (this design's
// choice). One register stage: the bit follows its sample by one cycle.
module ota_decoder
  import whype_pkg::*;
(
  input  logic clk_i,
  input  logic rst_ni,
  input  iq_t  iq_i,
  input  logic iq_valid_i,
  input  iq_t  c0_i,        // centroid of the majority-0 cluster
  input  iq_t  c1_i,        // centroid of the majority-1 cluster
  output logic bit_o,
  output logic bit_valid_o
);
  localparam int unsigned DW = IQ_W + 1;     // difference width
  localparam int unsigned SW = 2 * DW + 1;   // squared distance width

  logic signed [DW-1:0] di0, dq0, di1, dq1;
  logic signed [SW-1:0] ei0, eq0, ei1, eq1;   // differences widened for the squares
  logic        [SW-1:0] dist0, dist1;

  always_comb begin
    di0 = DW'(iq_i.i) - DW'(c0_i.i);
    dq0 = DW'(iq_i.q) - DW'(c0_i.q);
    di1 = DW'(iq_i.i) - DW'(c1_i.i);
    dq1 = DW'(iq_i.q) - DW'(c1_i.q);
    ei0 = SW'(di0);  eq0 = SW'(dq0);
    ei1 = SW'(di1);  eq1 = SW'(dq1);
    // At most 2 * 255^2, which fits the signed SW-bit range.
    dist0 = unsigned'(ei0 * ei0 + eq0 * eq0);
    dist1 = unsigned'(ei1 * ei1 + eq1 * eq1);
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      bit_o       <= 1'b0;
      bit_valid_o <= 1'b0;
    end else begin
      bit_valid_o <= iq_valid_i;
      if (iq_valid_i) bit_o <= (dist1 < dist0);
    end
  end
endmodule
