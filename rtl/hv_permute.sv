// hv_permute: hypervector permutation used by permuted bundling.
//
// Before bundling, transmitter m applies the permutation rho^m to its query so
// that the bundled hypervector keeps the queries quasi-orthogonal and a search
// can tell which transmitter a detected class came from. A receiver undoes it
// with rho^-m before searching. rho is a cyclic rotation by one position
// towards the MSB: rho(x)[i] = x[(i-1) mod D]. The paper asks for a
// permutation but does not say which; the cyclic rotation is this design's
// choice. Purely combinational; amt_i must be below D.
module hv_permute #(
  parameter int unsigned D = whype_pkg::D_DEF
) (
  input  logic [D-1:0]         hv_i,
  input  logic [$clog2(D)-1:0] amt_i,   // permutation power
  input  logic                 inv_i,   // 1: apply the inverse rho^-amt
  output logic [D-1:0]         hv_o
);
  logic [2*D-1:0] dbl;
  logic [$clog2(2*D)-1:0] rot_right;  // rotation towards the LSB

  always_comb begin
    dbl = {hv_i, hv_i};
    // Forward rho^amt is a left rotation by amt, i.e. a right rotation by D-amt.
    if (inv_i || amt_i == '0) rot_right = ($clog2(2*D))'(amt_i);
    else                      rot_right = ($clog2(2*D))'(D - int'(amt_i));
    hv_o = dbl[rot_right +: D];
  end
endmodule
