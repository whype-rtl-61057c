// imc_crossbar: digital equivalent of an in-memory-computing associative memory.
//
// In WHYPE each receiver chiplet carries an IMC core: a phase-change-memory
// crossbar whose K columns hold the prototype hypervectors of K classes. The
// query drives the D word lines, each column current is the dot product of
// the query with that column's prototype, and an ADC per column digitises it
// (sim_k = sum_i Q(i) * P_k(i)). The analog crossbar, its pulse-width
// modulated word-line drivers and its ADCs are replaced here by an exact
// digital computation of the same dot products with full resolution
// ($clog2(D+1) bits). R word lines are evaluated per clock, so one search
// takes D/R cycles plus one to latch the query (9 at the defaults). The
// analog core the paper builds on needs 10 to 128 ns per search; this
// stand-in makes no claim about that latency. The row-chunking and the
// write port are this design's choices.
//
// Interface: wr_en_i writes wr_data_i into column wr_addr_i (one per cycle).
// start_i, accepted when busy_o is low, latches query_i and starts a search;
// done_o pulses D/R+1 cycles later with sim_o valid, and sim_o holds until the
// next start. D must be a multiple of R.
module imc_crossbar #(
  parameter int unsigned D = whype_pkg::D_DEF,
  parameter int unsigned K = whype_pkg::K_DEF,
  parameter int unsigned R = whype_pkg::R_DEF,
  localparam int unsigned SW = $clog2(D + 1),
  localparam int unsigned KW = (K > 1) ? $clog2(K) : 1
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  logic          wr_en_i,
  input  logic [KW-1:0] wr_addr_i,
  input  logic [D-1:0]  wr_data_i,
  input  logic          start_i,
  input  logic [D-1:0]  query_i,
  output logic          busy_o,
  output logic          done_o,
  output logic [SW-1:0] sim_o [K]
);
  localparam int unsigned NCH = D / R;
  localparam int unsigned CW  = (NCH > 1) ? $clog2(NCH) : 1;

  logic [D-1:0]  mem_q [K];     // prototype k in column k
  logic [D-1:0]  query_q;
  logic [CW-1:0] chunk_q;
  logic [SW-1:0] acc_q [K];

  // Prototype programming.
  always_ff @(posedge clk_i) begin
    if (wr_en_i) mem_q[wr_addr_i] <= wr_data_i;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      query_q <= '0;
      chunk_q <= '0;
      busy_o  <= 1'b0;
      done_o  <= 1'b0;
      for (int k = 0; k < K; k++) acc_q[k] <= '0;
    end else begin
      done_o <= 1'b0;
      if (!busy_o) begin
        if (start_i) begin
          query_q <= query_i;
          chunk_q <= '0;
          busy_o  <= 1'b1;
          for (int k = 0; k < K; k++) acc_q[k] <= '0;
        end
      end else begin
        // Word lines chunk_q*R .. chunk_q*R+R-1 contribute to every column.
        for (int k = 0; k < K; k++)
          acc_q[k] <= acc_q[k] + SW'($countones(query_q[chunk_q*R +: R] & mem_q[k][chunk_q*R +: R]));
        if (chunk_q == CW'(NCH - 1)) begin
          busy_o <= 1'b0;
          done_o <= 1'b1;
        end else begin
          chunk_q <= chunk_q + 1'b1;
        end
      end
    end
  end

  assign sim_o = acc_q;

  initial begin
    assert (D % R == 0) else $error("imc_crossbar: D must be a multiple of R");
  end
endmodule
