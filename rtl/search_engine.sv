// search_engine: similarity-search engine of one WHYPE receiver chiplet.
//
// Receives the bundled query Q from the deserializer and searches it against
// the K prototypes of its IMC core (imc_crossbar + wta). With baseline
// bundling one search is run and its winner reported as transmitter 0. With
// permuted bundling transmitter m sent rho^m(q_m), so the engine runs M
// searches, the m-th on rho^-m(Q), and reports one winner per transmitter:
// this is how the detected class is tied to the transmitter that sent it.
// The paper states that permutation lets the transmitter be identified; the
// search-per-transmitter sequence is this design's way of doing it.
//
// Interface and timing: hv_valid_i is accepted when idle; the mode is
// sampled with it. The first result follows the query by D/R+3 cycles
// (state change, launch, D/R+1 crossbar cycles); in permuted mode each
// further search adds D/R+2 cycles. res_valid_o pulses once per search with
// res_tx_o, res_class_o and res_score_o. A query that arrives while a search
// runs is dropped and sets the sticky overrun_o (cannot happen at the
// defaults, where a query arrives every D cycles). Prototypes are written
// through wr_*; a write during a search is allowed but affects its result.
module search_engine #(
  parameter int unsigned D = whype_pkg::D_DEF,
  parameter int unsigned K = whype_pkg::K_DEF,
  parameter int unsigned M = whype_pkg::M_DEF,
  parameter int unsigned R = whype_pkg::R_DEF,
  localparam int unsigned SW = $clog2(D + 1),
  localparam int unsigned KW = (K > 1) ? $clog2(K) : 1,
  localparam int unsigned MW = (M > 1) ? $clog2(M) : 1
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  logic          permuted_i,
  input  logic [D-1:0]  hv_i,
  input  logic          hv_valid_i,
  input  logic          wr_en_i,
  input  logic [KW-1:0] wr_addr_i,
  input  logic [D-1:0]  wr_data_i,
  output logic          res_valid_o,
  output logic [MW-1:0] res_tx_o,
  output logic [KW-1:0] res_class_o,
  output logic [SW-1:0] res_score_o,
  output logic          busy_o,
  output logic          overrun_o
);
  typedef enum logic [1:0] {S_IDLE, S_LAUNCH, S_WAIT} state_e;

  state_e        state_q;
  logic [D-1:0]  hv_q;
  logic          perm_q;
  logic [MW-1:0] m_q;

  logic [D-1:0]  query;
  logic          xb_busy, xb_done;
  logic [SW-1:0] sim [K];
  logic [KW-1:0] win_idx;
  logic [SW-1:0] win_val;

  // rho^-m of the received query (identity for m = 0 and in baseline mode).
  hv_permute #(.D(D)) u_unperm (
    .hv_i (hv_q),
    .amt_i($clog2(D)'(m_q)),
    .inv_i(1'b1),
    .hv_o (query)
  );

  imc_crossbar #(.D(D), .K(K), .R(R)) u_xbar (
    .clk_i, .rst_ni,
    .wr_en_i, .wr_addr_i, .wr_data_i,
    .start_i(state_q == S_LAUNCH),
    .query_i(query),
    .busy_o (xb_busy),
    .done_o (xb_done),
    .sim_o  (sim)
  );

  wta #(.K(K), .W(SW)) u_wta (
    .sim_i(sim),
    .idx_o(win_idx),
    .max_o(win_val)
  );

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q     <= S_IDLE;
      hv_q        <= '0;
      perm_q      <= 1'b0;
      m_q         <= '0;
      res_valid_o <= 1'b0;
      res_tx_o    <= '0;
      res_class_o <= '0;
      res_score_o <= '0;
      overrun_o   <= 1'b0;
    end else begin
      res_valid_o <= 1'b0;
      unique case (state_q)
        S_IDLE: begin
          if (hv_valid_i) begin
            hv_q    <= hv_i;
            perm_q  <= permuted_i;
            m_q     <= '0;
            state_q <= S_LAUNCH;
          end
        end
        S_LAUNCH: state_q <= S_WAIT;
        S_WAIT: begin
          if (xb_done) begin
            res_valid_o <= 1'b1;
            res_tx_o    <= m_q;
            res_class_o <= win_idx;
            res_score_o <= win_val;
            if (perm_q && m_q != MW'(M - 1)) begin
              m_q     <= m_q + 1'b1;
              state_q <= S_LAUNCH;
            end else begin
              state_q <= S_IDLE;
            end
          end
        end
        default: state_q <= S_IDLE;
      endcase
      if (hv_valid_i && state_q != S_IDLE) overrun_o <= 1'b1;
    end
  end

  assign busy_o = (state_q != S_IDLE);

  // The crossbar must be free whenever a search is launched.
  a_launch_free: assert property (@(posedge clk_i) disable iff (!rst_ni)
    state_q == S_LAUNCH |-> !xb_busy);
endmodule
