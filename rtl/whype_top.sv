// whype_top: digital datapath of the WHYPE wireless scale-out HDC architecture.
//
// M transmitter chiplets each take a D-bit query hypervector from an encoder
// and send it over one shared in-package wireless channel, all at the same
// time. Every transmitter maps its bits to two pre-assigned carrier phases
// (tx_source_coder), chosen so that each of the N receivers sees the
// superposed symbols as two separable clusters: majority 0 and majority 1.
// Every receiver chiplet decodes the majority bit per symbol (ota_decoder),
// reassembles the bundled query Q (rx_deserializer) and searches its K
// prototypes in an in-memory-computing core (search_engine). The wireless
// medium thus bundles and broadcasts in one hop, with no central majority
// circuit. Optionally (permuted bundling) transmitter m rotates its query by
// m positions first and the receivers search once per transmitter.
//
// The RF parts (NRZ driver, PLLs, mixers, phase shifters, PAs, antennas,
// LNAs, I/Q demodulators, data converters) and the package channel are
// analog and sit outside this module: tx_phase_o/tx_on_o go to the phase
// shifters and PAs, rx_iq_i/rx_iq_valid_i come from the receivers' data
// converters. Phases and decision centroids are configuration inputs, found
// offline. The structure follows the paper's circuit view; the single start
// pulse that launches all transmitters and re-aligns all receivers (the
// paper assumes synchronized clocks), the port formats and the one-symbol-
// per-clock timing are this design's choices.
//
// Timing: start_i is accepted while ready_o is high and samples query_i and
// permuted_i. tx_on_o is high for D cycles starting two cycles later. Each
// receiver emits rx_hv_valid_o after its D-th sample, then res_valid_o once
// (baseline) or M times (permuted): the first D/R+3 cycles after
// rx_hv_valid_o, the others D/R+2 cycles apart.
module whype_top
  import whype_pkg::*;
#(
  parameter int unsigned D = D_DEF,
  parameter int unsigned M = M_DEF,
  parameter int unsigned N = N_DEF,
  parameter int unsigned K = K_DEF,
  parameter int unsigned R = R_DEF,
  localparam int unsigned SW = $clog2(D + 1),
  localparam int unsigned KW = (K > 1) ? $clog2(K) : 1,
  localparam int unsigned MW = (M > 1) ? $clog2(M) : 1,
  localparam int unsigned NW = (N > 1) ? $clog2(N) : 1
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  // Control.
  input  logic          start_i,
  input  logic          permuted_i,
  output logic          ready_o,
  // Encoder side.
  input  logic [D-1:0]  query_i     [M],
  // Transmitter configuration and RF control.
  input  phase_t        cfg_ph0_i   [M],
  input  phase_t        cfg_ph1_i   [M],
  output phase_t        tx_phase_o  [M],
  output logic          tx_on_o     [M],
  // Receiver RF samples and configuration.
  input  iq_t           rx_iq_i       [N],
  input  logic          rx_iq_valid_i [N],
  input  iq_t           cfg_c0_i      [N],
  input  iq_t           cfg_c1_i      [N],
  // Prototype programming of the IMC cores.
  input  logic          pw_en_i,
  input  logic [NW-1:0] pw_engine_i,
  input  logic [KW-1:0] pw_class_i,
  input  logic [D-1:0]  pw_data_i,
  // Received bundled queries and search results per receiver.
  output logic [D-1:0]  rx_hv_o       [N],
  output logic          rx_hv_valid_o [N],
  output logic          res_valid_o   [N],
  output logic [MW-1:0] res_tx_o      [N],
  output logic [KW-1:0] res_class_o   [N],
  output logic [SW-1:0] res_score_o   [N],
  output logic          overrun_o     [N]
);
  logic go;
  logic tx_busy [M];

  always_comb begin
    ready_o = 1'b1;
    for (int m = 0; m < M; m++) if (tx_busy[m]) ready_o = 1'b0;
  end
  assign go = start_i && ready_o;

  // ---------------- transmitter chiplets ----------------
  for (genvar m = 0; m < M; m++) begin : g_tx
    logic [D-1:0] hv_perm;
    logic         sbit, sbit_valid;

    hv_permute #(.D(D)) u_perm (
      .hv_i (query_i[m]),
      .amt_i(permuted_i ? $clog2(D)'(m) : '0),
      .inv_i(1'b0),
      .hv_o (hv_perm)
    );

    tx_serializer #(.D(D)) u_ser (
      .clk_i, .rst_ni,
      .load_i     (go),
      .hv_i       (hv_perm),
      .bit_o      (sbit),
      .bit_valid_o(sbit_valid),
      .busy_o     (tx_busy[m])
    );

    tx_source_coder u_coder (
      .clk_i, .rst_ni,
      .bit_i      (sbit),
      .bit_valid_i(sbit_valid),
      .ph0_i      (cfg_ph0_i[m]),
      .ph1_i      (cfg_ph1_i[m]),
      .phase_o    (tx_phase_o[m]),
      .tx_on_o    (tx_on_o[m])
    );
  end

  // Bundling mode of the round in flight, for the receivers.
  logic mode_q;
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)  mode_q <= BUNDLE_BASELINE;
    else if (go)  mode_q <= permuted_i;
  end

  // ---------------- receiver chiplets ----------------
  for (genvar n = 0; n < N; n++) begin : g_rx
    logic mbit, mbit_valid;

    ota_decoder u_dec (
      .clk_i, .rst_ni,
      .iq_i       (rx_iq_i[n]),
      .iq_valid_i (rx_iq_valid_i[n]),
      .c0_i       (cfg_c0_i[n]),
      .c1_i       (cfg_c1_i[n]),
      .bit_o      (mbit),
      .bit_valid_o(mbit_valid)
    );

    rx_deserializer #(.D(D)) u_des (
      .clk_i, .rst_ni,
      .sync_i     (go),
      .bit_i      (mbit),
      .bit_valid_i(mbit_valid),
      .hv_o       (rx_hv_o[n]),
      .hv_valid_o (rx_hv_valid_o[n])
    );

    search_engine #(.D(D), .K(K), .M(M), .R(R)) u_se (
      .clk_i, .rst_ni,
      .permuted_i (mode_q),
      .hv_i       (rx_hv_o[n]),
      .hv_valid_i (rx_hv_valid_o[n]),
      .wr_en_i    (pw_en_i && pw_engine_i == NW'(n)),
      .wr_addr_i  (pw_class_i),
      .wr_data_i  (pw_data_i),
      .res_valid_o(res_valid_o[n]),
      .res_tx_o   (res_tx_o[n]),
      .res_class_o(res_class_o[n]),
      .res_score_o(res_score_o[n]),
      .busy_o     (),
      .overrun_o  (overrun_o[n])
    );
  end
endmodule
