// tb_whype_top: end-to-end test of the WHYPE datapath at its default size
// (D=512, M=3, N=64, K=64, R=64), with the analog path replaced by
// ota_channel_model.
//
// Flow: program the paper's three-transmitter phase set (0/90, 315/135,
// 225/180 degrees), compute each receiver's two decision centroids from the
// model's noise-free constellation (mean of the majority-0 and majority-1
// points, what K-means converges to on separable clusters), program random
// prototypes into all 64 x 64 IMC columns, then run bundling rounds that
// alternate baseline and permuted bundling, some noise-free and some with
// channel noise. Each query is a stored prototype with 5% of its bits
// flipped.
//
// Checks, all against values computed here from the sampled I/Q stream and
// the stored prototypes:
//  * every transmitter is on for exactly D cycles, starting 2 cycles after
//    start;
//  * every received hypervector equals the nearest-centroid decisions on
//    its D samples, and is delivered 2 cycles after the last sample;
//  * in noise-free rounds the received hypervector equals the true bit-wise
//    majority of the (permuted) queries at every receiver whose model
//    constellation is separable (a few drawn channels are not, which is
//    the over-the-air error floor that exists without noise);
//  * every search result (count, transmitter tag, class, score) equals the
//    best dot product against that receiver's prototypes;
//  * in noise-free permuted rounds, the receiver holding a transmitter's
//    class recovers that class for that transmitter.
// Mechanisms counted, each must occur: baseline rounds, permuted rounds,
// over-the-air majority errors under noise, error-free noiseless rounds.
module tb_whype_top;
  import whype_pkg::*;
  localparam int unsigned D = D_DEF, M = M_DEF, N = N_DEF, K = K_DEF, R = R_DEF;
  localparam int unsigned SW = $clog2(D + 1);
  localparam int unsigned KW = $clog2(K), MW = $clog2(M), NW = $clog2(N);
  localparam int ROUNDS = 6;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  // DUT signals.
  logic start, permuted, ready;
  logic [D-1:0] query [M];
  phase_t cfg_ph0 [M], cfg_ph1 [M], tx_phase [M];
  logic tx_on [M];
  iq_t rx_iq [N], cfg_c0 [N], cfg_c1 [N];
  logic rx_iq_valid [N];
  logic pw_en;
  logic [NW-1:0] pw_engine;
  logic [KW-1:0] pw_class;
  logic [D-1:0] pw_data;
  logic [D-1:0] rx_hv [N];
  logic rx_hv_valid [N], res_valid [N], overrun [N];
  logic [MW-1:0] res_tx [N];
  logic [KW-1:0] res_class [N];
  logic [SW-1:0] res_score [N];

  whype_top dut (
    .clk_i(clk), .rst_ni(rst_n), .start_i(start), .permuted_i(permuted), .ready_o(ready),
    .query_i(query), .cfg_ph0_i(cfg_ph0), .cfg_ph1_i(cfg_ph1), .tx_phase_o(tx_phase), .tx_on_o(tx_on),
    .rx_iq_i(rx_iq), .rx_iq_valid_i(rx_iq_valid), .cfg_c0_i(cfg_c0), .cfg_c1_i(cfg_c1),
    .pw_en_i(pw_en), .pw_engine_i(pw_engine), .pw_class_i(pw_class), .pw_data_i(pw_data),
    .rx_hv_o(rx_hv), .rx_hv_valid_o(rx_hv_valid), .res_valid_o(res_valid), .res_tx_o(res_tx),
    .res_class_o(res_class), .res_score_o(res_score), .overrun_o(overrun));

  ota_channel_model #(.M(M), .N(N)) u_ch (
    .clk_i(clk), .tx_phase_i(tx_phase), .tx_on_i(tx_on), .rx_iq_o(rx_iq), .rx_iq_valid_o(rx_iq_valid));

  // Reference state.
  logic [D-1:0] protos [N][K];
  logic [D-1:0] exp_hv [N];      // nearest-centroid decisions on the sampled stream
  logic [D-1:0] true_maj;        // bit-wise majority of the transmitted (permuted) queries
  logic [D-1:0] last_hv [N];     // reference hypervector of the last completed frame
  int  nsamp [N], last_samp_cyc [N], nres [N];
  int  cyc = 0;
  bit  round_perm;
  int  tx_cls [M], tx_eng [M];
  bit  separable [N];            // all 2^M noise-free points on the right side
  bit  noisy;
  int  n_nonsep = 0;

  // Mechanism counters.
  int n_baseline = 0, n_permuted = 0, n_ota_err = 0, n_clean_rounds = 0, n_identified = 0;

  function automatic logic [D-1:0] rand_hv();
    logic [D-1:0] v;
    for (int w = 0; w < D / 32; w++) v[w*32 +: 32] = $urandom;
    return v;
  endfunction

  function automatic logic [D-1:0] rot(logic [D-1:0] v, int a);  // rho^a
    logic [D-1:0] o;
    for (int i = 0; i < D; i++) o[i] = v[((i - a) % int'(D) + D) % D];
    return o;
  endfunction

  function automatic logic nearest(iq_t s, iq_t a0, iq_t a1);
    int d0, d1;
    d0 = (int'(s.i) - int'(a0.i)) ** 2 + (int'(s.q) - int'(a0.q)) ** 2;
    d1 = (int'(s.i) - int'(a1.i)) ** 2 + (int'(s.q) - int'(a1.q)) ** 2;
    return d1 < d0;
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) cyc <= cyc + 1;

  // Receiver-side monitors.
  always @(posedge clk) begin
    if (rst_n) begin
      for (int n = 0; n < N; n++) begin
        if (rx_iq_valid[n]) begin
          exp_hv[n][nsamp[n] % D] = nearest(rx_iq[n], cfg_c0[n], cfg_c1[n]);
          nsamp[n]++;
          last_samp_cyc[n] = cyc;
        end
        if (rx_hv_valid[n]) begin
          checks++;
          if (nsamp[n] != D || rx_hv[n] !== exp_hv[n] || cyc - last_samp_cyc[n] != 2) begin
            failures++;
            $display("rx %0d: frame mismatch (samples %0d, delay %0d)", n, nsamp[n], cyc - last_samp_cyc[n]);
          end
          if (separable[n] || noisy)
            for (int i = 0; i < D; i++) if (exp_hv[n][i] != true_maj[i]) n_ota_err++;
          last_hv[n] = exp_hv[n];
        end
        if (res_valid[n]) begin
          logic [D-1:0] uq;
          int bi, bs, s, m;
          m = nres[n];
          uq = rot(last_hv[n], -m);
          bi = 0; bs = -1;
          for (int k = 0; k < K; k++) begin
            s = $countones(uq & protos[n][k]);
            if (s > bs) begin bs = s; bi = k; end
          end
          checks++;
          if (int'(res_tx[n]) != m || int'(res_class[n]) != bi || int'(res_score[n]) != bs) begin
            failures++;
            $display("rx %0d result %0d: tx %0d class %0d score %0d, expected %0d/%0d/%0d",
                     n, m, res_tx[n], res_class[n], res_score[n], m, bi, bs);
          end
          if (round_perm && !noisy && separable[n] && m < M && tx_eng[m] == n) begin
            checks++;
            if (int'(res_class[n]) != tx_cls[m]) begin
              failures++; $display("rx %0d did not identify the class of tx %0d", n, m);
            end else n_identified++;
          end
          nres[n]++;
        end
      end
    end
  end

  initial begin
    static int ph0 [3] = '{0, 7, 5};   // 0, 315, 225 degrees
    static int ph1 [3] = '{2, 3, 4};   // 90, 135, 180 degrees
    start = 0; permuted = 0; pw_en = 0; pw_engine = '0; pw_class = '0; pw_data = '0;
    for (int m = 0; m < M; m++) begin
      query[m] = '0;
      cfg_ph0[m] = phase_t'(ph0[m % 3]);
      cfg_ph1[m] = phase_t'(ph1[m % 3]);
    end
    for (int n = 0; n < N; n++) begin nsamp[n] = 0; nres[n] = 0; last_samp_cyc[n] = 0; end
    #1;
    // Decision centroids from the noise-free constellation of each receiver.
    for (int n = 0; n < N; n++) begin
      real s0i, s0q, s1i, s1q;
      int n0, n1;
      iq_t pts [2**M];
      s0i = 0; s0q = 0; s1i = 0; s1q = 0; n0 = 0; n1 = 0;
      for (int b = 0; b < 2 ** M; b++) begin
        phase_t ph [M];
        for (int m = 0; m < M; m++) ph[m] = b[m] ? cfg_ph1[m] : cfg_ph0[m];
        pts[b] = u_ch.ideal_iq(n, ph);
        if ($countones(b) > M / 2) begin s1i += pts[b].i; s1q += pts[b].q; n1++; end
        else                       begin s0i += pts[b].i; s0q += pts[b].q; n0++; end
      end
      cfg_c0[n].i = IQ_W'($rtoi(s0i / n0)); cfg_c0[n].q = IQ_W'($rtoi(s0q / n0));
      cfg_c1[n].i = IQ_W'($rtoi(s1i / n1)); cfg_c1[n].q = IQ_W'($rtoi(s1q / n1));
      // A receiver whose noise-free constellation is not separable by the
      // two regions decodes some combinations wrongly even without noise.
      separable[n] = 1;
      for (int b = 0; b < 2 ** M; b++)
        if (nearest(pts[b], cfg_c0[n], cfg_c1[n]) != ($countones(b) > M / 2)) separable[n] = 0;
      if (!separable[n]) n_nonsep++;
    end

    repeat (3) @(negedge clk);
    rst_n = 1;
    // Program all prototypes.
    for (int n = 0; n < N; n++)
      for (int k = 0; k < K; k++) begin
        protos[n][k] = rand_hv();
        @(negedge clk);
        pw_en = 1; pw_engine = NW'(n); pw_class = KW'(k); pw_data = protos[n][k];
      end
    @(negedge clk); pw_en = 0;

    for (int r = 0; r < ROUNDS; r++) begin
      int start_cyc, first_on [M], on_cnt [M], ota_before, wait_cyc;
      round_perm = (r % 2 == 1);
      noisy = (r >= 2);
      u_ch.noise_sigma = noisy ? 1.5 : 0.0;
      for (int m = 0; m < M; m++) begin
        logic [D-1:0] q;
        tx_eng[m] = $urandom_range(N - 1);
        tx_cls[m] = $urandom_range(K - 1);
        q = protos[tx_eng[m]][tx_cls[m]];
        for (int f = 0; f < D / 20; f++) q[$urandom_range(D - 1)] ^= 1'b1;
        query[m] = q;
      end
      begin
        logic [D-1:0] tq [M];
        for (int m = 0; m < M; m++) tq[m] = round_perm ? rot(query[m], m) : query[m];
        for (int i = 0; i < D; i++) begin
          int ones;
          ones = 0;
          for (int m = 0; m < M; m++) ones += int'(tq[m][i]);
          true_maj[i] = (ones > M / 2);
        end
      end
      for (int n = 0; n < N; n++) begin nsamp[n] = 0; nres[n] = 0; end
      ota_before = n_ota_err;

      checks++; if (!ready) begin failures++; $display("not ready before round %0d", r); end
      @(negedge clk); start = 1; permuted = round_perm; start_cyc = cyc;
      @(negedge clk); start = 0; permuted = ~round_perm;
      for (int m = 0; m < M; m++) begin first_on[m] = -1; on_cnt[m] = 0; end
      // Watch the transmitters until all receivers have reported.
      wait_cyc = 0;
      while (wait_cyc < 3 * D) begin
        bit all_done;
        all_done = 1;
        for (int m = 0; m < M; m++) if (tx_on[m]) begin
          if (first_on[m] < 0) first_on[m] = cyc;
          on_cnt[m]++;
        end
        for (int n = 0; n < N; n++) if (nres[n] < (round_perm ? M : 1)) all_done = 0;
        if (all_done) break;
        @(negedge clk); wait_cyc++;
      end
      for (int m = 0; m < M; m++) begin
        checks++;
        if (on_cnt[m] != D || first_on[m] - start_cyc != 2) begin
          failures++; $display("round %0d tx %0d: on %0d cycles from +%0d", r, m, on_cnt[m], first_on[m] - start_cyc);
        end
      end
      repeat (5) @(negedge clk);
      for (int n = 0; n < N; n++) begin
        checks++;
        if (nres[n] != (round_perm ? M : 1) || overrun[n]) begin
          failures++; $display("round %0d rx %0d: %0d results, overrun %0d", r, n, nres[n], overrun[n]);
        end
      end
      if (!noisy) begin
        checks++;
        if (n_ota_err != ota_before) begin failures++; $display("round %0d: OTA errors without noise", r); end
        else n_clean_rounds++;
      end
      if (round_perm) n_permuted++; else n_baseline++;
      $display("round %0d: %s bundling, noise %0d, OTA bit errors %0d (BER %f)", r,
               round_perm ? "permuted" : "baseline", noisy, n_ota_err - ota_before,
               real'(n_ota_err - ota_before) / real'((noisy ? N : N - n_nonsep) * D));
    end

    $display("mechanisms: baseline=%0d permuted=%0d ota_errors=%0d clean_rounds=%0d identified=%0d (non-separable receivers %0d)",
             n_baseline, n_permuted, n_ota_err, n_clean_rounds, n_identified, n_nonsep);
    checks++; if (n_baseline == 0)     begin failures++; $display("no baseline round"); end
    checks++; if (n_permuted == 0)     begin failures++; $display("no permuted round"); end
    checks++; if (n_ota_err == 0)      begin failures++; $display("no OTA error under noise"); end
    checks++; if (n_clean_rounds == 0) begin failures++; $display("no clean round"); end
    checks++; if (n_identified == 0)   begin failures++; $display("no class identified"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
