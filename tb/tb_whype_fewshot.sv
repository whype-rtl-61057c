// tb_whype_fewshot: few-shot classification workload on the full-size WHYPE
// datapath (D=512, M=3, N=64, K=64) with the behavioural analog path.
//
// It follows the structure of the paper's few-shot experiment with synthetic
// data in place of the encoded image dataset: 100 classes, each with a random
// 512-bit base hypervector, and 20 support examples per class (the base with
// 15% of its bits flipped). The 2000 support vectors fill the first 2000 of
// the 4096 IMC columns, 32 per receiver in order. Each episode gives each of
// the three transmitters a query: a fresh example (15% flips) of a random
// class. The design bundles them over the air, and every receiver searches.
// The host-side decision for transmitter m is the class of the best-scoring
// column over all receivers for search m (baseline: the single search). This
// final comparison across receivers is testbench logic; the paper does not
// describe how the receivers' winners are combined.
//
// Checks: every receiver result matches the best dot product of its decoded
// query against its stored columns (recomputed here), and permuted bundling
// over a noise-free channel classifies at least 90% of the queries
// correctly. Reported, not checked: accuracy for baseline and permuted
// bundling, with and without channel noise. A baseline round gives one
// search for the whole bundle, so it is scored once per episode and counted
// correct when the class it names is any of the three bundled classes.
module tb_whype_fewshot;
  import whype_pkg::*;
  localparam int unsigned D = D_DEF, M = M_DEF, N = N_DEF, K = K_DEF;
  localparam int unsigned SW = $clog2(D + 1);
  localparam int unsigned KW = $clog2(K), MW = $clog2(M), NW = $clog2(N);
  localparam int CLASSES = 100, SHOTS = 20, PER_RX = 32, EPISODES = 25;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

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

  logic [D-1:0] base [CLASSES];
  logic [D-1:0] cols [N][K];
  int           col_label [N][K];   // class of each column, -1 if empty
  int           nres [N];
  int           best_score [M], best_label [M];

  function automatic logic [D-1:0] rand_hv();
    logic [D-1:0] v;
    for (int w = 0; w < D / 32; w++) v[w*32 +: 32] = $urandom;
    return v;
  endfunction

  function automatic logic [D-1:0] noisy_copy(logic [D-1:0] v, int pct);
    for (int i = 0; i < D; i++) if ($urandom_range(99) < pct) v[i] = ~v[i];
    return v;
  endfunction

  function automatic logic [D-1:0] rot(logic [D-1:0] v, int a);
    logic [D-1:0] o;
    for (int i = 0; i < D; i++) o[i] = v[((i - a) % int'(D) + D) % D];
    return o;
  endfunction

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Result monitor: check each result against the receiver's decoded query
  // and keep the best column over all receivers per search.
  always @(posedge clk) begin
    if (rst_n) begin
      for (int n = 0; n < N; n++) begin
        if (res_valid[n]) begin
          logic [D-1:0] uq;
          int bi, bs, s, m;
          m = nres[n];
          uq = rot(rx_hv[n], -m);
          bi = 0; bs = -1;
          for (int k = 0; k < K; k++) begin
            s = (col_label[n][k] < 0) ? 0 : $countones(uq & cols[n][k]);
            if (s > bs) begin bs = s; bi = k; end
          end
          checks++;
          if (int'(res_tx[n]) != m || int'(res_class[n]) != bi || int'(res_score[n]) != bs) begin
            failures++;
            $display("rx %0d search %0d: got %0d/%0d expected %0d/%0d", n, m, res_class[n], res_score[n], bi, bs);
          end
          if (m < M && int'(res_score[n]) > best_score[m]) begin
            best_score[m] = int'(res_score[n]);
            best_label[m] = col_label[n][res_class[n]];
          end
          nres[n]++;
        end
      end
    end
  end

  initial begin
    static int ph0 [3] = '{0, 7, 5};
    static int ph1 [3] = '{2, 3, 4};
    int correct [2][2], total [2][2];   // [permuted][noisy]
    start = 0; permuted = 0; pw_en = 0; pw_engine = '0; pw_class = '0; pw_data = '0;
    for (int m = 0; m < M; m++) begin
      query[m] = '0;
      cfg_ph0[m] = phase_t'(ph0[m % 3]);
      cfg_ph1[m] = phase_t'(ph1[m % 3]);
    end
    for (int a = 0; a < 2; a++) for (int b = 0; b < 2; b++) begin correct[a][b] = 0; total[a][b] = 0; end
    for (int n = 0; n < N; n++) begin
      nres[n] = 0;
      for (int k = 0; k < K; k++) begin col_label[n][k] = -1; cols[n][k] = '0; end
    end
    #1;
    // Decision centroids from each receiver's noise-free constellation.
    for (int n = 0; n < N; n++) begin
      real s0i, s0q, s1i, s1q;
      int n0, n1;
      s0i = 0; s0q = 0; s1i = 0; s1q = 0; n0 = 0; n1 = 0;
      for (int b = 0; b < 2 ** M; b++) begin
        phase_t ph [M];
        iq_t p;
        for (int m = 0; m < M; m++) ph[m] = b[m] ? cfg_ph1[m] : cfg_ph0[m];
        p = u_ch.ideal_iq(n, ph);
        if ($countones(b) > M / 2) begin s1i += p.i; s1q += p.q; n1++; end
        else                       begin s0i += p.i; s0q += p.q; n0++; end
      end
      cfg_c0[n].i = IQ_W'($rtoi(s0i / n0)); cfg_c0[n].q = IQ_W'($rtoi(s0q / n0));
      cfg_c1[n].i = IQ_W'($rtoi(s1i / n1)); cfg_c1[n].q = IQ_W'($rtoi(s1q / n1));
    end

    repeat (3) @(negedge clk);
    rst_n = 1;
    // Support set: 100 classes x 20 shots, 32 columns per receiver.
    for (int c = 0; c < CLASSES; c++) base[c] = rand_hv();
    for (int c = 0; c < CLASSES; c++)
      for (int s = 0; s < SHOTS; s++) begin
        int idx, n, k;
        idx = c * SHOTS + s;
        n = idx / PER_RX; k = idx % PER_RX;
        cols[n][k] = noisy_copy(base[c], 15);
        col_label[n][k] = c;
        @(negedge clk);
        pw_en = 1; pw_engine = NW'(n); pw_class = KW'(k); pw_data = cols[n][k];
      end
    @(negedge clk); pw_en = 0;

    for (int e = 0; e < 4 * EPISODES; e++) begin
      int cls [M];
      bit p, nz;
      int wait_cyc;
      p  = e[0];
      nz = e[1];
      u_ch.noise_sigma = nz ? 1.5 : 0.0;
      for (int m = 0; m < M; m++) begin
        cls[m] = $urandom_range(CLASSES - 1);
        query[m] = noisy_copy(base[cls[m]], 15);
        best_score[m] = -1; best_label[m] = -1;
      end
      for (int n = 0; n < N; n++) nres[n] = 0;
      wait (ready);
      @(negedge clk); start = 1; permuted = p;
      @(negedge clk); start = 0;
      wait_cyc = 0;
      while (wait_cyc < 3 * D) begin
        bit all_done;
        all_done = 1;
        for (int n = 0; n < N; n++) if (nres[n] < (p ? M : 1)) all_done = 0;
        if (all_done) break;
        @(negedge clk); wait_cyc++;
      end
      checks++; if (wait_cyc >= 3 * D) begin failures++; $display("episode %0d timed out", e); end
      @(negedge clk);
      if (p) begin
        for (int m = 0; m < M; m++) begin
          total[1][nz]++;
          if (best_label[m] == cls[m]) correct[1][nz]++;
        end
      end else begin
        bit hit;
        hit = 0;
        for (int m = 0; m < M; m++) if (best_label[0] == cls[m]) hit = 1;
        total[0][nz]++;
        if (hit) correct[0][nz]++;
      end
    end

    $display("few-shot accuracy, 3 bundled queries per round, 100 classes x 20 shots:");
    $display("  baseline (one search per bundle, hit = any bundled class)");
    $display("            ideal channel %0d/%0d   noisy channel %0d/%0d",
             correct[0][0], total[0][0], correct[0][1], total[0][1]);
    $display("  permuted  ideal channel %0d/%0d   noisy channel %0d/%0d",
             correct[1][0], total[1][0], correct[1][1], total[1][1]);
    checks++;
    if (correct[1][0] * 10 < total[1][0] * 9) begin
      failures++; $display("permuted accuracy below 90%%");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
