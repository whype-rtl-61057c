// tb_search_engine: self-checking test of search_engine (D=512, K=64, M=3).
// Programs random prototypes. In baseline mode it sends the bit-wise majority
// of three stored prototypes and expects one result; in permuted mode it
// sends the majority of rho^m of three prototypes and expects M results, the
// m-th being the best dot product of rho^-m(Q), all computed in the
// testbench. Checks the cycle counts (first result D/R+3 cycles after the query, then one every D/R+2), that the sent class
// wins, and that a query arriving during a search sets overrun.
module tb_search_engine;
  localparam int unsigned D = 512, K = 64, M = 3, R = 64;
  localparam int unsigned SW = $clog2(D + 1);
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic perm, hvv, wr_en, rv, busy, ovr;
  logic [D-1:0] hv, wr_data;
  logic [$clog2(K)-1:0] wr_addr, rc;
  logic [$clog2(M)-1:0] rt;
  logic [SW-1:0] rs;
  logic [D-1:0] protos [K];

  search_engine #(.D(D), .K(K), .M(M), .R(R)) dut (
    .clk_i(clk), .rst_ni(rst_n), .permuted_i(perm), .hv_i(hv), .hv_valid_i(hvv),
    .wr_en_i(wr_en), .wr_addr_i(wr_addr), .wr_data_i(wr_data),
    .res_valid_o(rv), .res_tx_o(rt), .res_class_o(rc), .res_score_o(rs),
    .busy_o(busy), .overrun_o(ovr));

  function automatic logic [D-1:0] rand_hv();
    logic [D-1:0] v;
    for (int w = 0; w < D / 32; w++) v[w*32 +: 32] = $urandom;
    return v;
  endfunction

  function automatic logic [D-1:0] rot(logic [D-1:0] v, int a);  // rho^a, a may be negative
    logic [D-1:0] o;
    for (int i = 0; i < D; i++) o[i] = v[((i - a) % int'(D) + D) % D];
    return o;
  endfunction

  function automatic logic [D-1:0] maj3(logic [D-1:0] a, logic [D-1:0] b, logic [D-1:0] c);
    return (a & b) | (a & c) | (b & c);
  endfunction

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    perm = 0; hvv = 0; wr_en = 0; hv = '0; wr_data = '0; wr_addr = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < K; k++) begin
      protos[k] = rand_hv();
      @(negedge clk); wr_en = 1; wr_addr = k[$clog2(K)-1:0]; wr_data = protos[k];
    end
    @(negedge clk); wr_en = 0;

    for (int r = 0; r < 12; r++) begin
      int cls [M];
      logic [D-1:0] q;
      int nres, expn, lastcyc, cyc;
      bit p;
      p = (r % 2 == 1);
      for (int m = 0; m < M; m++) cls[m] = $urandom_range(K - 1);
      q = p ? maj3(rot(protos[cls[0]], 0), rot(protos[cls[1]], 1), rot(protos[cls[2]], 2))
            : maj3(protos[cls[0]], protos[cls[1]], protos[cls[2]]);
      @(negedge clk); hvv = 1; hv = q; perm = p;
      @(negedge clk); hvv = 0; hv = '0; perm = ~p;
      expn = p ? M : 1;
      nres = 0; cyc = 1; lastcyc = 0;
      while (nres < expn) begin
        if (rv) begin
          int bi, bs, s;
          logic [D-1:0] uq;
          uq = rot(q, -nres);
          bi = 0; bs = -1;
          for (int k = 0; k < K; k++) begin
            s = $countones(uq & protos[k]);
            if (s > bs) begin bs = s; bi = k; end
          end
          checks++; if (rt != nres[$clog2(M)-1:0]) begin failures++; $display("r=%0d tx %0d exp %0d", r, rt, nres); end
          checks++; if (rc != bi[$clog2(K)-1:0] || rs != SW'(bs)) begin
            failures++; $display("r=%0d res %0d class %0d/%0d exp %0d/%0d", r, nres, rc, rs, bi, bs);
          end
          // With permutation each transmitter's class is recovered; without
          // it the winner is one of the three bundled classes.
          checks++;
          if (p ? (rc != cls[nres][$clog2(K)-1:0])
                : (rc != cls[0][$clog2(K)-1:0] && rc != cls[1][$clog2(K)-1:0] && rc != cls[2][$clog2(K)-1:0])) begin
            failures++; $display("r=%0d bundled class not found", r);
          end
          checks++; if (cyc - lastcyc != ((nres == 0) ? D / R + 3 : D / R + 2)) begin failures++; $display("r=%0d search took %0d cycles", r, cyc - lastcyc); end
          lastcyc = cyc;
          nres++;
        end
        @(negedge clk); cyc++;
        if (cyc > 200) break;
      end
      checks++; if (nres != expn) begin failures++; $display("r=%0d got %0d results", r, nres); end
      repeat (3) @(negedge clk);
      checks++; if (rv || busy) begin failures++; $display("r=%0d extra activity", r); end
    end

    checks++; if (ovr) begin failures++; $display("overrun without cause"); end
    // A second query during a search is dropped and flagged.
    @(negedge clk); hvv = 1; hv = protos[1]; perm = 1;
    @(negedge clk); hv = protos[2];
    @(negedge clk); hvv = 0;
    checks++; if (!ovr) begin failures++; $display("overrun not flagged"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
