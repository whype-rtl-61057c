// tb_wta: self-checking test of the winner-take-all stage (K=64, W=10).
// Random similarity vectors, vectors with ties and a single large entry; the
// expected winner is the lowest index holding the maximum.
module tb_wta;
  localparam int unsigned K = 64, W = 10;
  int checks = 0, failures = 0;

  logic [W-1:0] sim [K];
  logic [$clog2(K)-1:0] idx;
  logic [W-1:0] mx;

  wta #(.K(K), .W(W)) dut (.sim_i(sim), .idx_o(idx), .max_o(mx));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 500; t++) begin
      int ei, em;
      for (int k = 0; k < K; k++) sim[k] = W'($urandom_range((t % 3 == 0) ? 7 : 1023));
      if (t % 5 == 1) sim[$urandom_range(K - 1)] = '1;
      if (t == 2) for (int k = 0; k < K; k++) sim[k] = '0;
      ei = 0; em = int'(sim[0]);
      for (int k = 1; k < K; k++) if (int'(sim[k]) > em) begin em = int'(sim[k]); ei = k; end
      #1;
      checks++; if (idx != ei[$clog2(K)-1:0] || mx != W'(em)) begin
        failures++; $display("t=%0d got %0d/%0d exp %0d/%0d", t, idx, mx, ei, em);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
