// tb_imc_crossbar: self-checking test of imc_crossbar at D=512, K=64, R=64.
// Programs random prototypes, runs searches with random queries and with a
// stored prototype as query, and checks every column's dot product against
// a popcount computed in the testbench, plus the D/R+1-cycle search latency.
module tb_imc_crossbar;
  localparam int unsigned D = 512, K = 64, R = 64;
  localparam int unsigned SW = $clog2(D + 1);
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic wr_en, start, busy, done;
  logic [$clog2(K)-1:0] wr_addr;
  logic [D-1:0] wr_data, query;
  logic [SW-1:0] sim [K];
  logic [D-1:0] protos [K];

  imc_crossbar #(.D(D), .K(K), .R(R)) dut (
    .clk_i(clk), .rst_ni(rst_n), .wr_en_i(wr_en), .wr_addr_i(wr_addr), .wr_data_i(wr_data),
    .start_i(start), .query_i(query), .busy_o(busy), .done_o(done), .sim_o(sim));

  function automatic logic [D-1:0] rand_hv();
    logic [D-1:0] v;
    for (int w = 0; w < D / 32; w++) v[w*32 +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; start = 0; wr_addr = '0; wr_data = '0; query = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < K; k++) begin
      protos[k] = rand_hv();
      if (k == 5) protos[k] = '0;
      if (k == 6) protos[k] = '1;
      @(negedge clk); wr_en = 1; wr_addr = k[$clog2(K)-1:0]; wr_data = protos[k];
    end
    @(negedge clk); wr_en = 0;
    for (int s = 0; s < 20; s++) begin
      logic [D-1:0] q;
      int lat;
      q = (s % 4 == 0) ? protos[s % K] : rand_hv();
      if (s == 1) q = '1;
      @(negedge clk); start = 1; query = q;
      @(negedge clk); start = 0; query = ~q;   // query must be latched at start
      lat = 1;
      while (!done) begin @(negedge clk); lat++; end
      checks++; if (lat != D / R + 1) begin failures++; $display("latency %0d", lat); end
      for (int k = 0; k < K; k++) begin
        checks++;
        if (sim[k] != SW'($countones(q & protos[k]))) begin
          failures++; $display("search %0d class %0d: sim %0d exp %0d", s, k, sim[k], $countones(q & protos[k]));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
