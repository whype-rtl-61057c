// tb_tx_source_coder: self-checking test of tx_source_coder.
// Uses the three phase pairs of the optimised three-transmitter set
// (0/90, 315/135, 225/180 degrees = codes 0/2, 7/3, 5/4) and random ones,
// drives random bits with random valid gaps, and checks the phase code and
// transmit enable one cycle later.
module tb_tx_source_coder;
  import whype_pkg::*;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic   b, bv, on;
  phase_t ph0, ph1, ph;

  tx_source_coder dut (.clk_i(clk), .rst_ni(rst_n), .bit_i(b), .bit_valid_i(bv),
                       .ph0_i(ph0), .ph1_i(ph1), .phase_o(ph), .tx_on_o(on));

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  phase_t paper0 [3] = '{3'd0, 3'd7, 3'd5};
  phase_t paper1 [3] = '{3'd2, 3'd3, 3'd4};

  initial begin
    phase_t last;
    b = 0; bv = 0; ph0 = 0; ph1 = 0; last = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 600; t++) begin
      logic eb, ev;
      phase_t e0, e1;
      @(negedge clk);
      if (t < 300) begin e0 = paper0[t % 3]; e1 = paper1[t % 3]; end
      else begin e0 = phase_t'($urandom); e1 = phase_t'($urandom); end
      eb = 1'($urandom); ev = ($urandom_range(3) != 0);
      b = eb; bv = ev; ph0 = e0; ph1 = e1;
      @(negedge clk);
      checks++; if (on !== ev) begin failures++; $display("tx_on mismatch t=%0d", t); end
      if (ev) last = eb ? e1 : e0;
      checks++; if (ph !== last) begin failures++; $display("phase mismatch t=%0d got %0d exp %0d", t, ph, last); end
      bv = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
