// tb_ota_decoder: self-checking test of ota_decoder.
// Random centroid pairs and random I/Q samples (including samples exactly on
// a centroid and on the bisector); the expected bit is the nearest centroid
// computed with integer arithmetic in the testbench, ties giving 0. Checks
// the one-cycle latency and valid.
module tb_ota_decoder;
  import whype_pkg::*;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  iq_t  x, c0, c1;
  logic xv, b, bv;

  ota_decoder dut (.clk_i(clk), .rst_ni(rst_n), .iq_i(x), .iq_valid_i(xv),
                   .c0_i(c0), .c1_i(c1), .bit_o(b), .bit_valid_o(bv));

  function automatic logic ref_bit(iq_t s, iq_t a0, iq_t a1);
    int d0, d1;
    d0 = (int'(s.i) - int'(a0.i)) ** 2 + (int'(s.q) - int'(a0.q)) ** 2;
    d1 = (int'(s.i) - int'(a1.i)) ** 2 + (int'(s.q) - int'(a1.q)) ** 2;
    return d1 < d0;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ones;
    ones = 0;
    x = '0; c0 = '0; c1 = '0; xv = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      logic e;
      @(negedge clk);
      c0 = iq_t'($urandom); c1 = iq_t'($urandom);
      case (t % 5)
        0: x = c0;
        1: x = c1;
        2: begin  // c1 = -c0 and x on the bisector through 0: a tie
          c0.i = IQ_W'($signed($urandom_range(254)) - 127);
          c0.q = IQ_W'($signed($urandom_range(254)) - 127);
          c1.i = -c0.i; c1.q = -c0.q; x = '0;
        end
        default: x = iq_t'($urandom);
      endcase
      xv = 1;
      e = ref_bit(x, c0, c1);
      ones += int'(e);
      @(negedge clk);
      checks++; if (!bv) begin failures++; $display("valid missing t=%0d", t); end
      checks++; if (b !== e) begin failures++; $display("bit mismatch t=%0d", t); end
      xv = 0;
      @(negedge clk);
      checks++; if (bv) begin failures++; $display("valid stuck t=%0d", t); end
    end
    checks++; if (ones < 500) begin failures++; $display("too few ones: %0d", ones); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
