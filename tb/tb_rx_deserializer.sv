// tb_rx_deserializer: self-checking test of rx_deserializer.
// Feeds frames of random bits with random gaps in valid and checks the
// assembled word (first bit at bit 0), the single hv_valid pulse one cycle
// after the last bit, and that sync discards a partial frame.
module tb_rx_deserializer;
  localparam int unsigned D = 512;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic sync, b, bv, hvv;
  logic [D-1:0] hv;
  int pulses = 0;

  rx_deserializer #(.D(D)) dut (.clk_i(clk), .rst_ni(rst_n), .sync_i(sync), .bit_i(b),
                                .bit_valid_i(bv), .hv_o(hv), .hv_valid_o(hvv));

  always @(negedge clk) if (hvv) pulses++;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send_frame(input logic [D-1:0] v, input int nbits);
    for (int i = 0; i < nbits; i++) begin
      while ($urandom_range(3) == 0) begin @(negedge clk); bv = 0; end
      @(negedge clk); bv = 1; b = v[i];
    end
    @(negedge clk); bv = 0;
  endtask

  initial begin
    sync = 0; b = 0; bv = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); sync = 1; @(negedge clk); sync = 0;
    for (int f = 0; f < 6; f++) begin
      logic [D-1:0] v;
      int p0;
      for (int w = 0; w < D / 32; w++) v[w*32 +: 32] = $urandom;
      if (f == 3) begin
        // Partial frame, then sync: the partial bits must be discarded.
        send_frame(~v, 100);
        @(negedge clk); sync = 1; @(negedge clk); sync = 0;
      end
      p0 = pulses;
      send_frame(v, D);   // returns one cycle after the last bit
      @(negedge clk);
      checks++; if (pulses != p0 + 1) begin failures++; $display("frame %0d: %0d pulses", f, pulses - p0); end
      checks++; if (hv !== v) begin failures++; $display("frame %0d data mismatch", f); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
