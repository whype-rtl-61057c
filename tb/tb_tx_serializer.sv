// tb_tx_serializer: self-checking test of tx_serializer.
// Loads random hypervectors, collects the serial stream and checks the bit
// order (bit 0 first), the D-cycle frame length, busy, and that a load while
// busy is ignored.
module tb_tx_serializer;
  localparam int unsigned D = 512;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic load, bit_o, bit_valid, busy;
  logic [D-1:0] hv;

  tx_serializer #(.D(D)) dut (.clk_i(clk), .rst_ni(rst_n), .load_i(load), .hv_i(hv),
                              .bit_o(bit_o), .bit_valid_o(bit_valid), .busy_o(busy));

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
    load = 0; hv = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    checks++; if (busy || bit_valid) begin failures++; $display("busy after reset"); end
    for (int f = 0; f < 5; f++) begin
      logic [D-1:0] exp_hv, got;
      int n, cyc;
      exp_hv = rand_hv();
      @(negedge clk); load = 1; hv = exp_hv;
      @(negedge clk); load = 0;
      n = 0; cyc = 0;
      while (bit_valid) begin
        got[n] = bit_o;
        n++; cyc++;
        // A load in mid-frame must be ignored.
        if (n == 10) begin load = 1; hv = ~exp_hv; end
        if (n == 11) load = 0;
        checks++; if (!busy) begin failures++; $display("busy low in frame"); end
        @(negedge clk);
      end
      checks++; if (n != D) begin failures++; $display("frame length %0d", n); end
      checks++; if (got !== exp_hv) begin failures++; $display("frame %0d data mismatch", f); end
      checks++; if (busy) begin failures++; $display("busy after frame"); end
      repeat ($urandom_range(3)) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
