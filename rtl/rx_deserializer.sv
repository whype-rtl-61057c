// rx_deserializer: serial-to-parallel converter of a receiver chiplet.
//
// Collects D decoded majority bits, first bit into bit 0, and presents the
// bundled query hypervector to the search engine with a one-cycle
// hv_valid_o pulse. All chiplets share a synchronized clock, so frames are
// aligned by a sync pulse issued together with the transmitters' start:
// sync_i restarts the bit count. The paper names the block only; framing and
// bit order are this design's choices and match tx_serializer.
//
// Timing: hv_valid_o rises the cycle after the D-th valid bit; hv_o holds
// until the next frame completes.
module rx_deserializer #(
  parameter int unsigned D = whype_pkg::D_DEF
) (
  input  logic         clk_i,
  input  logic         rst_ni,
  input  logic         sync_i,
  input  logic         bit_i,
  input  logic         bit_valid_i,
  output logic [D-1:0] hv_o,
  output logic         hv_valid_o
);
  logic [D-1:1]         sreg_q;   // bits received so far, newest at the top
  logic [$clog2(D)-1:0] cnt_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      sreg_q     <= '0;
      cnt_q      <= '0;
      hv_o       <= '0;
      hv_valid_o <= 1'b0;
    end else begin
      hv_valid_o <= 1'b0;
      if (sync_i) begin
        cnt_q <= '0;
      end else if (bit_valid_i) begin
        // Shift in from the top: the D-th bit completes the word with the
        // first one at bit 0.
        sreg_q <= {bit_i, sreg_q[D-1:2]};
        if (cnt_q == ($clog2(D))'(D - 1)) begin
          cnt_q      <= '0;
          hv_o       <= {bit_i, sreg_q};
          hv_valid_o <= 1'b1;
        end else begin
          cnt_q <= cnt_q + 1'b1;
        end
      end
    end
  end
endmodule
