// tx_serializer: parallel-to-serial converter of a transmitter chiplet.
//
// Loads the D-bit query hypervector from the encoder and shifts it out one bit
// per clock, bit 0 first. The clock is the symbol clock of the wireless link,
// so a 512-bit hypervector occupies 512 symbol periods (51.2 ns at the
// paper's 10 Gb/s line rate). The paper names the block only; the shift
// register, the bit order and the load handshake are this design's choices.
//
// Timing: load_i is accepted when busy_o is low; the first bit appears with
// bit_valid_o on the next cycle and the last D cycles later. busy_o covers all
// D bit cycles. A load while busy is ignored.
module tx_serializer #(
  parameter int unsigned D = whype_pkg::D_DEF
) (
  input  logic         clk_i,
  input  logic         rst_ni,
  input  logic         load_i,
  input  logic [D-1:0] hv_i,
  output logic         bit_o,
  output logic         bit_valid_o,
  output logic         busy_o
);
  logic [D-1:0]           sreg_q;
  logic [$clog2(D+1)-1:0] left_q;   // bits still to send, including bit_o

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      sreg_q <= '0;
      left_q <= '0;
    end else if (left_q == '0) begin
      if (load_i) begin
        sreg_q <= hv_i;
        left_q <= ($clog2(D+1))'(D);
      end
    end else begin
      sreg_q <= sreg_q >> 1;
      left_q <= left_q - 1'b1;
    end
  end

  assign bit_o       = sreg_q[0];
  assign bit_valid_o = (left_q != '0);
  assign busy_o      = (left_q != '0);
endmodule
