// tx_source_coder: phase source coding of a transmitter chiplet.
//
// WHYPE computes the majority over the air by giving every transmitter two
// pre-assigned carrier phases, one for symbol '0' and one for symbol '1',
// chosen offline so that the superposition seen by every receiver falls into
// two separable clusters (majority 0 / majority 1). This block turns each
// serial bit into the 3-bit code of its phase (code p = p*45 degrees) for the
// RF phase shifter, and enables the power amplifier while a bit is valid.
// The phase pair is a configuration input; the paper's optimised set for
// three transmitters is 0/90, 315/135 and 225/180 degrees (codes 0/2, 7/3,
// 5/4). One register stage of latency is this design's choice.
module tx_source_coder
  import whype_pkg::*;
(
  input  logic   clk_i,
  input  logic   rst_ni,
  input  logic   bit_i,
  input  logic   bit_valid_i,
  input  phase_t ph0_i,      // phase code for symbol '0'
  input  phase_t ph1_i,      // phase code for symbol '1'
  output phase_t phase_o,    // to the phase shifter
  output logic   tx_on_o     // transmitter enabled
);
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      phase_o <= '0;
      tx_on_o <= 1'b0;
    end else begin
      tx_on_o <= bit_valid_i;
      if (bit_valid_i) phase_o <= bit_i ? ph1_i : ph0_i;
    end
  end
endmodule
