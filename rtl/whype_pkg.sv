// whype_pkg: constants and types shared by the WHYPE digital datapath.
//
// WHYPE bundles the query hypervectors of M encoder chiplets by transmitting
// them at the same time on one wireless channel; each of N receiver chiplets
// decodes the bit-wise majority of the superposed symbols and searches its
// in-memory associative memory of K prototypes. This package holds the
// default sizes (D = 512-bit hypervectors, M = 3 transmitters, N = 64
// receivers, K = 64 classes per receiver), the 3-bit transmitter phase code
// (8 phases in 45 degree steps) and the I/Q sample struct delivered by a
// receiver's data converter. The sizes and the 8-phase set are taken from the
// paper; the 8-bit I/Q resolution is this design's choice.
package whype_pkg;

  // Default architecture sizes.
  localparam int unsigned D_DEF = 512;  // hypervector dimension
  localparam int unsigned M_DEF = 3;    // transmitters (encoders)
  localparam int unsigned N_DEF = 64;   // receivers (IMC search engines)
  localparam int unsigned K_DEF = 64;   // prototypes (classes) per IMC core
  localparam int unsigned R_DEF = 64;   // crossbar word lines evaluated per cycle

  // Transmitter phase code: value p selects p * 45 degrees.
  localparam int unsigned PH_W = 3;
  typedef logic [PH_W-1:0] phase_t;

  // Receiver data-converter sample: signed I and Q.
  localparam int unsigned IQ_W = 8;
  typedef struct packed {
    logic signed [IQ_W-1:0] i;
    logic signed [IQ_W-1:0] q;
  } iq_t;

  // Bundling mode.
  typedef enum logic {
    BUNDLE_BASELINE = 1'b0,  // plain bit-wise majority
    BUNDLE_PERMUTED = 1'b1   // each transmitter permutes its query first
  } bundle_mode_e;

endpackage
