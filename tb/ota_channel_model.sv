// ota_channel_model: behavioural model of the analog path between the WHYPE
// transmitters' phase codes and the receivers' data converters. Not
// synthesizable; testbench use only.
//
// It stands for the phase shifters, PAs, antennas, the in-package
// propagation, LNAs, I/Q demodulators and data converters together. Each
// transmitter m sends a unit-amplitude carrier of phase 45 degrees times its
// phase code. Receiver n sees the superposition
//     y_n = sum_m a[n][m] * exp(j * (theta[n] + delta[n][m] + phase_m))
// with a per-receiver common rotation theta (uniform), per-link gains
// a in [0.95, 1.05] and per-link phase errors delta in [-3, 3] degrees, all
// drawn once at start-up. These stand for the electromagnetically simulated
// channel, whose coefficients are not published. Additive noise of standard
// deviation noise_sigma (in LSB, approximately Gaussian, settable at run
// time) is added before rounding to IQ_W-bit I and Q with scale SCALE LSB
// per unit amplitude. Output samples appear LAT cycles after the phase codes.
module ota_channel_model
  import whype_pkg::*;
#(
  parameter int unsigned M     = M_DEF,
  parameter int unsigned N     = N_DEF,
  parameter int unsigned LAT   = 2,
  parameter real         SCALE = 24.0
) (
  input  logic   clk_i,
  input  phase_t tx_phase_i [M],
  input  logic   tx_on_i    [M],
  output iq_t    rx_iq_o       [N],
  output logic   rx_iq_valid_o [N]
);
  localparam real PI = 3.14159265358979;

  real amp   [N][M];
  real ang   [N][M];   // theta + delta, radians
  real noise_sigma = 0.0;

  iq_t  pipe_iq [LAT][N];
  logic pipe_v  [LAT];

  initial begin
    for (int l = 0; l < LAT; l++) pipe_v[l] = 1'b0;
    for (int n = 0; n < N; n++) begin
      real theta;
      theta = 2.0 * PI * real'($urandom_range(35999)) / 36000.0;
      for (int m = 0; m < M; m++) begin
        amp[n][m] = 0.95 + 0.10 * real'($urandom_range(1000)) / 1000.0;
        ang[n][m] = theta + (PI / 180.0) * (-3.0 + 6.0 * real'($urandom_range(1000)) / 1000.0);
      end
    end
  end

  function automatic int sat(real v);
    int r;
    r = $rtoi(v >= 0.0 ? v + 0.5 : v - 0.5);
    if (r > 2 ** (IQ_W - 1) - 1) r = 2 ** (IQ_W - 1) - 1;
    if (r < -(2 ** (IQ_W - 1)))  r = -(2 ** (IQ_W - 1));
    return r;
  endfunction

  // Noise-free received point of receiver n for the given phase codes.
  function automatic void ideal(input int n, input phase_t ph [M], output real re, output real im);
    re = 0.0; im = 0.0;
    for (int m = 0; m < M; m++) begin
      re += SCALE * amp[n][m] * $cos(ang[n][m] + real'(ph[m]) * PI / 4.0);
      im += SCALE * amp[n][m] * $sin(ang[n][m] + real'(ph[m]) * PI / 4.0);
    end
  endfunction

  // Quantised noise-free point, as the data converter would deliver it.
  function automatic iq_t ideal_iq(input int n, input phase_t ph [M]);
    real re, im;
    iq_t s;
    ideal(n, ph, re, im);
    s.i = IQ_W'(sat(re));
    s.q = IQ_W'(sat(im));
    return s;
  endfunction

  function automatic real gauss();
    real s = 0.0;
    for (int k = 0; k < 12; k++) s += real'($urandom_range(100000)) / 100000.0;
    return s - 6.0;
  endfunction

  always @(posedge clk_i) begin
    logic on;
    on = 1'b1;
    for (int m = 0; m < M; m++) if (!tx_on_i[m]) on = 1'b0;
    for (int n = 0; n < N; n++) begin
      real re, im;
      ideal(n, tx_phase_i, re, im);
      re += noise_sigma * gauss();
      im += noise_sigma * gauss();
      pipe_iq[0][n].i <= IQ_W'(sat(re));
      pipe_iq[0][n].q <= IQ_W'(sat(im));
    end
    pipe_v[0] <= on;
    for (int l = 1; l < LAT; l++) begin
      pipe_iq[l] <= pipe_iq[l-1];
      pipe_v[l]  <= pipe_v[l-1];
    end
  end

  always_comb begin
    for (int n = 0; n < N; n++) begin
      rx_iq_o[n]       = pipe_iq[LAT-1][n];
      rx_iq_valid_o[n] = pipe_v[LAT-1];
    end
  end
endmodule
