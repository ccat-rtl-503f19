// pfb_coeff_rom -- prototype low-pass filter of the polyphase synthesis bank,
// stored as TAPS lanes of P coefficients and read one path at a time.
//
// The prototype has L = TAPS*P taps (16 x 1024 by default) and is a windowed
// sinc with a 4-term Blackman-Harris window, as in the paper:
//   h(n) = sinc((n - (L-1)/2) / P) * w(n),  sinc(x) = sin(pi*x)/(pi*x)
//   w(n) = 0.35875 - 0.48829 cos(2*pi*n/(L-1)) + 0.14128 cos(4*pi*n/(L-1))
//          - 0.01168 cos(6*pi*n/(L-1))
// The sinc's first zeros at +-P samples give a channel one critically-sampled
// channel wide (fs/P). The window coefficients are the standard 4-term
// Blackman-Harris ones; the symmetric form, the unit peak and the CW-bit
// quantisation, round(h * (2**(CW-1)-1)), are this design's choices.
// The table is computed when the memory is initialised, not read from a file.
//
// Interface: addr selects the path p; coef[t] = h(t*P + p) for lane t.
// Timing: registered read, one clock of latency.
module pfb_coeff_rom
  import psb_pkg::*;
#(
  parameter int unsigned P    = 1024,
  parameter int unsigned TAPS = 16,
  parameter int unsigned CW   = COEF_W,
  localparam int unsigned PB  = $clog2(P)
) (
  input  logic                 clk,
  input  logic [PB-1:0]        addr,
  output logic signed [CW-1:0] coef [TAPS]
);
  localparam int unsigned L = TAPS * P;

  function automatic logic signed [CW-1:0] proto(input int n);
    real x, s, w, c;
    c = (L - 1) / 2.0;
    x = (n - c) / P;
    s = $sin(PI * x) / (PI * x);
    w = 0.35875 - 0.48829 * $cos(2.0 * PI * n / (L - 1))
                + 0.14128 * $cos(4.0 * PI * n / (L - 1))
                - 0.01168 * $cos(6.0 * PI * n / (L - 1));
    return CW'(round_real(s * w * (2.0 ** (CW - 1) - 1.0)));
  endfunction

  logic signed [CW-1:0] rom [TAPS][P];
  initial begin
    for (int t = 0; t < int'(TAPS); t++)
      for (int p = 0; p < int'(P); p++)
        rom[t][p] = proto(t * int'(P) + p);
  end

  always_ff @(posedge clk) begin
    for (int t = 0; t < int'(TAPS); t++) coef[t] <= rom[t][addr];
  end

endmodule
