// psb_pkg -- types and constants shared by the overlap-channel polyphase
// synthesis filter bank (OC-PSB) tone synthesizer.
//
// The synthesizer turns a table of per-channel tone settings into one
// wide-band complex sample stream. Samples at its output are 16-bit signed
// fixed point, as the published design uses. The phase word of the baseband
// DDS is 16 bits: one step of a 16-bit phase accumulator at the 250 kHz
// channel rate is 250e3/65536 = 3.8 Hz, which matches the 4 Hz tone resolution
// measured on the hardware; the exact width is this design's choice.
package psb_pkg;

  localparam int unsigned SAMPLE_W = 16;  // output / CORDIC sample width
  localparam int unsigned PHASE_W  = 16;  // DDS phase word (full turn = 2**PHASE_W)
  localparam int unsigned COEF_W   = 18;  // prototype filter coefficient width

  localparam real PI = 3.14159265358979323846;

  // Settings of one channel (one probe tone). The tone sample of frame m is
  // the initial vector (i0 + j*q0) rotated by m*dphi; dphi is in units of
  // 2*pi/2**PHASE_W radians per frame. An all-zero initial vector turns the
  // channel off.
  typedef struct packed {
    logic [PHASE_W-1:0]         dphi;
    logic signed [SAMPLE_W-1:0] i0;
    logic signed [SAMPLE_W-1:0] q0;
  } tone_cfg_t;

  // Round a real value to the nearest integer (ties away from zero).
  function automatic longint round_real(input real v);
    return (v >= 0.0) ? longint'($floor(v + 0.5)) : -longint'($floor(-v + 0.5));
  endfunction

  // Saturate a wide signed value to a narrower signed width.
  function automatic logic signed [63:0] sat_signed(input logic signed [63:0] v,
                                                    input int unsigned w);
    logic signed [63:0] hi, lo;
    hi = (64'sd1 <<< (w - 1)) - 64'sd1;
    lo = -(64'sd1 <<< (w - 1));
    if (v > hi) return hi;
    if (v < lo) return lo;
    return v;
  endfunction

endpackage
