// odd_bin_flip -- 180-degree rotation of the odd-indexed IDFT input bins on
// alternate frames.
//
// In the overlap-channel synthesis bank the 2P-point IDFT output is extended
// periodically and weighted by the prototype filter relative to the start of
// each frame. For an odd bin k that reference drifts by half a cycle per frame
// (exp(j*pi*k) = -1), so every other frame the odd bins are negated; the odd
// channels then come out as continuous tones centred half a channel spacing
// away from the even ones. The rule itself is the paper's. The phase of the
// alternation follows the paper's drawing, where the odd bins are inverted in
// frame m = 0, 2, 4, ... and left as they are in frames 1, 3, 5, ...; the
// opposite choice would only add a constant 180 degrees to every odd channel.
//
// Interface: LANES samples per clock, each with its IDFT bin index. in_sof
// marks the first clock of a frame; the first in_sof after reset starts frame
// m = 0. Negation saturates (-2**(W-1) becomes 2**(W-1)-1). Timing: one
// register stage, indices and valid pass alongside.
module odd_bin_flip #(
  parameter int unsigned W     = 16,
  parameter int unsigned LANES = 2,
  parameter int unsigned BW    = 11
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic                in_sof,
  input  logic [BW-1:0]       in_bin [LANES],
  input  logic signed [W-1:0] in_re  [LANES],
  input  logic signed [W-1:0] in_im  [LANES],
  output logic                out_valid,
  output logic [BW-1:0]       out_bin [LANES],
  output logic signed [W-1:0] out_re  [LANES],
  output logic signed [W-1:0] out_im  [LANES]
);
  localparam logic signed [W-1:0] MAXV = {1'b0, {(W - 1){1'b1}}};
  localparam logic signed [W-1:0] MINV = {1'b1, {(W - 1){1'b0}}};

  function automatic logic signed [W-1:0] neg_sat(input logic signed [W-1:0] v);
    return (v == MINV) ? MAXV : -v;
  endfunction

  // frame parity: 1 while frame m is odd
  logic started, m_odd_q, m_odd;
  always_comb m_odd = (in_valid && in_sof) ? (started ? !m_odd_q : 1'b0) : m_odd_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      started   <= 1'b0;
      m_odd_q   <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      if (in_valid && in_sof) started <= 1'b1;
      m_odd_q   <= m_odd;
      out_valid <= in_valid;
    end
  end

  always_ff @(posedge clk) begin
    for (int l = 0; l < int'(LANES); l++) begin
      out_bin[l] <= in_bin[l];
      if (in_bin[l][0] && !m_odd) begin
        out_re[l] <= neg_sat(in_re[l]);
        out_im[l] <= neg_sat(in_im[l]);
      end else begin
        out_re[l] <= in_re[l];
        out_im[l] <= in_im[l];
      end
    end
  end

endmodule
