// ifft2048 -- streaming N-point inverse FFT (N = 2048 by default), two
// complex samples per clock.
//
// X(k) -> x(r) = sum_k X(k) * exp(+j*2*pi*k*r/N), with no 1/N factor: the
// word grows from IN_W to OUT_W = IN_W + log2(N) + 1 bits so that no stage
// can overflow. The transform is log2(N) radix-2 decimation-in-frequency
// stages (fft_stage), each with its own ping-pong frame buffer. A stage does
// not wait for a whole frame: it starts as soon as the first pair it needs
// has arrived, so the transform's latency is about N/2 clocks (one frame)
// rather than log2(N) frames, and a new frame can enter every N/2 clocks.
// The paper's synthesizer uses a standard streaming 2048-point IFFT; this
// particular architecture and the unscaled fixed-point format are this
// design's choice.
//
// Interface: at count c of a frame (c = 0..N/2-1) the input carries bins c
// and c + N/2, with in_idx giving each bin's index; frames follow one another
// without gaps. The output is in bit-reversed order; out_pos is the time
// index of each output sample, so a consumer can write it straight into a
// buffer. Timing: the first output pair of a frame leaves N/2 + 5*log2(N) - 1
// clocks after the frame's first input is taken (1078 for N = 2048); the
// output of a frame is N/2 consecutive clocks.
module ifft2048 #(
  parameter int unsigned N     = 2048,
  parameter int unsigned IN_W  = 16,
  parameter int unsigned TW_W  = 18,
  localparam int unsigned LOGN  = $clog2(N),
  localparam int unsigned OUT_W = IN_W + LOGN + 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic [LOGN-1:0]         in_idx [2],
  input  logic signed [IN_W-1:0]  in_re  [2],
  input  logic signed [IN_W-1:0]  in_im  [2],
  output logic                    out_valid,
  output logic [LOGN-1:0]         out_pos [2],
  output logic signed [OUT_W-1:0] out_re  [2],
  output logic signed [OUT_W-1:0] out_im  [2]
);
  logic                    sv  [LOGN+1];
  logic [LOGN-1:0]         sx  [LOGN+1][2];
  logic signed [OUT_W-1:0] sre [LOGN+1][2];
  logic signed [OUT_W-1:0] sim [LOGN+1][2];

  assign sv[0] = in_valid;
  for (genvar l = 0; l < 2; l++) begin : g_in
    assign sx[0][l]  = in_idx[l];
    assign sre[0][l] = OUT_W'(in_re[l]);
    assign sim[0][l] = OUT_W'(in_im[l]);
  end

  for (genvar s = 0; s < int'(LOGN); s++) begin : g_stage
    // Stage 0 receives pair (c, c+N/2) at count c and can start at once.
    // Stage s >= 1 receives its elements in the order stage s-1 emits them:
    // the two elements of its pair number c arrive by count c + SPAN(s), so
    // it starts SPAN(s) + 1 pairs into the frame.
    localparam int unsigned ST = (s == 0) ? 1 : (N >> (s + 1)) + 1;
    fft_stage #(.N(N), .S(s), .DW(OUT_W), .TW_W(TW_W), .START(ST)) u_stage (
      .clk      (clk),
      .rst_n    (rst_n),
      .in_valid (sv[s]),
      .in_idx   (sx[s]),
      .in_re    (sre[s]),
      .in_im    (sim[s]),
      .out_valid(sv[s+1]),
      .out_idx  (sx[s+1]),
      .out_re   (sre[s+1]),
      .out_im   (sim[s+1])
    );
  end

  // After the last DIF stage, element p of the buffer holds x(bitrev(p)).
  function automatic logic [LOGN-1:0] bitrev(input logic [LOGN-1:0] v);
    for (int b = 0; b < int'(LOGN); b++) bitrev[b] = v[LOGN-1-b];
  endfunction

  assign out_valid = sv[LOGN];
  for (genvar l = 0; l < 2; l++) begin : g_out
    assign out_pos[l] = bitrev(sx[LOGN][l]);
    assign out_re[l]  = sre[LOGN][l];
    assign out_im[l]  = sim[LOGN][l];
  end

endmodule
