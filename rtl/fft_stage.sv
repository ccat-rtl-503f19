// fft_stage -- one radix-2 decimation-in-frequency stage of the streaming
// IFFT, with its own ping-pong frame buffer.
//
// Stage S of an N-point transform pairs element a with element a + SPAN,
// SPAN = N >> (S+1), and computes
//   out[a]      = x[a] + x[a+SPAN]
//   out[a+SPAN] = (x[a] - x[a+SPAN]) * exp(+j*2*pi*j/(2*SPAN)),  j = a mod SPAN
// (the + sign in the exponent makes the transform an inverse DFT; no 1/N
// scaling is applied and the word width DW must hold the full growth).
//
// Interface: two complex samples per clock arrive with their element indices;
// each frame is written into one half of a ping-pong buffer. When the
// START-th pair of a frame (counting from 0) has been written, the stage
// starts to emit its N/2 butterflies, one per clock, on out_* with the indices
// of the two results, while the rest of the frame and then the next frame
// keep arriving. With START = N/2-1 any input order works; a smaller START
// (used inside ifft2048) relies on a known input order and on frames arriving
// without gaps. Timing: the first butterfly leaves 3 clocks after the
// START-th pair is written; a frame takes N/2 clocks to emit, so a continuous
// input stream gives a continuous output stream. Twiddles are
// rounded to TW_W-bit constants (scale 2**(TW_W-2)) computed at elaboration.
// The structure (stage buffers, in-order pair addressing) is this design's
// choice; the paper only asks for a standard streaming 2048-point IFFT.
module fft_stage
  import psb_pkg::*;
#(
  parameter int unsigned N    = 2048,
  parameter int unsigned S    = 0,
  parameter int unsigned DW   = 28,
  parameter int unsigned TW_W = 18,
  // write count at which reading of a frame starts: N/2-1 waits for the
  // whole frame; a smaller value is safe when the input order guarantees
  // that every pair is written START+1 clocks before it is read
  parameter int unsigned START = N / 2 - 1,
  localparam int unsigned BW  = $clog2(N)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic [BW-1:0]        in_idx [2],
  input  logic signed [DW-1:0] in_re  [2],
  input  logic signed [DW-1:0] in_im  [2],
  output logic                 out_valid,
  output logic [BW-1:0]        out_idx [2],
  output logic signed [DW-1:0] out_re  [2],
  output logic signed [DW-1:0] out_im  [2]
);
  localparam int unsigned SPAN = N >> (S + 1);
  localparam int unsigned LS   = $clog2(SPAN);        // log2(SPAN)
  localparam int unsigned JW   = (LS > 0) ? LS : 1;
  localparam int unsigned TWF  = TW_W - 2;            // twiddle fraction bits
  localparam int unsigned HALF = N / 2;

  // ---- twiddle constants -------------------------------------------------------
  logic signed [TW_W-1:0] tw_re [SPAN];
  logic signed [TW_W-1:0] tw_im [SPAN];
  for (genvar j = 0; j < int'(SPAN); j++) begin : g_tw
    localparam real ANG = 2.0 * PI * j / (2.0 * SPAN);
    assign tw_re[j] = TW_W'(round_real($cos(ANG) * (2.0 ** TWF)));
    assign tw_im[j] = TW_W'(round_real($sin(ANG) * (2.0 ** TWF)));
  end

  // ---- ping-pong frame buffer --------------------------------------------------
  logic signed [DW-1:0] mre [2][N];
  logic signed [DW-1:0] mim [2][N];
  logic                 wbank, rbank, rd_active;
  logic [BW-2:0]        wcnt, rcnt;   // N/2 pairs per frame
  logic                 rd_start;
  assign rd_start = in_valid && (wcnt == (BW-1)'(START));

  always_ff @(posedge clk) begin
    if (in_valid) begin
      for (int l = 0; l < 2; l++) begin
        mre[wbank][in_idx[l]] <= in_re[l];
        mim[wbank][in_idx[l]] <= in_im[l];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wbank     <= 1'b0;
      rbank     <= 1'b0;
      wcnt      <= '0;
      rcnt      <= '0;
      rd_active <= 1'b0;
    end else begin
      if (in_valid) begin
        wcnt <= wcnt + 1'b1;
        if (wcnt == (BW-1)'(HALF - 1)) wbank <= !wbank;
      end
      if (rd_start) begin
        rbank     <= wbank;
        rd_active <= 1'b1;
        rcnt      <= '0;
      end else if (rd_active) begin
        rcnt <= rcnt + 1'b1;
        if (rcnt == (BW-1)'(HALF - 1)) rd_active <= 1'b0;
      end
    end
  end

  // ---- pair addressing -----------------------------------------------------------
  logic [BW-1:0] addr_a, addr_b;
  logic [JW-1:0] jj;
  always_comb begin
    if (LS == 0) begin
      jj     = '0;
      addr_a = {rcnt, 1'b0};
    end else begin
      jj     = JW'(rcnt);
      addr_a = (BW'(rcnt >> LS) << (LS + 1)) | BW'(jj);
    end
    addr_b = addr_a | BW'(SPAN);
  end

  // ---- pipeline: read, add/subtract, twiddle multiply --------------------------
  logic                   v1, v2;
  logic [BW-1:0]          a1, a2;
  logic signed [DW-1:0]   ar1, ai1, br1, bi1;
  logic signed [TW_W-1:0] twr1, twi1, twr2, twi2;
  logic signed [DW-1:0]   sr2, si2, dr2, di2;

  always_ff @(posedge clk) begin
    ar1  <= mre[rbank][addr_a];
    ai1  <= mim[rbank][addr_a];
    br1  <= mre[rbank][addr_b];
    bi1  <= mim[rbank][addr_b];
    twr1 <= tw_re[jj];
    twi1 <= tw_im[jj];
    a1   <= addr_a;

    sr2  <= ar1 + br1;
    si2  <= ai1 + bi1;
    dr2  <= ar1 - br1;
    di2  <= ai1 - bi1;
    twr2 <= twr1;
    twi2 <= twi1;
    a2   <= a1;
  end

  localparam int unsigned PW2 = DW + TW_W + 1;
  logic signed [PW2-1:0] pr, pi_;
  always_comb begin
    pr  = PW2'(dr2) * PW2'(twr2) - PW2'(di2) * PW2'(twi2) + (PW2'(1) <<< (TWF - 1));
    pi_ = PW2'(dr2) * PW2'(twi2) + PW2'(di2) * PW2'(twr2) + (PW2'(1) <<< (TWF - 1));
  end

  always_ff @(posedge clk) begin
    out_re[0]  <= sr2;
    out_im[0]  <= si2;
    out_re[1]  <= DW'(pr >>> TWF);
    out_im[1]  <= DW'(pi_ >>> TWF);
    out_idx[0] <= a2;
    out_idx[1] <= a2 | BW'(SPAN);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; v2 <= 1'b0; out_valid <= 1'b0;
    end else begin
      v1 <= rd_active; v2 <= v1; out_valid <= v2;
    end
  end

endmodule
