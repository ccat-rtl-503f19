// oc_psb_top -- overlap-channel polyphase synthesis filter bank (OC-PSB)
// frequency-comb synthesizer.
//
// The synthesizer generates up to 2P probe tones (2048 by default) as one
// complex sample stream at the clock rate fs, one sample per clock. The band
// fs is split into 2P channels, spaced fs/(2P), each carrying at most one
// tone. Each channel's tone is made at the low channel rate fs/P by a baseband
// DDS, then moved to its place in the band by the synthesis filter bank:
//
//   tone_gen x2 -> odd_bin_flip -> ifft2048 -> reorder_buffer -> pfb_fir
//   (2P channel     (odd bins      (2P-point    (periodic          (P paths, TAPS
//    samples/frame)  x(-1)^(m+1))   IDFT)        extension x M/2)   taps, overlap-add)
//
// Even channels form an ordinary critically-sampled bank with P channels of
// width fs/P; odd channels are the same bank shifted by half a channel. A tone
// near the edge of an even channel can therefore be placed near the centre of
// an odd one, so the prototype filter (TAPS*P taps) can be short. The output
// frequency of a tone in channel k whose phase steps by dphi per frame is
//   f = (k/2 + dphi/2**PHASE_W) * fs / P   (k >= P wraps to negative frequency).
// The structure, P = 1024, 2048 channels, 16 x 1024 filter taps, two CORDICs,
// the odd-bin rotation and the 16-bit output follow the paper. Word widths
// inside the IFFT and the filter, the tone-table port and saturation are this
// design's choices.
//
// Interface: cfg_we/cfg_addr/cfg_data write the settings of channel cfg_addr
// (channels 0..P-1 go to the first tone generator, P..2P-1 to the second);
// writes are taken while cfg_ready is high (from one frame after reset). The
// output stream out_re/out_im is valid every clock once the pipeline has
// filled; it is meant for an RF DAC in complex (I/Q) mode. out_sat flags a
// sample in which the filter saturated. Timing: one frame is P clocks. A new
// setting reaches the output about 2P+76 clocks after it is written (2124
// clocks, 8.3 us at 256 MHz with the defaults: wait for the channel's slot,
// CORDIC, IFFT latency P+5*log2(2P)-1, one frame in the reorder buffer) and
// settles over TAPS more frames as the overlap-add flushes.
module oc_psb_top
  import psb_pkg::*;
#(
  parameter int unsigned P          = 1024,  // polyphase paths
  parameter int unsigned TAPS       = 16,    // taps per path
  parameter int unsigned ITER       = 16,    // CORDIC micro-rotations
  parameter int unsigned PROD_SHIFT = 17,    // filter product scaling
  localparam int unsigned N   = 2 * P,       // channels = IDFT points
  localparam int unsigned NB  = $clog2(N),
  localparam int unsigned PB  = $clog2(P),
  localparam int unsigned FW  = SAMPLE_W + NB + 1  // IFFT output width
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       cfg_we,
  input  logic [NB-1:0]              cfg_addr,
  input  tone_cfg_t                  cfg_data,
  output logic                       cfg_ready,
  output logic                       out_valid,
  output logic signed [SAMPLE_W-1:0] out_re,
  output logic signed [SAMPLE_W-1:0] out_im,
  output logic                       out_sat
);
  // ---- two TDM tone generators: channels n and n+P in the same clock -------
  logic                       tg_valid [2];
  logic                       tg_sof   [2];
  logic                       tg_ready [2];
  logic [PB-1:0]              tg_ch    [2];
  logic signed [SAMPLE_W-1:0] tg_re    [2];
  logic signed [SAMPLE_W-1:0] tg_im    [2];

  for (genvar g = 0; g < 2; g++) begin : g_tone
    tone_gen #(.NCH(P), .W(SAMPLE_W), .PW(PHASE_W), .ITER(ITER)) u_tone (
      .clk      (clk),
      .rst_n    (rst_n),
      .cfg_we   (cfg_we && (cfg_addr[NB-1] == 1'(g))),
      .cfg_addr (cfg_addr[PB-1:0]),
      .cfg_data (cfg_data),
      .cfg_ready(tg_ready[g]),
      .out_valid(tg_valid[g]),
      .out_sof  (tg_sof[g]),
      .out_ch   (tg_ch[g]),
      .out_re   (tg_re[g]),
      .out_im   (tg_im[g])
    );
  end
  assign cfg_ready = tg_ready[0] && tg_ready[1];

  // ---- odd-bin rotation -----------------------------------------------------
  logic [NB-1:0]              fl_bin_in [2];
  logic                       fl_valid;
  logic [NB-1:0]              fl_bin [2];
  logic signed [SAMPLE_W-1:0] fl_re  [2];
  logic signed [SAMPLE_W-1:0] fl_im  [2];
  assign fl_bin_in[0] = {1'b0, tg_ch[0]};
  assign fl_bin_in[1] = {1'b1, tg_ch[1]};

  odd_bin_flip #(.W(SAMPLE_W), .LANES(2), .BW(NB)) u_flip (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (tg_valid[0]),
    .in_sof   (tg_sof[0]),
    .in_bin   (fl_bin_in),
    .in_re    (tg_re),
    .in_im    (tg_im),
    .out_valid(fl_valid),
    .out_bin  (fl_bin),
    .out_re   (fl_re),
    .out_im   (fl_im)
  );

  // ---- 2P-point IFFT ----------------------------------------------------------
  logic                 ff_valid;
  logic [NB-1:0]        ff_pos [2];
  logic signed [FW-1:0] ff_re  [2];
  logic signed [FW-1:0] ff_im  [2];

  ifft2048 #(.N(N), .IN_W(SAMPLE_W)) u_ifft (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (fl_valid),
    .in_idx   (fl_bin),
    .in_re    (fl_re),
    .in_im    (fl_im),
    .out_valid(ff_valid),
    .out_pos  (ff_pos),
    .out_re   (ff_re),
    .out_im   (ff_im)
  );

  // ---- reorder and periodic extension ----------------------------------------
  logic                 rb_valid, rb_sof;
  logic [PB-1:0]        rb_path;
  logic signed [FW-1:0] rb_re [TAPS];
  logic signed [FW-1:0] rb_im [TAPS];

  reorder_buffer #(.P(P), .TAPS(TAPS), .DW(FW)) u_reorder (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (ff_valid),
    .in_pos   (ff_pos),
    .in_re    (ff_re),
    .in_im    (ff_im),
    .out_valid(rb_valid),
    .out_sof  (rb_sof),
    .out_path (rb_path),
    .out_re   (rb_re),
    .out_im   (rb_im)
  );

  // ---- polyphase filter with its coefficient ROM ------------------------------
  logic [PB-1:0]              cf_addr;
  logic signed [COEF_W-1:0]   cf [TAPS];

  pfb_coeff_rom #(.P(P), .TAPS(TAPS), .CW(COEF_W)) u_rom (
    .clk  (clk),
    .addr (cf_addr),
    .coef (cf)
  );

  pfb_fir #(.P(P), .TAPS(TAPS), .DW(FW), .CW(COEF_W), .AW(SAMPLE_W),
            .PROD_SHIFT(PROD_SHIFT)) u_fir (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (rb_valid),
    .in_path  (rb_path),
    .in_re    (rb_re),
    .in_im    (rb_im),
    .coef_addr(cf_addr),
    .coef     (cf),
    .out_valid(out_valid),
    .out_re   (out_re),
    .out_im   (out_im),
    .out_sat  (out_sat)
  );

  // The two generators run in lock step; the flip block takes its frame
  // start from the first one.
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
    tg_valid[0] == tg_valid[1] && (!tg_valid[0] || tg_ch[0] == tg_ch[1]));
  // The reorder buffer starts every frame at path 0.
  a_frame: assert property (@(posedge clk) disable iff (!rst_n)
    rb_valid |-> (rb_sof == (rb_path == '0)));

endmodule
