// reorder_buffer -- frame buffer between the IFFT and the polyphase filter:
// puts the IFFT output back in time order and replicates it into the tap
// vector of the polyphase filter (the periodic extension of the OC-PSB).
//
// Each frame is one 2P-sample IDFT output x(0..2P-1). The polyphase filter
// works on an M*P-sample block made of x repeated M/2 times, split into M tap
// lanes of P samples; lane t at path p therefore needs x((t*P + p) mod 2P),
// which is x(p) for even t and x(p+P) for odd t. The buffer writes the two
// samples per clock that the IFFT delivers, at their time index, into one half
// of a ping-pong memory; when a frame is complete it reads the other half for
// p = 0..P-1, two words per clock, and fans them out to the TAPS lanes. The
// paper names this BRAM reordering buffer and the periodic extension; the
// ping-pong organisation is this design's choice.
//
// Interface: in_pos gives the time index of each input sample. Output: one
// path per clock, out_path = 0..P-1, out_sof on path 0; out_re/out_im[t] is
// the sample for tap lane t. Timing: the frame's first path leaves 2 clocks
// after its last input sample; a frame takes P clocks, so a continuous input
// of 2 samples per clock gives a continuous output of one path per clock.
module reorder_buffer #(
  parameter int unsigned P    = 1024,
  parameter int unsigned TAPS = 16,
  parameter int unsigned DW   = 28,
  localparam int unsigned PB  = $clog2(P),
  localparam int unsigned NB  = PB + 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic [NB-1:0]        in_pos [2],
  input  logic signed [DW-1:0] in_re  [2],
  input  logic signed [DW-1:0] in_im  [2],
  output logic                 out_valid,
  output logic                 out_sof,
  output logic [PB-1:0]        out_path,
  output logic signed [DW-1:0] out_re [TAPS],
  output logic signed [DW-1:0] out_im [TAPS]
);
  logic signed [DW-1:0] mre [2][2*P];
  logic signed [DW-1:0] mim [2][2*P];
  logic                 wbank, rbank, rd_active;
  logic [PB-1:0]        wcnt, rcnt;

  always_ff @(posedge clk) begin
    if (in_valid) begin
      for (int l = 0; l < 2; l++) begin
        mre[wbank][in_pos[l]] <= in_re[l];
        mim[wbank][in_pos[l]] <= in_im[l];
      end
    end
  end

  logic frame_done;
  assign frame_done = in_valid && (wcnt == PB'(P - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wbank <= 1'b0; rbank <= 1'b0; wcnt <= '0; rcnt <= '0; rd_active <= 1'b0;
    end else begin
      if (in_valid) wcnt <= wcnt + 1'b1;
      if (frame_done) begin
        wbank     <= !wbank;
        rbank     <= wbank;
        rd_active <= 1'b1;
        rcnt      <= '0;
      end else if (rd_active) begin
        rcnt <= rcnt + 1'b1;
        if (rcnt == PB'(P - 1)) rd_active <= 1'b0;
      end
    end
  end

  // read both halves of the IDFT output for path rcnt
  logic signed [DW-1:0] lo_re, lo_im, hi_re, hi_im;
  always_ff @(posedge clk) begin
    lo_re    <= mre[rbank][{1'b0, rcnt}];
    lo_im    <= mim[rbank][{1'b0, rcnt}];
    hi_re    <= mre[rbank][{1'b1, rcnt}];
    hi_im    <= mim[rbank][{1'b1, rcnt}];
    out_path <= rcnt;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= rd_active;
  end
  assign out_sof = out_valid && (out_path == '0);

  // periodic extension: even lanes take x(p), odd lanes x(p+P)
  for (genvar t = 0; t < int'(TAPS); t++) begin : g_lane
    assign out_re[t] = (t % 2 == 0) ? lo_re : hi_re;
    assign out_im[t] = (t % 2 == 0) ? lo_im : hi_im;
  end

endmodule
