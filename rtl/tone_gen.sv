// tone_gen -- time-division-multiplexed baseband DDS for NCH channels.
//
// One CORDIC serves NCH channels in turn, one channel per clock, so each
// channel is sampled once per frame of NCH clocks (at fs/NCH). For channel n
// and frame m the output is the channel's initial vector rotated by m*dphi:
//   out = (i0 + j*q0) * exp(j*2*pi*acc/2**PW),  acc(m+1) = acc(m) + dphi.
// The two published ideas -- one CORDIC reused across 1024 TDM channels, a
// constant phase step for frequency and an initial vector for magnitude and
// phase -- come from the paper. The per-channel phase accumulator memory, the
// register-write port, and the choice to keep the accumulator running when a
// channel is rewritten (a frequency change is phase-continuous) are this
// design's own.
//
// Interface: cfg_we/cfg_addr/cfg_data write one channel's settings; writes
// are taken only while cfg_ready is high. After reset the generator spends
// one frame clearing its two memories (cfg_ready low, output samples zero),
// then runs forever. The output stream is continuous: out_valid is high every
// clock after reset, channel out_ch = 0,1,..,NCH-1 in order, out_sof marks
// channel 0. Timing: a write reaches the output at the channel's next slot,
// at most one frame plus the CORDIC latency (ITER+4 clocks) later.
module tone_gen
  import psb_pkg::*;
#(
  parameter int unsigned NCH  = 1024,
  parameter int unsigned W    = SAMPLE_W,
  parameter int unsigned PW   = PHASE_W,
  parameter int unsigned ITER = 16,
  localparam int unsigned CW  = $clog2(NCH)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                cfg_we,
  input  logic [CW-1:0]       cfg_addr,
  input  tone_cfg_t           cfg_data,
  output logic                cfg_ready,
  output logic                out_valid,
  output logic                out_sof,
  output logic [CW-1:0]       out_ch,
  output logic signed [W-1:0] out_re,
  output logic signed [W-1:0] out_im
);
  tone_cfg_t       cfg_mem [NCH];
  logic [PW-1:0]   acc_mem [NCH];

  logic [CW-1:0]   slot;
  logic            init;      // first frame after reset: clear the memories
  logic            running;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      slot    <= '0;
      init    <= 1'b1;
      running <= 1'b0;
    end else begin
      running <= 1'b1;
      if (running) begin
        slot <= (slot == CW'(NCH - 1)) ? '0 : slot + 1'b1;
        if (slot == CW'(NCH - 1)) init <= 1'b0;
      end
    end
  end

  // ---- table read (1 clock) --------------------------------------------------
  tone_cfg_t     rd_cfg;
  logic [PW-1:0] rd_acc;
  logic [CW-1:0] rd_slot;
  logic          rd_valid, rd_init;
  always_ff @(posedge clk) begin
    rd_cfg  <= cfg_mem[slot];
    rd_acc  <= acc_mem[slot];
    rd_slot <= slot;
    rd_init <= init;
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rd_valid <= 1'b0;
    else        rd_valid <= running;
  end

  // ---- memory writes -----------------------------------------------------------
  // Host writes and the clearing sweep share the table's single write port:
  // the sweep owns it during the first frame, the host afterwards.
  assign cfg_ready = running && !init;
  always_ff @(posedge clk) begin
    if (running && init)     cfg_mem[slot] <= '0;
    else if (cfg_we && cfg_ready) cfg_mem[cfg_addr] <= cfg_data;
  end
  // accumulator update: written back one clock after it is read
  always_ff @(posedge clk) begin
    if (rd_valid) acc_mem[rd_slot] <= rd_init ? '0 : rd_acc + rd_cfg.dphi;
  end

  // ---- rotation ------------------------------------------------------------------
  logic signed [W-1:0] x0, y0;
  logic [PW-1:0]       ang;
  always_comb begin
    x0  = rd_init ? '0 : rd_cfg.i0;
    y0  = rd_init ? '0 : rd_cfg.q0;
    ang = rd_init ? '0 : rd_acc;
  end

  cordic_rotator #(.W(W), .PW(PW), .ITER(ITER), .TAG_W(CW)) u_cordic (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (rd_valid),
    .in_tag   (rd_slot),
    .x_in     (x0),
    .y_in     (y0),
    .in_angle (ang),
    .out_valid(out_valid),
    .out_tag  (out_ch),
    .x_out    (out_re),
    .y_out    (out_im)
  );
  assign out_sof = out_valid && (out_ch == '0);

endmodule
