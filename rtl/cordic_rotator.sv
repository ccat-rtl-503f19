// cordic_rotator -- pipelined CORDIC in vector-rotation mode.
//
// Rotates the complex vector (x_in + j*y_in) by the angle in_angle, where a
// full turn is 2**PHASE_W, and returns the rotated vector with the CORDIC gain
// removed: out = (x_in + j*y_in) * exp(j*2*pi*in_angle/2**PHASE_W).
// This is the baseband DDS element of the synthesizer: a constant phase step
// per frame sets a tone's frequency and the initial vector its magnitude and
// phase. The paper specifies CORDIC in rotation mode; everything inside
// (quadrant pre-rotation, ITER micro-rotations, guard bits, gain correction by
// a constant multiply, rounding and saturation to SAMPLE_W bits) is this
// design's own choice.
//
// Interface: one rotation may start every clock (in_valid). A TAG_W-bit tag
// travels with each operand so the caller can tell which TDM channel a result
// belongs to. Timing: results appear LATENCY = ITER + 3 clocks after the
// operands; the pipeline has no stall.
module cordic_rotator
  import psb_pkg::*;
#(
  parameter int unsigned W       = 16,  // input/output sample width
  parameter int unsigned PW      = 16,  // angle width (full turn = 2**PW)
  parameter int unsigned ITER    = 16,  // micro-rotations
  parameter int unsigned TAG_W   = 10
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic [TAG_W-1:0]     in_tag,
  input  logic signed [W-1:0]  x_in,
  input  logic signed [W-1:0]  y_in,
  input  logic [PW-1:0]        in_angle,
  output logic                 out_valid,
  output logic [TAG_W-1:0]     out_tag,
  output logic signed [W-1:0]  x_out,
  output logic signed [W-1:0]  y_out
);
  localparam int unsigned FRAC = 3;              // extra fraction bits
  localparam int unsigned XW   = W + 2 + FRAC;   // gain (1.65) + sign headroom
  localparam int unsigned AW   = PW + 4;         // internal angle width
  localparam int unsigned KW   = 18;             // gain-correction constant width
  // 1/K for ITER micro-rotations, K = prod sqrt(1 + 2**-2i)
  function automatic longint kinv_const();
    real k;
    k = 1.0;
    for (int i = 0; i < int'(ITER); i++) k = k * $sqrt(1.0 + 2.0 ** (-2.0 * i));
    return round_real((2.0 ** (KW - 1)) / k);
  endfunction
  function automatic longint atan_const(input int i);
    return round_real($atan(2.0 ** (-1.0 * i)) / (2.0 * PI) * (2.0 ** AW));
  endfunction
  localparam logic signed [KW-1:0] KINV = KW'(kinv_const());

  logic signed [XW-1:0] xs [ITER+1];
  logic signed [XW-1:0] ys [ITER+1];
  logic signed [AW-1:0] zs [ITER+1];
  logic [ITER+2:0]      vld;
  logic [TAG_W-1:0]     tag [ITER+3];

  // ---- stage 0: coarse rotation to the nearest multiple of 90 degrees ------
  logic [1:0]           quad;
  logic [PW-1:0]        resid;
  logic signed [XW-1:0] xe, ye;
  always_comb begin
    quad  = 2'((in_angle + PW'(1 << (PW - 3))) >> (PW - 2));
    resid = in_angle - {quad, {(PW - 2){1'b0}}};
    xe    = XW'(x_in) <<< FRAC;
    ye    = XW'(y_in) <<< FRAC;
  end

  always_ff @(posedge clk) begin
    unique case (quad)
      2'd0: begin xs[0] <= xe;  ys[0] <= ye;  end
      2'd1: begin xs[0] <= -ye; ys[0] <= xe;  end
      2'd2: begin xs[0] <= -xe; ys[0] <= -ye; end
      default: begin xs[0] <= ye; ys[0] <= -xe; end
    endcase
    // residual in [-1/8, 1/8) of a turn, sign-extended and scaled to AW bits
    zs[0]  <= AW'(signed'(resid)) <<< (AW - PW);
    tag[0] <= in_tag;
  end

  // ---- micro-rotations -------------------------------------------------------
  for (genvar i = 0; i < int'(ITER); i++) begin : g_iter
    localparam logic signed [AW-1:0] ATAN = AW'(atan_const(i));
    always_ff @(posedge clk) begin
      if (zs[i] >= 0) begin
        xs[i+1] <= xs[i] - (ys[i] >>> i);
        ys[i+1] <= ys[i] + (xs[i] >>> i);
        zs[i+1] <= zs[i] - ATAN;
      end else begin
        xs[i+1] <= xs[i] + (ys[i] >>> i);
        ys[i+1] <= ys[i] - (xs[i] >>> i);
        zs[i+1] <= zs[i] + ATAN;
      end
      tag[i+1] <= tag[i];
    end
  end

  // ---- gain correction, rounding, saturation ---------------------------------
  localparam int unsigned PRW = XW + KW;
  localparam int unsigned SH  = KW - 1 + FRAC;
  logic signed [PRW-1:0] px, py;
  always_ff @(posedge clk) begin
    px <= PRW'(xs[ITER]) * PRW'(KINV) + (PRW'(1) <<< (SH - 1));
    py <= PRW'(ys[ITER]) * PRW'(KINV) + (PRW'(1) <<< (SH - 1));
    tag[ITER+1] <= tag[ITER];
  end

  always_ff @(posedge clk) begin
    x_out <= W'(sat_signed(64'(px >>> SH), W));
    y_out <= W'(sat_signed(64'(py >>> SH), W));
    tag[ITER+2] <= tag[ITER+1];
  end
  assign out_tag = tag[ITER+2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld <= '0;
    else        vld <= {vld[ITER+1:0], in_valid};
  end
  assign out_valid = vld[ITER+2];

endmodule
