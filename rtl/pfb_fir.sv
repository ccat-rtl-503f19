// pfb_fir -- P-path polyphase filter of the synthesis bank, built as an
// overlap-add shifting accumulator with one multiplier and one adder per tap
// lane (the "area-optimised" FIR form).
//
// Each frame delivers, for every path p = 0..P-1 in turn, TAPS samples
// x_t (one per tap lane, from the reorder buffer) and TAPS coefficients
// h(t*P + p). The block keeps, per path, a vector of TAPS partial sums A_t(p).
// For path p it computes
//   S_t = sat(A_t(p) + round(x_t * h(t*P+p) / 2**PROD_SHIFT)),  t = 0..TAPS-1
// emits S_0 as the output sample, and stores the vector shifted down one lane,
// A_t(p) <- S_{t+1}, A_{TAPS-1}(p) <- 0, for the same path in the next frame.
// Lane t therefore holds the part of the M*P-long overlap-add buffer that
// leaves it t frames from now; S_0 is complete and is the output. This is the
// published structure: TAPS parallel multiply-adds, a feedback vector held in
// a one-frame delay line, and a block shifter that drops lane 0 to the output
// and fills the top lane with zero. Here the delay line is a path-indexed
// memory (equivalent to the paper's FIFO for a continuous stream). Lanes are
// AW = 16 bits as in the paper; the product scaling, round-half-up, and
// saturating adds (where the paper does not say) are this design's choices.
// out_sat reports that a product or a sum saturated while the path just
// emitted was processed; the saturated lane may belong to a later sample.
//
// Interface: coef_addr = in_path is driven combinationally for a coefficient
// ROM with one clock of read latency, whose output arrives on coef. Output:
// one complex sample per valid input path, in time order. Timing: three
// register stages; a path taken at clock edge T is on the output after T+2. The first frame after reset starts from an
// empty accumulator; the output reaches steady state after TAPS frames.
module pfb_fir #(
  parameter int unsigned P          = 1024,
  parameter int unsigned TAPS       = 16,
  parameter int unsigned DW         = 28,
  parameter int unsigned CW         = 18,
  parameter int unsigned AW         = 16,
  parameter int unsigned PROD_SHIFT = 17,
  localparam int unsigned PB        = $clog2(P)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic [PB-1:0]        in_path,
  input  logic signed [DW-1:0] in_re [TAPS],
  input  logic signed [DW-1:0] in_im [TAPS],
  output logic [PB-1:0]        coef_addr,
  input  logic signed [CW-1:0] coef [TAPS],
  output logic                 out_valid,
  output logic signed [AW-1:0] out_re,
  output logic signed [AW-1:0] out_im,
  output logic                 out_sat
);
  localparam int unsigned PRW = DW + CW;
  localparam logic signed [AW:0] AMAX = (AW+1)'((1 << (AW - 1)) - 1);
  localparam logic signed [AW:0] AMIN = -(AW+1)'(1 << (AW - 1));

  typedef logic signed [AW-1:0] lane_t;

  // product, rounded and saturated to a lane word
  function automatic lane_t scale_sat(input logic signed [PRW-1:0] p, output logic s);
    logic signed [PRW-1:0] r;
    r = (p + (PRW'(1) <<< (PROD_SHIFT - 1))) >>> PROD_SHIFT;
    s = (r > PRW'(AMAX)) || (r < PRW'(AMIN));
    return (r > PRW'(AMAX)) ? AMAX[AW-1:0] : (r < PRW'(AMIN)) ? AMIN[AW-1:0] : AW'(r);
  endfunction

  function automatic lane_t add_sat(input lane_t a, input lane_t b, output logic s);
    logic signed [AW:0] r;
    r = (AW+1)'(a) + (AW+1)'(b);
    s = (r > AMAX) || (r < AMIN);
    return (r > AMAX) ? AMAX[AW-1:0] : (r < AMIN) ? AMIN[AW-1:0] : AW'(r);
  endfunction

  assign coef_addr = in_path;

  // ---- stage 1: align samples with the coefficient read ---------------------
  logic                 v1;
  logic [PB-1:0]        path1;
  logic signed [DW-1:0] x1re [TAPS];
  logic signed [DW-1:0] x1im [TAPS];
  always_ff @(posedge clk) begin
    path1 <= in_path;
    x1re  <= in_re;
    x1im  <= in_im;
  end

  // ---- stage 2: multiply; read the stored partial sums of this path ---------
  lane_t         acc_mem_re [P][TAPS];
  lane_t         acc_mem_im [P][TAPS];
  logic          first;           // frame 0: the stored sums are not yet written
  logic          v2;
  logic [PB-1:0] path2;
  lane_t         m2re [TAPS], m2im [TAPS];
  lane_t         f2re [TAPS], f2im [TAPS];
  logic          ms2;

  always_ff @(posedge clk) begin
    logic sr, si, any;
    any = 1'b0;
    for (int t = 0; t < int'(TAPS); t++) begin
      m2re[t] <= scale_sat(PRW'(x1re[t]) * PRW'(coef[t]), sr);
      m2im[t] <= scale_sat(PRW'(x1im[t]) * PRW'(coef[t]), si);
      any = any | sr | si;
      f2re[t] <= first ? '0 : acc_mem_re[path1][t];
      f2im[t] <= first ? '0 : acc_mem_im[path1][t];
    end
    ms2   <= any;
    path2 <= path1;
  end

  // ---- stage 3: accumulate, block shift, output -----------------------------
  lane_t sre [TAPS], sim [TAPS];
  logic  as_any;
  always_comb begin
    logic sr, si;
    as_any = 1'b0;
    for (int t = 0; t < int'(TAPS); t++) begin
      sre[t] = add_sat(m2re[t], f2re[t], sr);
      sim[t] = add_sat(m2im[t], f2im[t], si);
      as_any = as_any | sr | si;
    end
  end

  always_ff @(posedge clk) begin
    if (v2) begin
      for (int t = 0; t < int'(TAPS) - 1; t++) begin
        acc_mem_re[path2][t] <= sre[t+1];
        acc_mem_im[path2][t] <= sim[t+1];
      end
      acc_mem_re[path2][TAPS-1] <= '0;
      acc_mem_im[path2][TAPS-1] <= '0;
    end
    out_re  <= sre[0];
    out_im  <= sim[0];
    out_sat <= v2 && (ms2 || as_any);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; v2 <= 1'b0; out_valid <= 1'b0; first <= 1'b1;
    end else begin
      v1 <= in_valid;
      v2 <= v1;
      out_valid <= v2;
      if (v1 && path1 == PB'(P - 1)) first <= 1'b0;
    end
  end

endmodule
