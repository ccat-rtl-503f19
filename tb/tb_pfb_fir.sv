// tb_pfb_fir -- self-checking test of the polyphase overlap-add filter
// (P = 32 paths, 4 taps, so that many frames fit in a short run).
// A small coefficient memory in the testbench answers coef_addr one clock
// later. Every output sample y(mP+p) is checked against the direct
// polyphase-synthesis sum
//   y(mP+p) = sum_d round(x_{m-d}(p, lane d) * h(dP+p) / 2**17),
// which is how the overlap-add buffer is defined, with no shifting
// accumulator in the model. The run has random frames (no saturation), then
// TAPS frames of zeros that must flush the accumulator, then large positive
// frames that must saturate at 32767 with out_sat raised. It also checks a
// 3-clock latency and one output per input clock.
module tb_pfb_fir;
  localparam int P = 32, TAPS = 4, DW = 28, CW = 18, AW = 16, SH = 17;
  localparam int PB = $clog2(P);
  localparam int NF_RAND = 10, NF_ZERO = TAPS, NF_SAT = 3;
  localparam int NF = NF_RAND + NF_ZERO + NF_SAT;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic in_valid = 0;
  logic [PB-1:0] in_path = '0;
  logic signed [DW-1:0] in_re [TAPS], in_im [TAPS];
  logic [PB-1:0] coef_addr;
  logic signed [CW-1:0] coef [TAPS];
  logic out_valid;
  logic signed [AW-1:0] out_re, out_im;
  logic out_sat;

  pfb_fir #(.P(P), .TAPS(TAPS), .DW(DW), .CW(CW), .AW(AW), .PROD_SHIFT(SH)) dut (.*);

  int checks = 0, failures = 0;
  int h [TAPS][P];
  int xr [NF][P][TAPS], xi [NF][P][TAPS];
  int k = 0, sat_seen = 0;
  longint cyc = 0, first_in = -1, first_out = -1, nout = 0;

  // coefficient memory with one clock of read latency
  always_ff @(posedge clk)
    for (int t = 0; t < TAPS; t++) coef[t] <= CW'(h[t][coef_addr]);

  function automatic longint prod(int x, int c);
    return (longint'(x) * c + (longint'(1) << (SH - 1))) >>> SH;
  endfunction
  function automatic int clamp(longint v);
    return v > 32767 ? 32767 : (v < -32768 ? -32768 : int'(v));
  endfunction

  always @(posedge clk) begin
    cyc++;
    // both sampled as the design sees them at this edge
    if (rst_n && in_valid && first_in < 0) first_in = cyc;
    if (rst_n && out_valid) begin
      int m, p;
      longint sr, si;
      if (first_out < 0) first_out = cyc;
      nout++;
      m = k / P; p = k % P;
      sr = 0; si = 0;
      for (int d = 0; d < TAPS; d++)
        if (m - d >= 0) begin
          sr += prod(xr[m - d][p][d], h[d][p]);
          si += prod(xi[m - d][p][d], h[d][p]);
        end
      checks++;
      if (int'(out_re) != clamp(sr) || int'(out_im) != clamp(si)) begin
        failures++;
        if (failures < 10) $display("y(%0d) frame %0d path %0d got (%0d,%0d) exp (%0d,%0d)", k, m, p, out_re, out_im, sr, si);
      end
      // a clamped sample must be flagged (the flag may also be raised by a
      // lane that saturates for a later sample)
      checks++;
      if ((sr != clamp(sr) || si != clamp(si)) && !out_sat) begin
        failures++;
        if (failures < 10) $display("y(%0d) out_sat %0d", k, out_sat);
      end
      if (out_sat) sat_seen++;
      k++;
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < TAPS; t++)
      for (int p = 0; p < P; p++) h[t][p] = int'($urandom_range(262142)) - 131071;
    for (int f = 0; f < NF; f++)
      for (int p = 0; p < P; p++)
        for (int t = 0; t < TAPS; t++) begin
          if (f < NF_RAND) begin
            xr[f][p][t] = int'($urandom_range(4095)) - 2048;
            xi[f][p][t] = int'($urandom_range(4095)) - 2048;
          end else if (f < NF_RAND + NF_ZERO) begin
            xr[f][p][t] = 0; xi[f][p][t] = 0;
          end else begin
            // same sign as the coefficient: every product is positive
            xr[f][p][t] = h[t][p] >= 0 ? 40000 : -40000;
            xi[f][p][t] = h[t][p] >= 0 ? -40000 : 40000;
          end
        end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int f = 0; f < NF; f++)
      for (int p = 0; p < P; p++) begin
        in_valid <= 1; in_path <= PB'(p);
        for (int t = 0; t < TAPS; t++) begin
          in_re[t] <= DW'(xr[f][p][t]); in_im[t] <= DW'(xi[f][p][t]);
        end
        @(posedge clk);
      end
    in_valid <= 0;
    repeat (10) @(posedge clk);
    checks++;
    if (nout != NF * P) begin failures++; $display("%0d outputs for %0d inputs", nout, NF * P); end
    checks++;
    if (first_out - first_in != 3) begin failures++; $display("latency %0d", first_out - first_in); end
    checks++;
    if (sat_seen == 0) begin failures++; $display("saturation never happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
