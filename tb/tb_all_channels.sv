// tb_all_channels -- full comb: every one of the 2048 channels carries a tone.
//
// This is the densest load the synthesizer is built for: 2048 tones at the
// channel centres (dphi = 0), i.e. an equally spaced comb with spacing
// fs/2048 (125 kHz at a 256 MHz clock), each with amplitude 180 and a random
// phase so that the crest factor stays low. The testbench writes the whole
// tone table through the configuration port at the default size (no
// parameter overrides), waits until the overlap-add state holds only frames
// made with the final table, and then compares NCHK frames of output with an
// independent floating-point model of the filter bank:
//   x_even/x_odd(r) = sum_k s_k v_k exp(+j*2*pi*k*r/2048)  (s_k = -1 for odd k
//                                                          in even frames)
//   y(mP+p) = sum_{d=0..15} h(dP+p) * x_{parity(m-d)}((dP+p) mod 2048) / 2**17
// It requires agreement within 96 LSB (with all 2048 bins busy, the rounding
// of the unscaled IFFT stages adds up to a few tens of LSB; the five-tone
// end-to-end test stays within 64), no saturation, one output per clock, and
// counts the tones seen at each tone generator's output.
module tb_all_channels;
  import psb_pkg::*;
  localparam int P = 1024, N = 2048, TAPS = 16;
  localparam int AMP = 180;
  localparam int SETTLE_F = 4 + TAPS, NCHK = 4;   // frames skipped, checked
  localparam real TWO_PI = 2.0 * 3.14159265358979323846;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic cfg_we = 0;
  logic [10:0] cfg_addr = '0;
  tone_cfg_t cfg_data = '0;
  logic cfg_ready, out_valid, out_sat;
  logic signed [15:0] out_re, out_im;

  oc_psb_top dut (.*);

  int checks = 0, failures = 0;

  int vi [N], vq [N];
  real xr [2][N], xi [2][N];   // IDFT output for even (0) and odd (1) frames
  real hq [TAPS * P];
  real cs [N], sn [N];

  function automatic real proto(int n);
    real x, s, w, a;
    x = (n - (TAPS * P - 1) / 2.0) / P;
    s = $sin(TWO_PI / 2.0 * x) / (TWO_PI / 2.0 * x);
    a = TWO_PI * n / (TAPS * P - 1);
    w = 0.35875 - 0.48829 * $cos(a) + 0.14128 * $cos(2.0 * a) - 0.01168 * $cos(3.0 * a);
    return real'(round_real(s * w * 131071.0));
  endfunction

  function automatic real fabs(real v); return v < 0.0 ? -v : v; endfunction

  // ---- output check -----------------------------------------------------------
  longint cyc = 0, last_out = -1;
  int k = 0, gaps = 0, n_sat = 0, n_tone0 = 0, n_tone1 = 0;
  real max_err = 0.0, max_amp = 0.0;

  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      if (dut.tg_valid[0] && (dut.tg_re[0] != 0 || dut.tg_im[0] != 0)) n_tone0++;
      if (dut.tg_valid[1] && (dut.tg_re[1] != 0 || dut.tg_im[1] != 0)) n_tone1++;
    end
    if (rst_n && out_valid) begin
      int m, p;
      if (last_out >= 0 && cyc != last_out + 1) gaps++;
      last_out = cyc;
      m = k / P; p = k % P;
      if (m >= SETTLE_F) begin
        real er, ei, d;
        if (out_sat) n_sat++;
        er = 0.0; ei = 0.0;
        for (int dd = 0; dd < TAPS; dd++) begin
          int r;
          r = (dd * P + p) % N;
          er += hq[dd * P + p] * xr[(m - dd) % 2][r];
          ei += hq[dd * P + p] * xi[(m - dd) % 2][r];
        end
        er = er / 131072.0; ei = ei / 131072.0;
        d = fabs(out_re - er) + fabs(out_im - ei);
        if (d > max_err) max_err = d;
        if (fabs(er) > max_amp) max_amp = fabs(er);
        checks++;
        if (d > 96.0) begin
          failures++;
          if (failures < 10) $display("y(%0d) frame %0d path %0d got (%0d,%0d) exp (%f,%f)", k, m, p, out_re, out_im, er, ei);
        end
      end
      k++;
    end
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) begin cs[i] = $cos(TWO_PI * i / N); sn[i] = $sin(TWO_PI * i / N); end
    for (int n = 0; n < TAPS * P; n++) hq[n] = proto(n);
    for (int c = 0; c < N; c++) begin
      real ph;
      ph = TWO_PI * real'($urandom % 65536) / 65536.0;
      vi[c] = int'(round_real(AMP * $cos(ph)));
      vq[c] = int'(round_real(AMP * $sin(ph)));
    end
    // model of the two IDFT blocks (dphi = 0: the CORDIC returns v_k itself)
    for (int par = 0; par < 2; par++)
      for (int r = 0; r < N; r++) begin xr[par][r] = 0.0; xi[par][r] = 0.0; end
    for (int c = 0; c < N; c++)
      for (int par = 0; par < 2; par++) begin
        real s;
        s = ((c % 2 == 1) && (par == 0)) ? -1.0 : 1.0;
        for (int r = 0; r < N; r++) begin
          int e;
          e = (c * r) % N;
          xr[par][r] += s * (vi[c] * cs[e] - vq[c] * sn[e]);
          xi[par][r] += s * (vi[c] * sn[e] + vq[c] * cs[e]);
        end
      end

    repeat (3) @(posedge clk);
    rst_n <= 1;
    wait (cfg_ready);
    for (int c = 0; c < N; c++) begin
      tone_cfg_t d;
      d.dphi = '0; d.i0 = 16'(vi[c]); d.q0 = 16'(vq[c]);
      cfg_we <= 1; cfg_addr <= 11'(c); cfg_data <= d;
      @(posedge clk);
    end
    cfg_we <= 0;
    wait (k >= (SETTLE_F + NCHK) * P);
    checks++;
    if (gaps != 0) begin failures++; $display("%0d gaps in the output", gaps); end
    checks++;
    if (n_sat != 0) begin failures++; $display("%0d saturated samples", n_sat); end
    $display("max error %f LSB, max amplitude %f", max_err, max_amp);
    $display("tones seen: generator0 %0d, generator1 %0d", n_tone0, n_tone1);
    checks++;
    if (n_tone0 < NCHK * P || n_tone1 < NCHK * P) begin
      failures++; $display("not every channel carried a tone");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
