// tb_oc_psb_top -- end-to-end test of the OC-PSB synthesizer at its default
// size (2048 channels, 1024 paths, 16 x 1024 taps, 16-bit output).
//
// Five tones are programmed through the tone-table port: the paper's example
// (channel 80, input bin 256), odd channels, channels of both tone
// generators, positive and negative frequency offsets. In frame EDIT_F one
// tone is retuned and another switched off while the synthesizer runs; from
// frame SAT_F every tone is set to full scale so that the filter must
// saturate. The testbench predicts every output sample up to SAT_F with an
// independent floating-point model of the synthesis bank:
//   X_k(m) = s_k(m) * v_k * exp(j*2*pi*acc_k(m)/2**16)   (s_k = -1 for odd k, even m)
//   x_m(r) = sum_k X_k(m) exp(+j*2*pi*k*r/2048)
//   y(mP+p) = sum_{d=0..15} h(dP+p) * x_{m-d}((dP+p) mod 2048) / 2**17
// and requires agreement within 64 LSB (CORDIC and IFFT rounding). It counts
// each mechanism -- odd-bin rotations, samples from each tone generator,
// live table edits, saturated samples -- and fails if one never happened.
// It also checks one output per clock and that a live edit shows at the
// output in under 20 us at 256 MHz (5120 clocks).
module tb_oc_psb_top;
  import psb_pkg::*;
  localparam int P = 1024, N = 2048, TAPS = 16;
  localparam int NF = 36, EDIT_F = 12, SAT_F = 30;
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

  // ---- tone schedule ----------------------------------------------------------
  localparam int NT = 5;
  int tk [NT] = '{80, 81, 1500, 2047, 555};
  // settings per tone and frame (applied from the frame a write takes effect)
  int dphi [NT][NF], vi [NT][NF], vq [NT][NF];
  real xr [NF][N], xi [NF][N];
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

  task automatic set_tone(int t, int from_f, int d, int i, int q);
    for (int f = from_f; f < NF; f++) begin dphi[t][f] = d; vi[t][f] = i; vq[t][f] = q; end
  endtask

  task automatic build_model();
    for (int f = 0; f < NF; f++)
      for (int r = 0; r < N; r++) begin xr[f][r] = 0.0; xi[f][r] = 0.0; end
    for (int t = 0; t < NT; t++) begin
      int acc;
      acc = 0;
      for (int f = 1; f < NF; f++) begin
        real th, ar, ai, s;
        th = TWO_PI * acc / 65536.0;
        s = ((tk[t] % 2 == 1) && (f % 2 == 0)) ? -1.0 : 1.0;
        ar = s * (vi[t][f] * $cos(th) - vq[t][f] * $sin(th));
        ai = s * (vi[t][f] * $sin(th) + vq[t][f] * $cos(th));
        for (int r = 0; r < N; r++) begin
          int e;
          e = (tk[t] * r) % N;
          xr[f][r] += ar * cs[e] - ai * sn[e];
          xi[f][r] += ar * sn[e] + ai * cs[e];
        end
        acc = (acc + dphi[t][f]) % 65536;
      end
    end
  endtask

  // ---- output check -----------------------------------------------------------
  longint cyc = 0, first_out = -1, last_out = -1, edit_cyc = -1;
  int k = 0, gaps = 0, n_sat = 0, n_flip = 0, n_edit = 0, n_gen0 = 0, n_gen1 = 0;
  real max_err = 0.0, max_amp = 0.0;

  function automatic real fabs(real v); return v < 0.0 ? -v : v; endfunction

  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      // mechanism counters, read from the design's internal streams
      if (dut.u_flip.in_valid && !dut.u_flip.m_odd)
        for (int l = 0; l < 2; l++)
          if (dut.u_flip.in_bin[l][0] && (dut.u_flip.in_re[l] != 0 || dut.u_flip.in_im[l] != 0)) n_flip++;
      if (dut.tg_valid[0] && (dut.tg_re[0] != 0 || dut.tg_im[0] != 0)) n_gen0++;
      if (dut.tg_valid[1] && (dut.tg_re[1] != 0 || dut.tg_im[1] != 0)) n_gen1++;
      if (cfg_we && cfg_ready && first_out >= 0) n_edit++;
    end
    if (rst_n && out_valid) begin
      int m, p;
      if (first_out < 0) first_out = cyc;
      if (last_out >= 0 && cyc != last_out + 1) gaps++;
      last_out = cyc;
      if (out_sat) n_sat++;
      m = k / P; p = k % P;
      if (m < SAT_F) begin
        real er, ei, d;
        er = 0.0; ei = 0.0;
        for (int dd = 0; dd < TAPS; dd++)
          if (m - dd >= 0) begin
            int r;
            r = (dd * P + p) % N;
            er += hq[dd * P + p] * xr[m - dd][r];
            ei += hq[dd * P + p] * xi[m - dd][r];
          end
        er = er / 131072.0; ei = ei / 131072.0;
        d = fabs(out_re - er) + fabs(out_im - ei);
        if (d > max_err) max_err = d;
        if (fabs(er) > max_amp) max_amp = fabs(er);
        checks++;
        if (d > 64.0) begin
          failures++;
          if (failures < 10) $display("y(%0d) frame %0d path %0d got (%0d,%0d) exp (%f,%f)", k, m, p, out_re, out_im, er, ei);
        end
      end
      k++;
    end
  end

  initial begin
    repeat (80000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write(int ch, int d, int i, int q);
    tone_cfg_t c;
    c.dphi = 16'(d); c.i0 = 16'(i); c.q0 = 16'(q);
    cfg_we <= 1; cfg_addr <= 11'(ch); cfg_data <= c;
    @(posedge clk);
  endtask

  initial begin
    longint c0;
    for (int i = 0; i < N; i++) begin cs[i] = $cos(TWO_PI * i / N); sn[i] = $sin(TWO_PI * i / N); end
    for (int n = 0; n < TAPS * P; n++) hq[n] = proto(n);
    for (int t = 0; t < NT; t++) set_tone(t, 0, 0, 0, 0);
    // tones from frame 1 (written at the start of frame 1, before their slots)
    set_tone(0, 1, 16384, 4000, 0);        // channel 80, input bin 256
    set_tone(1, 1, 65536 - 3000, 0, 3000); // odd channel, negative offset
    set_tone(2, 1, 1234, 2000, -2000);     // second tone generator
    set_tone(3, 1, 100, -2500, 1000);      // last channel (odd, generator 1)
    set_tone(4, 1, 40000, 1500, 1500);     // odd channel
    // live edit in frame EDIT_F: retune channel 80, switch off channel 555
    set_tone(0, EDIT_F, 20000, 3000, 1000);
    set_tone(4, EDIT_F, 40000, 0, 0);
    build_model();

    repeat (3) @(posedge clk);
    rst_n <= 1;
    wait (cfg_ready);
    c0 = cyc;
    for (int t = 0; t < NT; t++) write(tk[t], dphi[t][1], vi[t][1], vq[t][1]);
    cfg_we <= 0;
    // frame EDIT_F starts P*(EDIT_F-1) clocks after frame 1
    while (cyc < c0 + longint'(P) * (EDIT_F - 1) + 4) @(posedge clk);
    edit_cyc = cyc;
    write(80, 20000, 3000, 1000);
    write(555, 40000, 0, 0);
    cfg_we <= 0;
    // overload from frame SAT_F
    while (cyc < c0 + longint'(P) * (SAT_F - 1) + 4) @(posedge clk);
    for (int t = 0; t < NT; t++) write(tk[t], 0, 32767, 0);
    cfg_we <= 0;
    wait (k >= NF * P);
    checks++;
    if (gaps != 0) begin failures++; $display("%0d gaps in the output", gaps); end
    // output sample EDIT_F*P is the first one the edit can change
    checks++;
    if (first_out + longint'(EDIT_F) * P - edit_cyc > 5120) begin
      failures++; $display("edit took %0d clocks to reach the output", first_out + EDIT_F * P - edit_cyc);
    end
    $display("edit reaches the output %0d clocks after it is written",
             first_out + longint'(EDIT_F) * P - edit_cyc);
    $display("max error %f LSB, max amplitude %f", max_err, max_amp);
    $display("mechanisms: odd-bin flips %0d, generator0 samples %0d, generator1 samples %0d, live edits %0d, saturated samples %0d",
             n_flip, n_gen0, n_gen1, n_edit, n_sat);
    checks++; if (n_flip == 0) begin failures++; $display("no odd-bin flip"); end
    checks++; if (n_gen0 == 0) begin failures++; $display("generator 0 idle"); end
    checks++; if (n_gen1 == 0) begin failures++; $display("generator 1 idle"); end
    checks++; if (n_edit == 0) begin failures++; $display("no live edit"); end
    checks++; if (n_sat == 0) begin failures++; $display("no saturation"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
