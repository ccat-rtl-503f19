// tb_pfb_coeff_rom -- self-checking test of the prototype filter table at its
// default size (16 x 1024 taps, 18-bit).
// Reads every path and checks each lane against a windowed sinc computed
// here (4-term Blackman-Harris, +-1 LSB), the filter's even symmetry
// h(n) = h(L-1-n) exactly, the peak value, and that every polyphase branch
// sums to the same unit gain (within 1%), which is what makes the synthesis
// bank pass a tone at constant amplitude. Read latency is one clock.
module tb_pfb_coeff_rom;
  localparam int P = 1024, TAPS = 16, CW = 18, L = P * TAPS;
  localparam real PI_R = 3.14159265358979323846;

  logic clk = 0;
  always #1 clk = ~clk;
  logic [$clog2(P)-1:0] addr = '0;
  logic signed [CW-1:0] coef [TAPS];

  pfb_coeff_rom #(.P(P), .TAPS(TAPS), .CW(CW)) dut (.*);

  int checks = 0, failures = 0;
  int h [L];

  function automatic real model(int n);
    real x, s, w, arg;
    x = (n - (L - 1) / 2.0) / P;
    s = $sin(PI_R * x) / (PI_R * x);
    arg = 2.0 * PI_R * n / (L - 1);
    w = 0.35875 - 0.48829 * $cos(arg) + 0.14128 * $cos(2.0 * arg) - 0.01168 * $cos(3.0 * arg);
    return s * w * 131071.0;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int peak;
    peak = 0;
    @(posedge clk);
    for (int p = 0; p < P; p++) begin
      addr <= 10'(p);
      @(posedge clk);   // address taken at this edge
      @(negedge clk);   // data valid after it
      for (int t = 0; t < TAPS; t++) begin
        real m;
        h[t * P + p] = int'(coef[t]);
        m = model(t * P + p);
        checks++;
        if (real'(coef[t]) > m + 1.0 || real'(coef[t]) < m - 1.0) begin
          failures++;
          if (failures < 10) $display("h(%0d) = %0d, model %f", t * P + p, coef[t], m);
        end
        if (coef[t] > peak) peak = coef[t];
      end
    end
    for (int n = 0; n < L / 2; n++) begin
      checks++;
      if (h[n] != h[L - 1 - n]) begin failures++; $display("asymmetric at %0d", n); end
    end
    checks++;
    if (peak < 130000 || peak > 131071) begin failures++; $display("peak %0d", peak); end
    for (int p = 0; p < P; p++) begin
      real s;
      s = 0.0;
      for (int t = 0; t < TAPS; t++) s += h[t * P + p];
      checks++;
      if (s < 0.99 * 131071.0 || s > 1.01 * 131071.0) begin
        failures++;
        if (failures < 10) $display("branch %0d gain %f", p, s / 131071.0);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
