// tb_tone_gen -- self-checking test of the TDM baseband DDS.
// A shadow model keeps every channel's settings and phase accumulator and
// predicts each output sample (initial vector rotated by the accumulated
// phase, tolerance 3 LSB). The test checks the channel order, the frame
// marker, that a sample leaves every clock, that writes are refused during
// the clearing frame, and that a setting rewritten while running takes effect
// at the channel's next slot with the phase carried on (phase-continuous).
module tb_tone_gen;
  import psb_pkg::*;
  localparam int NCH = 64, W = 16, PW = 16, ITER = 16;
  localparam int CW = $clog2(NCH);

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic cfg_we = 0;
  logic [CW-1:0] cfg_addr = '0;
  tone_cfg_t cfg_data = '0;
  logic cfg_ready, out_valid, out_sof;
  logic [CW-1:0] out_ch;
  logic signed [W-1:0] out_re, out_im;

  tone_gen #(.NCH(NCH), .W(W), .PW(PW), .ITER(ITER)) dut (.*);

  int checks = 0, failures = 0;
  tone_cfg_t shadow [NCH];
  logic [PW-1:0] acc [NCH];
  int expect_ch = 0;
  int nsamples = 0;
  bit started = 0;

  function automatic real fabs(real v); return v < 0.0 ? -v : v; endfunction
  task automatic fail(input string m);
    failures++;
    if (failures < 10) $display("FAIL: %s", m);
  endtask

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      real th, ex, ey;
      int n;
      n = int'(out_ch);
      th = 2.0 * PI * acc[n] / 65536.0;
      ex = shadow[n].i0 * $cos(th) - shadow[n].q0 * $sin(th);
      ey = shadow[n].i0 * $sin(th) + shadow[n].q0 * $cos(th);
      checks++;
      if (fabs(out_re - ex) > 3.0 || fabs(out_im - ey) > 3.0)
        fail($sformatf("t=%0t ch %0d got (%0d,%0d) exp (%f,%f)", $time, n, out_re, out_im, ex, ey));
      acc[n] = acc[n] + shadow[n].dphi;
      if (started) begin
        checks++;
        if (n != expect_ch || out_sof != (n == 0)) fail($sformatf("order: ch %0d exp %0d", n, expect_ch));
      end
      started = 1;
      expect_ch = (n + 1) % NCH;
      nsamples++;
    end
  end

  function automatic tone_cfg_t rand_cfg();
    tone_cfg_t c;
    c.dphi = PW'($urandom);
    c.i0   = W'(int'($urandom_range(40000)) - 20000);
    c.q0   = W'(int'($urandom_range(40000)) - 20000);
    return c;
  endfunction

  task automatic write(input int ch, input tone_cfg_t c);
    cfg_we <= 1; cfg_addr <= CW'(ch); cfg_data <= c;
    @(posedge clk);
    if (cfg_ready) shadow[ch] = c;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0;
    for (int i = 0; i < NCH; i++) begin shadow[i] = '0; acc[i] = '0; end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (3) @(posedge clk);
    // writes during the clearing frame are refused
    checks++;
    if (cfg_ready) fail("cfg_ready high during the clearing frame");
    write(5, rand_cfg());     // must be ignored (shadow not updated)
    cfg_we <= 0;
    wait (cfg_ready);
    @(posedge clk);
    // configure every channel at once, while the output is in the other half
    wait (out_valid && out_ch == CW'(NCH / 2));
    for (int i = 0; i < NCH / 4; i++) write(i, rand_cfg());
    cfg_we <= 0;
    repeat (10 * NCH) @(posedge clk);
    // live updates of single channels, away from their slots
    for (int k = 0; k < 40; k++) begin
      int c;
      c = int'($urandom_range(NCH - 1));
      wait (out_valid && out_ch == CW'((c + NCH / 2) % NCH));
      write(c, rand_cfg());
      cfg_we <= 0;
      repeat (int'($urandom_range(3 * NCH))) @(posedge clk);
    end
    // rate: one sample per clock
    t0 = nsamples;
    repeat (1000) @(posedge clk);
    checks++;
    if (nsamples - t0 != 1000) fail($sformatf("%0d samples in 1000 clocks", nsamples - t0));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
