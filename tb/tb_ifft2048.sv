// tb_ifft2048 -- self-checking test of the streaming 2048-point IFFT.
// Four back-to-back frames (random full-scale data, a single bin, a constant
// and random small data) enter at two samples per clock. Every output is
// compared with a floating-point inverse DFT, x(r) = sum_k X(k) e^{+j2pi kr/N},
// with a tolerance of 80 LSB (rounding noise grows with the unscaled stages)
// plus 1e-4 of the frame's RMS level (set by the
// 18-bit twiddles). The test also checks that each
// output position appears once per frame, that frames leave back to back
// (N/2 clocks each, no gaps) and the latency of the first output.
module tb_ifft2048;
  localparam int N = 2048, IN_W = 16, LOGN = 11, OUT_W = IN_W + LOGN + 1;
  localparam int NFR = 4;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic in_valid = 0;
  logic [LOGN-1:0] in_idx [2];
  logic signed [IN_W-1:0] in_re [2], in_im [2];
  logic out_valid;
  logic [LOGN-1:0] out_pos [2];
  logic signed [OUT_W-1:0] out_re [2], out_im [2];

  ifft2048 #(.N(N), .IN_W(IN_W)) dut (.*);

  int checks = 0, failures = 0;
  int xr [NFR][N], xi [NFR][N];
  real er [NFR][N], ei [NFR][N];
  real cs [N], sn [N];
  real rms [NFR];
  bit seen [N];
  int ofr = 0, ocnt = 0;
  longint cyc = 0, first_in = -1, first_out = -1, last_out = -1;
  int gaps = 0;

  function automatic real fabs(real v); return v < 0.0 ? -v : v; endfunction

  always @(posedge clk) begin
    cyc++;
    if (rst_n && out_valid) begin
      if (first_out < 0) first_out = cyc;
      if (last_out >= 0 && cyc != last_out + 1) gaps++;
      last_out = cyc;
      for (int l = 0; l < 2; l++) begin
        int p;
        real d;
        p = int'(out_pos[l]);
        checks++;
        if (seen[p]) begin failures++; $display("frame %0d: position %0d twice", ofr, p); end
        seen[p] = 1;
        d = fabs(real'(out_re[l]) - er[ofr][p]) + fabs(real'(out_im[l]) - ei[ofr][p]);
        if (d > 80.0 + 1.0e-4 * rms[ofr]) begin
          failures++;
          if (failures < 10) $display("frame %0d pos %0d got (%0d,%0d) exp (%f,%f)", ofr, p, out_re[l], out_im[l], er[ofr][p], ei[ofr][p]);
        end
      end
      ocnt++;
      if (ocnt == N / 2) begin
        ocnt = 0; ofr++;
        for (int i = 0; i < N; i++) seen[i] = 0;
      end
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) begin
      cs[i] = $cos(2.0 * 3.14159265358979323846 * i / N);
      sn[i] = $sin(2.0 * 3.14159265358979323846 * i / N);
      seen[i] = 0;
    end
    for (int f = 0; f < NFR; f++)
      for (int k = 0; k < N; k++) begin
        case (f)
          0: begin xr[f][k] = int'($urandom_range(65535)) - 32768; xi[f][k] = int'($urandom_range(65535)) - 32768; end
          1: begin xr[f][k] = (k == 77) ? 32767 : 0; xi[f][k] = (k == 77) ? -32768 : 0; end
          2: begin xr[f][k] = 32767; xi[f][k] = 32767; end
          default: begin xr[f][k] = int'($urandom_range(200)) - 100; xi[f][k] = int'($urandom_range(200)) - 100; end
        endcase
      end
    // reference inverse DFT
    for (int f = 0; f < NFR; f++)
      for (int r = 0; r < N; r++) begin
        real ar, ai;
        ar = 0.0; ai = 0.0;
        for (int k = 0; k < N; k++) begin
          int t;
          t = (k * r) % N;
          ar += xr[f][k] * cs[t] - xi[f][k] * sn[t];
          ai += xr[f][k] * sn[t] + xi[f][k] * cs[t];
        end
        er[f][r] = ar; ei[f][r] = ai;
      end
    for (int f = 0; f < NFR; f++) begin
      rms[f] = 0.0;
      for (int r = 0; r < N; r++) rms[f] += er[f][r] * er[f][r] + ei[f][r] * ei[f][r];
      rms[f] = $sqrt(rms[f] / N);
    end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    first_in = cyc;
    for (int f = 0; f < NFR; f++)
      for (int c = 0; c < N / 2; c++) begin
        in_valid <= 1;
        for (int l = 0; l < 2; l++) begin
          in_idx[l] <= LOGN'(c + l * N / 2);
          in_re[l] <= IN_W'(xr[f][c + l * N / 2]);
          in_im[l] <= IN_W'(xi[f][c + l * N / 2]);
        end
        @(posedge clk);
      end
    in_valid <= 0;
    wait (ofr == NFR);
    repeat (10) @(posedge clk);
    checks++;
    if (gaps != 0) begin failures++; $display("%0d gaps in the output stream", gaps); end
    checks++;
    // N/2 + 5*log2(N) - 1 clocks inside the transform; this testbench counts
    // from the clock before the first input and to the clock after the first
    // output, adding 2
    if (first_out - first_in != N / 2 + 5 * LOGN - 1 + 2) begin
      failures++; $display("latency %0d", first_out - first_in);
    end
    $display("latency %0d clocks", first_out - first_in);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
