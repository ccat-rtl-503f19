// tb_reorder_buffer -- self-checking test of the reorder / periodic-extension
// buffer at its default size (P = 1024 paths, 16 tap lanes).
// Frames of 2P random samples enter two per clock in bit-reversed order, as
// the IFFT delivers them, back to back. For every output path p the test
// checks lane t against x((t*P + p) mod 2P), the path order and frame marker,
// that a frame leaves as P consecutive clocks, and the delay from a
// frame's last input to its first output (taken at clock T, out at T+2).
module tb_reorder_buffer;
  localparam int P = 1024, TAPS = 16, DW = 28;
  localparam int PB = $clog2(P), NB = PB + 1, N = 2 * P, NFR = 3;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic in_valid = 0;
  logic [NB-1:0] in_pos [2];
  logic signed [DW-1:0] in_re [2], in_im [2];
  logic out_valid, out_sof;
  logic [PB-1:0] out_path;
  logic signed [DW-1:0] out_re [TAPS], out_im [TAPS];

  reorder_buffer #(.P(P), .TAPS(TAPS), .DW(DW)) dut (.*);

  int checks = 0, failures = 0;
  int xr [NFR][N], xi [NFR][N];
  int ofr = 0, op = 0;
  longint cyc = 0, last_in = -1, first_out = -1, last_out = -1;
  int gaps = 0;

  function automatic int bitrev(int v);
    int r = 0;
    for (int b = 0; b < NB; b++) if (v & (1 << b)) r |= 1 << (NB - 1 - b);
    return r;
  endfunction

  always @(posedge clk) begin
    cyc++;
    if (rst_n && out_valid) begin
      if (first_out < 0) first_out = cyc;
      if (last_out >= 0 && cyc != last_out + 1) gaps++;
      last_out = cyc;
      checks++;
      if (int'(out_path) != op || out_sof != (op == 0)) begin
        failures++; $display("path %0d expected %0d", out_path, op);
      end
      for (int t = 0; t < TAPS; t++) begin
        int e;
        e = (t * P + op) % N;
        checks++;
        if (out_re[t] != DW'(xr[ofr][e]) || out_im[t] != DW'(xi[ofr][e])) begin
          failures++;
          if (failures < 10) $display("frame %0d path %0d lane %0d got %0d exp %0d", ofr, op, t, out_re[t], xr[ofr][e]);
        end
      end
      op++;
      if (op == P) begin op = 0; ofr++; end
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
    for (int f = 0; f < NFR; f++)
      for (int i = 0; i < N; i++) begin
        xr[f][i] = int'($urandom) >>> 4; xi[f][i] = int'($urandom) >>> 4;
      end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int f = 0; f < NFR; f++)
      for (int c = 0; c < P; c++) begin
        in_valid <= 1;
        for (int l = 0; l < 2; l++) begin
          int pos;
          pos = bitrev(2 * c + l);
          in_pos[l] <= NB'(pos);
          in_re[l] <= DW'(xr[f][pos]);
          in_im[l] <= DW'(xi[f][pos]);
        end
        @(posedge clk);
        if (f == 0 && c == P - 1) last_in = cyc;
      end
    in_valid <= 0;
    wait (ofr == NFR);
    repeat (5) @(posedge clk);
    checks++;
    if (gaps != 0) begin failures++; $display("%0d gaps", gaps); end
    checks++;
    if (first_out - last_in != 3) begin failures++; $display("delay %0d", first_out - last_in); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
