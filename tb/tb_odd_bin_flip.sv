// tb_odd_bin_flip -- self-checking test of the odd-bin rotation.
// Streams frames of random samples (two lanes, bins n and n+N/2) with idle
// clocks between some of them, and checks each output one clock later:
// odd bins negated in frames 0, 2, 4, ..., everything else unchanged,
// -32768 saturating to 32767.
module tb_odd_bin_flip;
  localparam int W = 16, LANES = 2, BW = 4, N = 16;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic in_valid = 0, in_sof = 0;
  logic [BW-1:0] in_bin [LANES];
  logic signed [W-1:0] in_re [LANES], in_im [LANES];
  logic out_valid;
  logic [BW-1:0] out_bin [LANES];
  logic signed [W-1:0] out_re [LANES], out_im [LANES];

  odd_bin_flip #(.W(W), .LANES(LANES), .BW(BW)) dut (.*);

  int checks = 0, failures = 0;
  // expected outputs, with the clock at which each input was applied
  typedef struct { time t; logic [BW-1:0] bin [LANES]; logic signed [W-1:0] re [LANES]; logic signed [W-1:0] im [LANES]; } exp_t;
  exp_t q [$];
  bit exp_v;
  logic [BW-1:0] exp_bin [LANES];
  logic signed [W-1:0] exp_re [LANES], exp_im [LANES];

  function automatic logic signed [W-1:0] nsat(logic signed [W-1:0] v);
    return v == -32768 ? 16'sd32767 : -v;
  endfunction

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      exp_t e;
      checks++;
      if (q.size() == 0) begin
        failures++; $display("unexpected output at %0t", $time);
      end else begin
        e = q.pop_front();
        // an input applied at one clock edge is registered at the next and
        // sampled here one edge later: 2 clock periods (4 time units)
        if ($time != e.t + 4) begin failures++; $display("latency %0t", $time - e.t); end
        for (int l = 0; l < LANES; l++)
          if (out_bin[l] != e.bin[l] || out_re[l] != e.re[l] || out_im[l] != e.im[l]) begin
            failures++;
            if (failures < 10) $display("lane %0d bin %0d got (%0d,%0d) exp (%0d,%0d)", l, out_bin[l], out_re[l], out_im[l], e.re[l], e.im[l]);
          end
      end
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
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int m = 0; m < 40; m++) begin
      for (int n = 0; n < N / 2; n++) begin
        while ($urandom_range(3) == 0) begin
          in_valid <= 0; in_sof <= 0; exp_v = 0;
          @(posedge clk);
        end
        in_valid <= 1; in_sof <= (n == 0);
        exp_v = 1;
        for (int l = 0; l < LANES; l++) begin
          logic signed [W-1:0] r, i;
          r = ($urandom_range(7) == 0) ? -16'sd32768 : W'($urandom);
          i = W'($urandom);
          in_bin[l] <= BW'(n + l * N / 2);
          in_re[l] <= r; in_im[l] <= i;
          exp_bin[l] = BW'(n + l * N / 2);
          if ((n % 2 == 1) && (m % 2 == 0)) begin
            exp_re[l] = nsat(r); exp_im[l] = nsat(i);
          end else begin
            exp_re[l] = r; exp_im[l] = i;
          end
        end
        begin
          exp_t e;
          e.t = $time; e.bin = exp_bin; e.re = exp_re; e.im = exp_im;
          q.push_back(e);
        end
        @(posedge clk);
      end
    end
    in_valid <= 0; exp_v = 0;
    @(posedge clk);
    @(posedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("%0d outputs missing", q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
