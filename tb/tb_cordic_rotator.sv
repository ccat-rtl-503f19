// tb_cordic_rotator -- self-checking test of the CORDIC rotator.
// Drives random vectors and angles every clock, compares each result with a
// floating-point rotation (tolerance 3 LSB), checks that tags come out in
// order and that a lone operand appears exactly ITER+3 clocks later, and
// covers the four quadrants and the saturation of an over-range result.
module tb_cordic_rotator;
  import psb_pkg::*;
  localparam int W = 16, PW = 16, ITER = 16, TAG_W = 10;
  localparam int LAT = ITER + 3;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic in_valid = 0;
  logic [TAG_W-1:0] in_tag = '0;
  logic signed [W-1:0] x_in = '0, y_in = '0;
  logic [PW-1:0] in_angle = '0;
  logic out_valid;
  logic [TAG_W-1:0] out_tag;
  logic signed [W-1:0] x_out, y_out;

  cordic_rotator #(.W(W), .PW(PW), .ITER(ITER), .TAG_W(TAG_W)) dut (.*);

  int checks = 0, failures = 0;
  real ex_q [$], ey_q [$];
  int  tag_q [$];

  function automatic real clampr(real v);
    return v > 32767.0 ? 32767.0 : (v < -32768.0 ? -32768.0 : v);
  endfunction

  function automatic real fabs(real v); return v < 0.0 ? -v : v; endfunction

  task automatic push(input int x, input int y, input int a, input int tag);
    real th;
    th = 2.0 * PI * a / 65536.0;
    ex_q.push_back(clampr(x * $cos(th) - y * $sin(th)));
    ey_q.push_back(clampr(x * $sin(th) + y * $cos(th)));
    tag_q.push_back(tag);
  endtask

  // compare every result
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      real ex, ey;
      int tg;
      ex = ex_q.pop_front(); ey = ey_q.pop_front(); tg = tag_q.pop_front();
      checks++;
      if (fabs(real'(x_out) - ex) > 3.0 || fabs(real'(y_out) - ey) > 3.0 || out_tag != TAG_W'(tg)) begin
        failures++;
        if (failures < 10)
          $display("MISMATCH tag %0d/%0d got (%0d,%0d) exp (%f,%f)", out_tag, tg, x_out, y_out, ex, ey);
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
    int lat;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    // latency of a lone operand
    in_valid <= 1; x_in <= 16'sd10000; y_in <= 0; in_angle <= 16'd16384; in_tag <= 10'd7;
    push(10000, 0, 16384, 7);
    @(posedge clk);
    in_valid <= 0;
    lat = 0;
    do begin @(posedge clk); lat++; end while (!out_valid);
    checks++;
    if (lat != LAT) begin failures++; $display("latency %0d, expected %0d", lat, LAT); end
    repeat (5) @(posedge clk);
    // quadrant corners and a saturating case
    for (int k = 0; k < 8; k++) begin
      in_valid <= 1; x_in <= 16'sd20000; y_in <= -16'sd5000; in_angle <= 16'(k * 8192); in_tag <= 10'(k);
      push(20000, -5000, k * 8192, k);
      @(posedge clk);
    end
    in_valid <= 1; x_in <= 16'sd32767; y_in <= 16'sd32767; in_angle <= 16'd0; in_tag <= 10'd99;
    push(32767, 32767, 0, 99);
    @(posedge clk);
    // random back-to-back stream
    for (int k = 0; k < 5000; k++) begin
      int x, y, a;
      x = int'($urandom_range(46000)) - 23000;
      y = int'($urandom_range(46000)) - 23000;
      a = int'($urandom_range(65535));
      in_valid <= 1; x_in <= 16'(x); y_in <= 16'(y); in_angle <= 16'(a); in_tag <= 10'(k);
      push(x, y, a, k % 1024);
      @(posedge clk);
    end
    in_valid <= 0;
    repeat (LAT + 5) @(posedge clk);
    checks++;
    if (ex_q.size() != 0) begin failures++; $display("%0d results missing", ex_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
