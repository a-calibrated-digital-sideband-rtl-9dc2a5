// tb_pfb_fir: feeds random 8-bit samples (with random gaps) into the
// polyphase FIR (N = 64, 4 taps) and compares every output with a
// floating-point reference that builds the Hamming-weighted sinc window on
// its own: y = 2^(18-8) * sum_t h[(3-t)N + p] * x[n - tN], history zero after
// reset. Also checks the output latency (one clock) and that out_sync marks
// frame position 0.
module tb_pfb_fir;
  import dsbs_pkg::*;
  localparam int N = 64;
  localparam int TAPS = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid = 0, out_valid, out_sync;
  logic signed [7:0] in_data = 0;
  logic signed [17:0] out_data;
  int checks = 0, failures = 0;

  pfb_fir #(.N(N), .TAPS(TAPS)) dut (.*);

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real h [TAPS * N];
  int  xs[$];
  real max_err = 0.0;

  initial begin
    real L, xx, pi;
    pi = 3.14159265358979;
    L = real'(TAPS * N);
    for (int n = 0; n < TAPS * N; n++) begin
      xx = (real'(n) - L / 2.0) / real'(N);
      h[n] = (n == TAPS * N / 2) ? 1.0 : $sin(pi * xx) / (pi * xx);
      h[n] *= 0.54 - 0.46 * $cos(2.0 * pi * real'(n) / L);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 8 * N; n++) begin
      real y, e;
      int p;
      @(negedge clk);
      in_valid = 1;
      in_data = (n < N) ? 8'sd127 : ((n < 2 * N) ? -8'sd128 : 8'($urandom));
      xs.push_back(int'(in_data));
      p = n % N;
      y = 0.0;
      for (int t = 0; t < TAPS; t++)
        if (n - t * N >= 0) y += h[(TAPS - 1 - t) * N + p] * real'(xs[n - t * N]);
      y *= 1024.0;
      if (y > 131071.0) y = 131071.0;
      if (y < -131072.0) y = -131072.0;
      @(posedge clk); #1;
      in_valid = 0;
      checks++;
      e = real'(out_data) - y;
      if (e < 0.0) e = -e;
      if (e > max_err) max_err = e;
      if (!out_valid || e > 3.0 || out_sync != (p == 0)) begin
        failures++;
        if (failures < 6) $display("n=%0d got %0d exp %f sync=%b", n, out_data, y, out_sync);
      end
      if ($urandom_range(0, 4) == 0) @(negedge clk);
    end
    repeat (2) @(negedge clk);
    checks++;
    if (out_valid) begin failures++; $display("valid without input"); end
    $display("max error %f LSB", max_err);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
