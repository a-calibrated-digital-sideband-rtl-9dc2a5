// tb_fft_sdf: compares the pipeline FFT with a direct DFT computed in
// floating point in the testbench.
// Two runs (reset in between), each of several frames of random complex
// data with random input gaps in the later frames:
//   run A: every stage scales by 1/2, full-range inputs, result = DFT/N;
//   run B: no scaling, small inputs, result = DFT.
// Every output bin must be within a few LSB of the reference, every bin of a
// frame must appear exactly once, and on gap-free input the first bin of a
// frame must come N-1+log2(N) clocks after the frame's first sample.
module tb_fft_sdf;
  import dsbs_pkg::*;
  localparam int N = 64;
  localparam int S = $clog2(N);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [S-1:0] shift = '1, out_bin;
  logic in_valid = 0, in_sync = 0, out_valid, out_sync;
  cplx_t in_data = '0, out_data;
  int checks = 0, failures = 0;

  fft_sdf #(.N(N)) dut (.*);

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int FRAMES = 6;
  real xr [FRAMES][N], xi [FRAMES][N];
  int  fr_out = -1;
  bit  seen [N];
  real scale_f = 1.0;
  int  tol = 4;
  real max_err = 0.0;
  int  cyc = 0, sync_in_cyc = -1, lat_checked = 0;

  always @(posedge clk) begin
    cyc++;
    if (in_valid && in_sync && sync_in_cyc < 0) sync_in_cyc = cyc;
    if (rst_n && out_valid && out_sync && lat_checked == 0) begin
      lat_checked = 1;
      checks++;
      if (cyc - sync_in_cyc != N - 1 + S) begin
        failures++;
        $display("latency %0d expected %0d", cyc - sync_in_cyc, N - 1 + S);
      end
    end
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    real rr, ri, a;
    int k;
    if (out_sync) begin
      if (fr_out >= 0 && fr_out < FRAMES) for (int b = 0; b < N; b++) if (!seen[b]) begin failures++; $display("bin %0d missing", b); end
      fr_out++;
      for (int b = 0; b < N; b++) seen[b] = 0;
    end
    k = int'(out_bin);
    if (fr_out >= 0 && fr_out < FRAMES) begin
      rr = 0.0; ri = 0.0;
      for (int n = 0; n < N; n++) begin
        a = -2.0 * 3.14159265358979 * real'(k * n % N) / real'(N);
        rr += xr[fr_out][n] * $cos(a) - xi[fr_out][n] * $sin(a);
        ri += xr[fr_out][n] * $sin(a) + xi[fr_out][n] * $cos(a);
      end
      rr *= scale_f; ri *= scale_f;
      checks++;
      if (seen[k]) begin failures++; $display("bin %0d repeated", k); end
      seen[k] = 1;
      if (fabs(real'(out_data.re) - rr) > max_err) max_err = fabs(real'(out_data.re) - rr);
      if (fabs(real'(out_data.im) - ri) > max_err) max_err = fabs(real'(out_data.im) - ri);
      if (fabs(real'(out_data.re) - rr) > tol || fabs(real'(out_data.im) - ri) > tol) begin
        failures++;
        if (failures < 8) $display("frame %0d bin %0d: got %0d,%0d exp %f,%f", fr_out, k, out_data.re, out_data.im, rr, ri);
      end
    end
  end

  function automatic real fabs(input real v);
    return (v < 0.0) ? -v : v;
  endfunction

  task automatic run(input logic [S-1:0] sh, input int amp, input real sc, input int t);
    shift = sh; scale_f = sc; tol = t; fr_out = -1; max_err = 0.0;
    sync_in_cyc = -1; lat_checked = 0;
    rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < FRAMES; f++)
      for (int n = 0; n < N; n++) begin
        xr[f][n] = real'(int'($urandom_range(0, 2 * amp)) - amp);
        xi[f][n] = real'(int'($urandom_range(0, 2 * amp)) - amp);
      end
    // frames, then two flush frames of zeros
    for (int f = 0; f < FRAMES + 2; f++)
      for (int n = 0; n < N; n++) begin
        @(negedge clk);
        in_valid = 1; in_sync = (n == 0);
        in_data.re = (f < FRAMES) ? 18'($rtoi(xr[f][n])) : '0;
        in_data.im = (f < FRAMES) ? 18'($rtoi(xi[f][n])) : '0;
        if (f >= 2 && $urandom_range(0, 3) == 0) begin
          @(negedge clk); in_valid = 0; in_sync = 0;
        end
      end
    @(negedge clk); in_valid = 0; in_sync = 0;
    repeat (5) @(negedge clk);
    checks++;
    if (fr_out < FRAMES) begin failures++; $display("only %0d frames out", fr_out); end
    $display("run shift=%h max error %f LSB", sh, max_err);
  endtask

  initial begin
    run('1, 60000, 1.0 / real'(N), 4);
    run('0, 600, 1.0, 8);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
