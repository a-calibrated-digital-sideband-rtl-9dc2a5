// tb_pfb: one full-size filter bank (4096-point frames, 2048 channels,
// default parameters) driven with an 8-bit cosine at the centre of channel
// K0, amplitude 100, plus +-1 LSB of random dither.
// Checks, on a spectrum after the filter history has filled:
//  - every one of the 2048 channels appears exactly once per spectrum;
//  - spectra start every 4096 clocks, and channel 0 of the first spectrum
//    appears 1 + 4095 + 12 clocks after the first sample;
//  - the strongest channel is K0 and its amplitude is 100*2^10/2 within 15%
//    (full FFT scaling by 1/4096);
//  - every channel two or more away from K0 is at least 40 dB below K0.
module tb_pfb;
  import dsbs_pkg::*;
  localparam int N = 4096;
  localparam int K0 = 300;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [11:0] fft_shift = '1;
  logic in_valid = 0, out_valid, out_sync;
  logic signed [7:0] in_data = 0;
  logic [10:0] out_chan;
  cplx_t out_data;
  int checks = 0, failures = 0;

  pfb dut (.*);

  initial begin : watchdog
    repeat (12 * N) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cyc = 0, first_in = -1, spec = -1;
  int sync_cyc[$];
  real pw [N/2];
  int  seen [N/2];

  task automatic check_spectrum(int s);
    int kmax;
    real pmax, amp, worst;
    kmax = 0; pmax = -1.0; worst = 0.0;
    for (int k = 0; k < N/2; k++) begin
      checks++;
      if (seen[k] != 1) begin failures++; $display("spectrum %0d channel %0d seen %0d times", s, k, seen[k]); end
      if (pw[k] > pmax) begin pmax = pw[k]; kmax = k; end
    end
    for (int k = 0; k < N/2; k++) if ((k < K0 - 1 || k > K0 + 1) && pw[k] > worst) worst = pw[k];
    amp = $sqrt(pmax);
    checks++;
    if (kmax != K0 || amp < 0.85 * 51200.0 || amp > 1.15 * 51200.0) begin
      failures++; $display("peak at %0d amplitude %f", kmax, amp);
    end
    checks++;
    if (worst * 1.0e4 > pmax) begin failures++; $display("leakage only %f dB down", 10.0 * $log10(pmax / worst)); end
    $display("spectrum %0d: peak channel %0d amplitude %f, worst far channel %f dB down", s, kmax, amp, 10.0 * $log10(pmax / worst));
  endtask

  always @(posedge clk) begin
    cyc++;
    if (in_valid && first_in < 0) first_in = cyc;
    if (rst_n && out_valid) begin
      if (out_sync) begin
        if (spec == 5) check_spectrum(spec);
        spec++;
        sync_cyc.push_back(cyc);
        for (int k = 0; k < N/2; k++) begin seen[k] = 0; pw[k] = 0.0; end
      end
      seen[out_chan]++;
      pw[out_chan] = real'(out_data.re) * real'(out_data.re) + real'(out_data.im) * real'(out_data.im);
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 8 * N; n++) begin
      @(negedge clk);
      in_valid = 1;
      in_data = 8'($rtoi(100.0 * $cos(2.0 * 3.14159265358979 * real'(K0) * real'(n % N) / real'(N)) +
                          real'(int'($urandom_range(0, 2)) - 1) + 1000.5) - 1000);
    end
    @(negedge clk); in_valid = 0;
    repeat (4) @(negedge clk);
    checks++;
    if (sync_cyc.size() < 6 || sync_cyc[0] - first_in != N + 12) begin
      failures++; $display("first channel 0 after %0d clocks", sync_cyc[0] - first_in);
    end
    for (int i = 1; i < sync_cyc.size(); i++) begin
      checks++;
      if (sync_cyc[i] - sync_cyc[i-1] != N) begin failures++; $display("spectrum period %0d", sync_cyc[i] - sync_cyc[i-1]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
