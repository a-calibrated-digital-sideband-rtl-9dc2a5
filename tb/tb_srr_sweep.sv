// tb_srr_sweep: channel-by-channel calibration and sideband-rejection
// measurement on the full-size spectrometer (default parameters), over a
// band of 512 channels, KLO..KHI.
//
// Front end model: the second branch has a frequency-dependent gain
// G(k) = 0.85 + 0.10*sin(2*pi*k/300) and phase error
// phi(k) = 8 deg + 0.02 deg * k (a cable-length mismatch), applied to
// whatever tone is present. Amplitude 100 of 127, tones on channel centres.
//
// Procedure, as the host would run it:
//  1. With the power-up ideal hybrid, measure the SRR of a few channels
//     (expected 15 to 25 dB).
//  2. For every even channel of the band, place a tone in the LSB and then
//     in the USB, arm the capture, read X1 and X2 of that channel and form
//     r = X2/X1. Odd channels get the mean of their even neighbours' ratios
//     (linear interpolation). Write C3 = -r_LSB and C2 = -1/r_USB.
//  3. For every channel of the band, even and odd, measure the SRR of an LSB
//     tone and of a USB tone from one integration (ACC_LEN = 1).
// Checks: calibrated SRR above 40 dB in every channel and sideband, and
// uncalibrated SRR between 10 and 30 dB. Counts captures and dumps.
module tb_srr_sweep;
  import dsbs_pkg::*;
  localparam int N = 4096;
  localparam int NCH = N / 2;
  localparam int KLO = 400;
  localparam int KHI = 911;
  localparam real PI = 3.14159265358979;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic adc_valid = 0;
  logic signed [7:0] adc0 = 0, adc1 = 0;
  logic wr_en = 0, rd_en = 0, rd_valid;
  logic [15:0] wr_addr = 0, rd_addr = 0;
  logic [31:0] wr_data = 0, rd_data;
  logic spec_valid, spec_sync;
  logic [10:0] spec_chan;
  logic [63:0] spec_lsb, spec_usb;
  int checks = 0, failures = 0;

  dsbs_top dut (.*);

  initial begin : watchdog
    repeat (60000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- front end model ----------------
  int  tone_k = KLO;
  int  tone_sb = 0;       // 0: LSB tone, 1: USB tone
  int  n_samp = 0;
  function automatic real g_of(int k);  return 0.85 + 0.10 * $sin(2.0 * PI * real'(k) / 300.0); endfunction
  function automatic real p_of(int k);  return (8.0 + 0.02 * real'(k)) * PI / 180.0; endfunction
  function automatic logic signed [7:0] q8(real v);
    return 8'($rtoi(v + 1000.5) - 1000);
  endfunction
  always @(negedge clk) if (rst_n) begin
    real t;
    t = 2.0 * PI * real'(tone_k) * real'(n_samp % N) / real'(N);
    adc_valid = 1;
    adc0 = q8(100.0 * $cos(t));
    adc1 = q8((tone_sb == 0 ? 1.0 : -1.0) * g_of(tone_k) * 100.0 * $sin(t + p_of(tone_k)));
    n_samp++;
  end

  // ---------------- spectrum collector ----------------
  logic [63:0] cur_l [NCH], cur_u [NCH];
  logic [63:0] last_l[NCH], last_u[NCH];
  int words = 0, n_dumps = 0;
  always @(posedge clk) if (rst_n && spec_valid) begin
    if (spec_sync) words = 0;
    cur_l[spec_chan] = spec_lsb;
    cur_u[spec_chan] = spec_usb;
    words++;
    if (words == NCH) begin last_l = cur_l; last_u = cur_u; n_dumps++; end
  end

  // ---------------- host ----------------
  int n_captures = 0;
  task automatic bus_wr(input logic [15:0] a, input logic [31:0] d);
    @(negedge clk); wr_en = 1; wr_addr = a; wr_data = d;
    @(negedge clk); wr_en = 0;
  endtask
  task automatic bus_rd(input logic [15:0] a, output logic [31:0] d);
    @(negedge clk); rd_en = 1; rd_addr = a;
    @(negedge clk); rd_en = 0;
    d = rd_data;
  endtask
  task automatic set_tone(int k, int sb);
    @(negedge clk);
    // change at a frame boundary so frames stay whole
    while (n_samp % N != 0) @(negedge clk);
    tone_k = k; tone_sb = sb;
    repeat (5 * N + 64) @(posedge clk);
  endtask
  task automatic wait_dump();
    int target;
    target = n_dumps + 1;
    while (n_dumps < target) @(posedge clk);
  endtask
  // capture channel k (even) and return X2/X1
  task automatic ratio(int k, output real rr, output real ri);
    logic [31:0] d;
    real ar, ai, br, bi, den;
    bus_wr(16'h0003, 32'd1);
    do bus_rd(16'h0003, d); while (d[0] != 1'b1);
    n_captures++;
    bus_rd(16'h4000 | 16'((k / 2) << 1), d);           ar = real'(signed'(d));
    bus_rd(16'h4000 | 16'((k / 2) << 1) | 16'h1, d);   ai = real'(signed'(d));
    bus_rd(16'h4800 | 16'((k / 2) << 1), d);           br = real'(signed'(d));
    bus_rd(16'h4800 | 16'((k / 2) << 1) | 16'h1, d);   bi = real'(signed'(d));
    den = ar*ar + ai*ai;
    rr = (br*ar + bi*ai) / den;
    ri = (bi*ar - br*ai) / den;
  endtask
  function automatic logic [31:0] q16(real v);
    return 32'($rtoi(v * 65536.0 + (v < 0.0 ? -0.5 : 0.5)));
  endfunction
  function automatic real srr_db(logic [63:0] want, logic [63:0] other);
    return 10.0 * $log10((real'(want) + 1.0) / (real'(other) + 1.0));
  endfunction
  task automatic measure(int k, output real s_l, output real s_u);
    set_tone(k, 0); wait_dump(); s_l = srr_db(last_l[k], last_u[k]);
    set_tone(k, 1); wait_dump(); s_u = srr_db(last_u[k], last_l[k]);
  endtask

  real lr[KHI+2], li[KHI+2], ur[KHI+2], ui[KHI+2];

  initial begin
    real s_l, s_u, worst;
    repeat (3) @(posedge clk);
    rst_n = 1;
    bus_wr(16'h0000, 32'd1);

    // 1. uncalibrated
    for (int k = KLO; k <= KHI; k += 64) begin
      measure(k, s_l, s_u);
      $display("uncalibrated channel %0d: SRR LSB %5.1f dB, USB %5.1f dB", k, s_l, s_u);
      checks++;
      if (s_l < 10.0 || s_l > 30.0 || s_u < 10.0 || s_u > 30.0) failures++;
    end

    // 2. calibration on even channels, interpolation for odd ones
    for (int k = KLO; k <= KHI + 1; k += 2) begin
      set_tone(k, 0); ratio(k, lr[k], li[k]);
      set_tone(k, 1); ratio(k, ur[k], ui[k]);
    end
    for (int k = KLO + 1; k <= KHI; k += 2) begin
      lr[k] = 0.5 * (lr[k-1] + lr[k+1]); li[k] = 0.5 * (li[k-1] + li[k+1]);
      ur[k] = 0.5 * (ur[k-1] + ur[k+1]); ui[k] = 0.5 * (ui[k-1] + ui[k+1]);
    end
    for (int k = KLO; k <= KHI; k++) begin
      real den, c2r, c2i;
      den = ur[k]*ur[k] + ui[k]*ui[k];
      c2r = -ur[k] / den; c2i = ui[k] / den;
      bus_wr(16'h0002, q16(c2r));     bus_wr(16'h2800 | 16'(k), q16(c2i));     // C2
      bus_wr(16'h0002, q16(-lr[k]));  bus_wr(16'h3000 | 16'(k), q16(-li[k]));  // C3
    end

    // 3. calibrated sweep
    worst = 1000.0;
    for (int k = KLO; k <= KHI; k++) begin
      measure(k, s_l, s_u);
      $display("calibrated channel %0d (%s): SRR LSB %5.1f dB, USB %5.1f dB", k, (k % 2) ? "interpolated" : "measured", s_l, s_u);
      checks++;
      if (s_l < 40.0 || s_u < 40.0) failures++;
      if (s_l < worst) worst = s_l;
      if (s_u < worst) worst = s_u;
    end
    $display("worst calibrated SRR %5.1f dB over channels %0d..%0d; captures=%0d dumps=%0d",
             worst, KLO, KHI, n_captures, n_dumps);
    checks++; if (n_captures == 0 || n_dumps == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
