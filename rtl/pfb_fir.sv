// pfb_fir: polyphase FIR front end of the polyphase filter bank (PFB).
//
// The PFB of this spectrometer is a finite impulse response filter followed by
// a pipeline FFT. This module is the filter. For every input sample at frame
// position p (0..N-1) it forms
//     y = sum_{t=0..TAPS-1} h[(TAPS-1-t)*N + p] * x[n - t*N]
// i.e. it weights the current sample and the samples at the same position in
// the TAPS-1 previous frames with the matching segment of a TAPS*N-point
// window. The window is a Hamming-weighted sinc, h[n] = sinc((n - L/2)/N) *
// (0.54 - 0.46 cos(2 pi n / L)), L = TAPS*N, quantised to TWID_W signed bits
// with TWID_W-1 fraction bits. The coefficient tables are computed when the
// design is initialised (FPGA ROM init), not read from a file.
//
// Interface: one ADC sample per in_valid cycle (gaps are allowed and simply
// stall the filter). out_data appears one clock after the accepted sample;
// out_sync marks frame position 0. The result is rounded and saturated to
// DATA_W bits with a gain of 2^(DATA_W-ADC_W) so a full-scale ADC sample maps
// onto the full DATA_W range.
//
// From the paper: FIR-then-FFT structure, 18-bit data and coefficients, the
// 2048-channel size (N = 4096 real samples per frame). This design's own
// choices: 4 taps, the window, the rounding and the frame alignment (the frame
// counter starts at the first sample after reset).
module pfb_fir
  import dsbs_pkg::*;
#(
  parameter int unsigned N    = 4096,
  parameter int unsigned TAPS = 4
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic signed [ADC_W-1:0]  in_data,
  output logic                     out_valid,
  output logic                     out_sync,
  output logic signed [DATA_W-1:0] out_data
);

  localparam int unsigned PW    = $clog2(N);
  localparam int unsigned SHIFT = (TWID_W - 1) - (DATA_W - ADC_W);
  localparam int unsigned PRODW = ADC_W + TWID_W;
  localparam int unsigned SUMW  = PRODW + $clog2(TAPS) + 1;

  logic signed [TWID_W-1:0] coef  [TAPS][N];
  logic signed [ADC_W-1:0]  hist  [TAPS-1][N];
  logic [PW-1:0]            pos;

  initial begin : init_coef
    real L, xx, s, w, v, maxv;
    L    = real'(TAPS) * real'(N);
    maxv = real'((1 << (TWID_W - 1)) - 1);
    for (int unsigned t = 0; t < TAPS; t++) begin
      for (int unsigned p = 0; p < N; p++) begin
        xx = (real'(t * N + p) - L / 2.0) / real'(N);
        s  = (xx == 0.0) ? 1.0 : $sin(3.14159265358979 * xx) / (3.14159265358979 * xx);
        w  = 0.54 - 0.46 * $cos(2.0 * 3.14159265358979 * real'(t * N + p) / L);
        v  = s * w * real'(1 << (TWID_W - 1));
        if (v > maxv) v = maxv;
        coef[t][p] = TWID_W'($rtoi(v < 0.0 ? v - 0.5 : v + 0.5));
        if (t < TAPS - 1) hist[t][p] = '0;
      end
    end
  end

  // Tap samples: x_t[0] is the current sample, x_t[t] the sample one frame older per step.
  logic signed [ADC_W-1:0] x_t [TAPS];
  always_comb begin
    x_t[0] = in_data;
    for (int unsigned t = 1; t < TAPS; t++) x_t[t] = hist[t-1][pos];
  end

  logic signed [SUMW-1:0] acc;
  always_comb begin
    acc = '0;
    for (int unsigned t = 0; t < TAPS; t++)
      acc += SUMW'(x_t[t] * coef[TAPS-1-t][pos]);
  end

  logic signed [47:0] rounded;
  assign rounded = (48'(acc) + (48'sd1 <<< (SHIFT - 1))) >>> SHIFT;

  always_ff @(posedge clk) begin
    if (in_valid) begin
      hist[0][pos] <= in_data;
      for (int unsigned t = 1; t < TAPS - 1; t++) hist[t][pos] <= hist[t-1][pos];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pos       <= '0;
      out_valid <= 1'b0;
      out_sync  <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= in_valid;
      out_sync  <= in_valid && (pos == '0);
      if (in_valid) begin
        out_data <= sat_data(rounded);
        pos      <= (pos == PW'(N - 1)) ? '0 : pos + 1'b1;
      end
    end
  end

endmodule
