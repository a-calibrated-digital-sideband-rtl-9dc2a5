// pfb: polyphase filter bank channeliser for one real ADC stream.
//
// pfb_fir windows the real samples, fft_sdf transforms each frame of N
// filtered samples (imaginary part zero), and only the bins 0..N/2-1 are
// passed on, since the upper half of the spectrum of a real signal is the
// mirror image of the lower half. The result is N/2 complex channels per
// frame covering 0 to fs/2: with N = 4096 this is the 2048-channel, 18-bit
// filter bank of the spectrometer.
//
// Interface: one ADC sample per in_valid cycle. Channels come out at half
// the input rate (one every other valid sample), in bit-reversed order, each
// tagged with out_chan; out_sync marks channel 0, the first of a spectrum.
// Latency from the first sample of a frame to its channel 0 is
// 1 + N-1 + log2(N) valid samples.
module pfb
  import dsbs_pkg::*;
#(
  parameter int unsigned N    = 4096,
  parameter int unsigned TAPS = 4
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [$clog2(N)-1:0]     fft_shift,
  input  logic                     in_valid,
  input  logic signed [ADC_W-1:0]  in_data,
  output logic                     out_valid,
  output logic                     out_sync,
  output logic [$clog2(N)-2:0]     out_chan,
  output cplx_t                    out_data
);

  localparam int unsigned S = $clog2(N);

  logic                     fir_valid, fir_sync;
  logic signed [DATA_W-1:0] fir_data;

  pfb_fir #(.N(N), .TAPS(TAPS)) u_fir (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (in_valid),
    .in_data  (in_data),
    .out_valid(fir_valid),
    .out_sync (fir_sync),
    .out_data (fir_data)
  );

  logic         fft_valid, fft_sync;
  logic [S-1:0] fft_bin;
  cplx_t        fft_data;

  fft_sdf #(.N(N)) u_fft (
    .clk      (clk),
    .rst_n    (rst_n),
    .shift    (fft_shift),
    .in_valid (fir_valid),
    .in_sync  (fir_sync),
    .in_data  ('{re: fir_data, im: '0}),
    .out_valid(fft_valid),
    .out_sync (fft_sync),
    .out_bin  (fft_bin),
    .out_data (fft_data)
  );

  assign out_valid = fft_valid && !fft_bin[S-1];
  assign out_sync  = fft_sync;
  assign out_chan  = fft_bin[S-2:0];
  assign out_data  = fft_data;

endmodule
