// fft_sdf: streaming N-point pipeline FFT (radix-2, decimation in frequency,
// single-path delay feedback).
//
// log2(N) fft_sdf_stage instances are chained with delay lines of N/2, N/4,
// ..., 1 samples. The FFT accepts one complex sample per valid cycle and
// delivers one bin per valid cycle without ever stopping, which is the
// property a real-time spectrometer needs. Bins come out in bit-reversed
// order; out_bin gives the natural bin number of each output sample and
// out_sync marks bin 0 (the first output of a frame).
//
// shift[s] selects a divide-by-two in stage s (s = 0 is the first stage).
// With every bit set the transform is scaled by 1/N.
//
// Latency: the first bin of a frame appears N-1+log2(N) valid input samples
// after that frame's first sample (one register per stage plus the delay
// lines). Input gaps stall the whole pipeline.
//
// From the paper: a pipeline FFT inside the PFB, 18-bit data and
// coefficients. This design's own choices: radix 2 SDF, bit-reversed output
// order with a bin tag instead of a reorder buffer, per-stage shift control.
module fft_sdf
  import dsbs_pkg::*;
#(
  parameter int unsigned N = 4096
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [$clog2(N)-1:0] shift,
  input  logic                 in_valid,
  input  logic                 in_sync,
  input  cplx_t                in_data,
  output logic                 out_valid,
  output logic                 out_sync,
  output logic [$clog2(N)-1:0] out_bin,
  output cplx_t                out_data
);

  localparam int unsigned S = $clog2(N);

  logic  v [S+1];
  logic  sy[S+1];
  cplx_t d [S+1];

  assign v[0]  = in_valid;
  assign sy[0] = in_sync;
  assign d[0]  = in_data;

  for (genvar s = 0; s < S; s++) begin : g_stage
    fft_sdf_stage #(.D(N >> (s + 1))) u_stage (
      .clk      (clk),
      .rst_n    (rst_n),
      .shift    (shift[s]),
      .in_valid (v[s]),
      .in_sync  (sy[s]),
      .in_data  (d[s]),
      .out_valid(v[s+1]),
      .out_sync (sy[s+1]),
      .out_data (d[s+1])
    );
  end

  // Output position counter -> natural bin number.
  logic [S-1:0] ocnt;
  logic         ostarted;
  logic [S-1:0] opos;
  assign opos = sy[S] ? '0 : ocnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ocnt     <= '0;
      ostarted <= 1'b0;
    end else if (v[S]) begin
      ocnt     <= opos + 1'b1;
      ostarted <= ostarted || sy[S];
    end
  end

  assign out_valid = v[S] && (ostarted || sy[S]);
  assign out_sync  = sy[S];
  assign out_bin   = S'(bitrev(32'(opos), S));
  assign out_data  = d[S];

endmodule
