// fft_sdf_stage: one radix-2 decimation-in-frequency stage of a single-path
// delay-feedback (SDF) pipeline FFT.
//
// The stage works on blocks of 2*D samples. While the first D samples of a
// block arrive they are written into a D-deep delay line and the delay line's
// old contents (the differences of the previous block) leave the stage,
// multiplied by the twiddle factor exp(-j*2*pi*k/(2D)), k = 0..D-1. While the
// second D samples arrive, each is combined with the sample D earlier: the sum
// a+b leaves the stage at once, the difference a-b goes into the delay line.
// So each block leaves as D sums followed, one block later, by D rotated
// differences, which is the input order the next stage (D/2) expects.
//
// shift = 1 halves a+b and a-b (rounded) to keep the word inside DATA_W;
// results are saturated in any case. Twiddles are TWID_W-bit signed with
// TWID_W-1 fraction bits, computed at initialisation; k = 0 is passed
// through without a multiply.
//
// Interface: one sample per in_valid cycle, gaps allowed. Output is
// registered (one clock). in_sync resets the block counter and marks the first sample of a frame (N samples, a whole
// number of blocks); out_sync marks the first output of that frame, D valid
// samples later, and is passed only for blocks that began with in_sync.
module fft_sdf_stage
  import dsbs_pkg::*;
#(
  parameter int unsigned D = 2048
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  shift,
  input  logic  in_valid,
  input  logic  in_sync,
  input  cplx_t in_data,
  output logic  out_valid,
  output logic  out_sync,
  output cplx_t out_data
);

  localparam int unsigned CW = $clog2(2 * D);
  localparam int unsigned AW = (D > 1) ? $clog2(D) : 1;

  logic [CW-1:0]            cnt;
  logic                     started;
  logic                     blk_sync;  // current block began with in_sync
  cplx_t                    dline [D];
  logic signed [TWID_W-1:0] tw_re [D];
  logic signed [TWID_W-1:0] tw_im [D];

  initial begin : init_twiddle
    real ang, maxv, c, s;
    maxv = real'((1 << (TWID_W - 1)) - 1);
    for (int unsigned k = 0; k < D; k++) begin
      ang = -2.0 * 3.14159265358979 * real'(k) / real'(2 * D);
      c = $cos(ang) * real'(1 << (TWID_W - 1));
      s = $sin(ang) * real'(1 << (TWID_W - 1));
      if (c > maxv) c = maxv;
      if (s > maxv) s = maxv;
      tw_re[k] = TWID_W'($rtoi(c < 0.0 ? c - 0.5 : c + 0.5));
      tw_im[k] = TWID_W'($rtoi(s < 0.0 ? s - 0.5 : s + 0.5));
      dline[k] = '0;
    end
  end

  logic [CW-1:0] cur;
  logic [AW-1:0] ptr;
  logic          second;
  assign cur    = in_sync ? '0 : cnt;
  assign ptr    = AW'(cur % D);
  assign second = (cur >= CW'(D));

  cplx_t a, b;
  assign a = dline[ptr];
  assign b = in_data;

  logic signed [DATA_W:0] sum_re, sum_im, dif_re, dif_im;
  assign sum_re = (DATA_W+1)'(a.re) + (DATA_W+1)'(b.re);
  assign sum_im = (DATA_W+1)'(a.im) + (DATA_W+1)'(b.im);
  assign dif_re = (DATA_W+1)'(a.re) - (DATA_W+1)'(b.re);
  assign dif_im = (DATA_W+1)'(a.im) - (DATA_W+1)'(b.im);

  function automatic logic signed [DATA_W-1:0] scale(input logic signed [DATA_W:0] v, input logic sh);
    logic signed [47:0] w;
    w = sh ? ((48'(v) + 48'sd1) >>> 1) : 48'(v);
    return sat_data(w);
  endfunction

  cplx_t sum_s, dif_s;
  assign sum_s = '{re: scale(sum_re, shift), im: scale(sum_im, shift)};
  assign dif_s = '{re: scale(dif_re, shift), im: scale(dif_im, shift)};

  // Twiddle rotation of the delay-line output during the first half.
  logic signed [47:0] rot_re, rot_im;
  always_comb begin
    rot_re = (48'(a.re) * 48'(tw_re[ptr]) - 48'(a.im) * 48'(tw_im[ptr]) + (48'sd1 <<< (TWID_W - 2))) >>> (TWID_W - 1);
    rot_im = (48'(a.re) * 48'(tw_im[ptr]) + 48'(a.im) * 48'(tw_re[ptr]) + (48'sd1 <<< (TWID_W - 2))) >>> (TWID_W - 1);
  end

  cplx_t y;
  always_comb begin
    if (second)           y = sum_s;
    else if (ptr == '0)   y = a;
    else                  y = '{re: sat_data(rot_re), im: sat_data(rot_im)};
  end

  always_ff @(posedge clk) begin
    if (in_valid) dline[ptr] <= second ? dif_s : b;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt       <= '0;
      started   <= 1'b0;
      blk_sync  <= 1'b0;
      out_valid <= 1'b0;
      out_sync  <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= in_valid && (started || in_sync);
      out_sync  <= in_valid && (started || in_sync) && (cur == CW'(D)) && blk_sync;
      if (in_valid) begin
        cnt      <= cur + 1'b1;
        if (cur == '0) blk_sync <= in_sync;
        started  <= started || in_sync;
        out_data <= y;
      end
    end
  end

endmodule
