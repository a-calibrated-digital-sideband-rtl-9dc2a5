// sideband_hybrid: calibrated digital IF hybrid.
//
// For every spectral channel k the two filter-bank outputs X1[k] (branch 1)
// and X2[k] (branch 2) are combined with four complex per-channel constants:
//     LSB[k] = C1[k]*X1[k] + C2[k]*X2[k]
//     USB[k] = C3[k]*X1[k] + C4[k]*X2[k]
// With C1 = C4 = 1 and C2 = C3 = j this is an ideal 90-degree IF hybrid;
// other values of C2 and C3 also cancel the amplitude and phase imbalance of
// the analog front end channel by channel. This structure and the ideal
// values are the paper's. Each constant is a signed CAL_W-bit complex number
// with CAL_FRAC fraction bits (range about +-2), stored in its own
// NCHAN-entry RAM; the coefficient format, the power-up contents (the ideal
// hybrid) and the write port are this design's own choices.
//
// Coefficient writes (cw_en, cw_sel = 0..3 for C1..C4, cw_chan, cw_data) are
// accepted on any cycle, also while data is flowing.
//
// Timing: two clocks. Cycle 1 registers the inputs and reads the four RAMs
// at in_chan; cycle 2 forms the products and sums, rounds away CAL_FRAC bits
// and saturates to HYB_W bits (the saturation can only act on the extreme
// corner of the input range).
module sideband_hybrid
  import dsbs_pkg::*;
#(
  parameter int unsigned NCHAN = 2048
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic                     in_sync,
  input  logic [$clog2(NCHAN)-1:0] in_chan,
  input  cplx_t                    x1,
  input  cplx_t                    x2,
  input  logic                     cw_en,
  input  logic [1:0]               cw_sel,
  input  logic [$clog2(NCHAN)-1:0] cw_chan,
  input  cal_t                     cw_data,
  output logic                     out_valid,
  output logic                     out_sync,
  output logic [$clog2(NCHAN)-1:0] out_chan,
  output hyb_t                     lsb,
  output hyb_t                     usb
);

  localparam int unsigned CHW = $clog2(NCHAN);
  localparam logic signed [CAL_W-1:0] ONE = CAL_W'(1 << CAL_FRAC);

  cal_t coef [4][NCHAN];

  initial begin : init_ideal
    for (int unsigned k = 0; k < NCHAN; k++) begin
      coef[0][k] = '{re: ONE, im: '0};   // C1 = 1
      coef[1][k] = '{re: '0,  im: ONE};  // C2 = j
      coef[2][k] = '{re: '0,  im: ONE};  // C3 = j
      coef[3][k] = '{re: ONE, im: '0};   // C4 = 1
    end
  end

  always_ff @(posedge clk) begin
    if (cw_en) coef[cw_sel][cw_chan] <= cw_data;
  end

  // Stage 1: register inputs and coefficients.
  logic           v1, s1;
  logic [CHW-1:0] ch1;
  cplx_t          x1_q, x2_q;
  cal_t           c_q [4];

  always_ff @(posedge clk) begin
    x1_q <= x1;
    x2_q <= x2;
    ch1  <= in_chan;
    for (int i = 0; i < 4; i++) c_q[i] <= coef[i][in_chan];
  end

  // Stage 2: complex multiply-add.
  function automatic logic signed [47:0] cmul_re(input cal_t c, input cplx_t x);
    return 48'(c.re) * 48'(x.re) - 48'(c.im) * 48'(x.im);
  endfunction
  function automatic logic signed [47:0] cmul_im(input cal_t c, input cplx_t x);
    return 48'(c.re) * 48'(x.im) + 48'(c.im) * 48'(x.re);
  endfunction
  function automatic logic signed [HYB_W-1:0] round_sat(input logic signed [47:0] v);
    logic signed [47:0] r;
    localparam logic signed [47:0] MAXV = (48'sd1 <<< (HYB_W-1)) - 48'sd1;
    localparam logic signed [47:0] MINV = -(48'sd1 <<< (HYB_W-1));
    r = (v + (48'sd1 <<< (CAL_FRAC - 1))) >>> CAL_FRAC;
    if (r > MAXV)      return MAXV[HYB_W-1:0];
    else if (r < MINV) return MINV[HYB_W-1:0];
    else               return r[HYB_W-1:0];
  endfunction

  always_ff @(posedge clk) begin
    lsb.re   <= round_sat(cmul_re(c_q[0], x1_q) + cmul_re(c_q[1], x2_q));
    lsb.im   <= round_sat(cmul_im(c_q[0], x1_q) + cmul_im(c_q[1], x2_q));
    usb.re   <= round_sat(cmul_re(c_q[2], x1_q) + cmul_re(c_q[3], x2_q));
    usb.im   <= round_sat(cmul_im(c_q[2], x1_q) + cmul_im(c_q[3], x2_q));
    out_chan <= ch1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1        <= 1'b0;
      s1        <= 1'b0;
      out_valid <= 1'b0;
      out_sync  <= 1'b0;
    end else begin
      v1        <= in_valid;
      s1        <= in_valid && in_sync;
      out_valid <= v1;
      out_sync  <= s1;
    end
  end

endmodule
