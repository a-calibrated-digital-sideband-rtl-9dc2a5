// dsbs_pkg: widths, types and helper functions shared by the blocks of the
// digital sideband separating spectrometer.
//
// The sample width (8 bit), the filter-bank data and coefficient width
// (18 bit), the channel count (2048 per sideband) and the accumulator width
// (64 bit) are the published figures of the instrument. The calibration
// coefficient format (signed 18 bit, 16 fraction bits) and the hybrid output
// width are choices of this design: the hybrid keeps every bit of its sum so
// that nothing is lost before the power detector.
package dsbs_pkg;

  localparam int unsigned ADC_W    = 8;     // ADC sample width
  localparam int unsigned DATA_W   = 18;    // PFB data width
  localparam int unsigned TWID_W   = 18;    // PFB coefficient / twiddle width
  localparam int unsigned CAL_W    = 18;    // calibration constant width
  localparam int unsigned CAL_FRAC = 16;    // fraction bits of a calibration constant
  localparam int unsigned HYB_W    = DATA_W + 3;  // hybrid output width, full precision
  localparam int unsigned PWR_W    = 2 * HYB_W;   // power detector output width
  localparam int unsigned ACC_W    = 64;    // accumulator width

  typedef struct packed {
    logic signed [DATA_W-1:0] re;
    logic signed [DATA_W-1:0] im;
  } cplx_t;

  typedef struct packed {
    logic signed [CAL_W-1:0] re;
    logic signed [CAL_W-1:0] im;
  } cal_t;

  typedef struct packed {
    logic signed [HYB_W-1:0] re;
    logic signed [HYB_W-1:0] im;
  } hyb_t;

  // Saturate a wide signed value to DATA_W bits.
  function automatic logic signed [DATA_W-1:0] sat_data(input logic signed [47:0] v);
    localparam logic signed [47:0] MAXV = (48'sd1 <<< (DATA_W-1)) - 48'sd1;
    localparam logic signed [47:0] MINV = -(48'sd1 <<< (DATA_W-1));
    if (v > MAXV)      return MAXV[DATA_W-1:0];
    else if (v < MINV) return MINV[DATA_W-1:0];
    else               return v[DATA_W-1:0];
  endfunction

  // Reverse the low `bits` bits of v.
  function automatic logic [31:0] bitrev(input logic [31:0] v, input int unsigned bits);
    logic [31:0] r;
    r = '0;
    for (int unsigned i = 0; i < bits; i++) r[i] = v[bits-1-i];
    return r;
  endfunction

endpackage
