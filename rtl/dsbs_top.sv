// dsbs_top: digital back end of a calibrated sideband separating (2SB)
// spectrometer.
//
// Two real sample streams, the digitised outputs of the two mixers of an
// analog 2SB front end, each go through a polyphase filter bank (pfb) of
// FFT_N/2 channels. For every channel the calibrated digital IF hybrid
// (sideband_hybrid) forms LSB = C1*X1 + C2*X2 and USB = C3*X1 + C4*X2,
// power_detect squares each sideband and a 64-bit vector_accumulator per
// sideband integrates acc_len spectra. ctrl_regs gives the host access to
// the accumulation length, the FFT scaling and the constants C1..C4, and to
// cal_snapshot, which records the raw filter-bank outputs of the
// even-numbered channels so the host can compute the constants.
//
// Interface: adc_valid qualifies one sample of each stream (both streams are
// sampled together). The integrated spectra leave on spec_* as one LSB and
// one USB 64-bit word per channel, in the filter bank's bit-reversed channel
// order with spec_chan giving the channel; spec_sync marks the first word of
// a dump. A dump of acc_len spectra appears every acc_len*FFT_N samples.
//
// The block diagram (two PFBs, C1..C4, two adders, two power blocks, two
// 64-bit accumulators), the 8-bit samples, 18-bit 2048-channel PFB and the
// run-time access to C1..C4 and the accumulation length are the paper's.
// Processing one sample per clock per stream, the host bus and the merged
// calibration capture are this design's own choices.
module dsbs_top
  import dsbs_pkg::*;
#(
  parameter int unsigned FFT_N       = 4096,
  parameter int unsigned TAPS        = 4,
  parameter logic [31:0] ACC_LEN_RST = 32'd1024,
  localparam int unsigned NCHAN      = FFT_N / 2,
  localparam int unsigned CHW        = $clog2(NCHAN)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // ADC sample streams
  input  logic                    adc_valid,
  input  logic signed [ADC_W-1:0] adc0,
  input  logic signed [ADC_W-1:0] adc1,
  // host bus
  input  logic                    wr_en,
  input  logic [15:0]             wr_addr,
  input  logic [31:0]             wr_data,
  input  logic                    rd_en,
  input  logic [15:0]             rd_addr,
  output logic                    rd_valid,
  output logic [31:0]             rd_data,
  // integrated spectra
  output logic                    spec_valid,
  output logic                    spec_sync,
  output logic [CHW-1:0]          spec_chan,
  output logic [ACC_W-1:0]        spec_lsb,
  output logic [ACC_W-1:0]        spec_usb
);

  logic [31:0]              acc_len;
  logic [$clog2(FFT_N)-1:0] fft_shift;
  logic                     cw_en;
  logic [1:0]               cw_sel;
  logic [CHW-1:0]           cw_chan;
  cal_t                     cw_data;
  logic                     cal_arm, cal_busy, cal_done;
  logic [31:0]              dump_count;
  logic [CHW-1:0]           cap_addr;
  cplx_t                    cap_data;

  ctrl_regs #(.NCHAN(NCHAN), .FFT_N(FFT_N), .ACC_LEN_RST(ACC_LEN_RST)) u_regs (
    .clk, .rst_n,
    .wr_en, .wr_addr, .wr_data, .rd_en, .rd_addr, .rd_valid, .rd_data,
    .acc_len, .fft_shift, .cw_en, .cw_sel, .cw_chan, .cw_data, .cal_arm,
    .cal_busy, .cal_done, .dump_count, .cap_addr, .cap_data
  );

  // Filter banks, one per branch.
  logic           p1_valid, p1_sync, p2_valid, p2_sync;
  logic [CHW-1:0] p1_chan, p2_chan;
  cplx_t          x1, x2;

  pfb #(.N(FFT_N), .TAPS(TAPS)) u_pfb1 (
    .clk, .rst_n, .fft_shift,
    .in_valid(adc_valid), .in_data(adc0),
    .out_valid(p1_valid), .out_sync(p1_sync), .out_chan(p1_chan), .out_data(x1)
  );

  pfb #(.N(FFT_N), .TAPS(TAPS)) u_pfb2 (
    .clk, .rst_n, .fft_shift,
    .in_valid(adc_valid), .in_data(adc1),
    .out_valid(p2_valid), .out_sync(p2_sync), .out_chan(p2_chan), .out_data(x2)
  );

  // The two banks run in lock step.
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
    (p1_valid == p2_valid) && (p1_sync == p2_sync) && (!p1_valid || p1_chan == p2_chan));

  cal_snapshot #(.NCHAN(NCHAN)) u_cal (
    .clk, .rst_n, .arm(cal_arm),
    .in_valid(p1_valid), .in_sync(p1_sync), .in_chan(p1_chan), .x1, .x2,
    .rd_addr(cap_addr), .rd_data(cap_data), .busy(cal_busy), .done(cal_done)
  );

  logic           h_valid, h_sync;
  logic [CHW-1:0] h_chan;
  hyb_t           lsb, usb;

  sideband_hybrid #(.NCHAN(NCHAN)) u_hybrid (
    .clk, .rst_n,
    .in_valid(p1_valid), .in_sync(p1_sync), .in_chan(p1_chan), .x1, .x2,
    .cw_en, .cw_sel, .cw_chan, .cw_data,
    .out_valid(h_valid), .out_sync(h_sync), .out_chan(h_chan), .lsb, .usb
  );

  logic             pl_valid, pl_sync, pu_valid, pu_sync;
  logic [CHW-1:0]   pl_chan, pu_chan;
  logic [PWR_W-1:0] pl, pu;

  power_detect #(.NCHAN(NCHAN)) u_pwr_lsb (
    .clk, .rst_n, .in_valid(h_valid), .in_sync(h_sync), .in_chan(h_chan), .in_data(lsb),
    .out_valid(pl_valid), .out_sync(pl_sync), .out_chan(pl_chan), .out_power(pl)
  );

  power_detect #(.NCHAN(NCHAN)) u_pwr_usb (
    .clk, .rst_n, .in_valid(h_valid), .in_sync(h_sync), .in_chan(h_chan), .in_data(usb),
    .out_valid(pu_valid), .out_sync(pu_sync), .out_chan(pu_chan), .out_power(pu)
  );

  logic           al_valid, al_sync, au_valid, au_sync;
  logic [CHW-1:0] al_chan, au_chan;
  logic [31:0]    au_dumps;

  vector_accumulator #(.NCHAN(NCHAN)) u_acc_lsb (
    .clk, .rst_n, .acc_len,
    .in_valid(pl_valid), .in_sync(pl_sync), .in_chan(pl_chan), .in_data(pl),
    .out_valid(al_valid), .out_sync(al_sync), .out_chan(al_chan), .out_data(spec_lsb),
    .dump_count(dump_count)
  );

  vector_accumulator #(.NCHAN(NCHAN)) u_acc_usb (
    .clk, .rst_n, .acc_len,
    .in_valid(pu_valid), .in_sync(pu_sync), .in_chan(pu_chan), .in_data(pu),
    .out_valid(au_valid), .out_sync(au_sync), .out_chan(au_chan), .out_data(spec_usb),
    .dump_count(au_dumps)
  );

  a_sidebands_aligned: assert property (@(posedge clk) disable iff (!rst_n)
    (al_valid == au_valid) && (al_sync == au_sync) && (!al_valid || al_chan == au_chan) &&
    (au_dumps == dump_count));

  assign spec_valid = al_valid;
  assign spec_sync  = al_sync;
  assign spec_chan  = al_chan;

endmodule
