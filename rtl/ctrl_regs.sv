// ctrl_regs: host-visible register file of the spectrometer.
//
// The host sets the accumulation length and the calibration constants at
// any time, arms the calibration capture and reads captured channels back
// over a simple word-addressed bus (write: wr_en/wr_addr/wr_data; read:
// rd_en/rd_addr, answered one clock later on rd_valid/rd_data). That the
// accumulation length and the constants are user-settable at run time is
// the paper's; the bus and the address map below are this design's:
//
//   0x0000        ACC_LEN    rw  spectra per integration (reset ACC_LEN_RST)
//   0x0001        FFT_SHIFT  rw  per-stage divide-by-two mask of both FFTs
//   0x0002        COEF_RE    rw  staged real part for the next coefficient write
//   0x0003        CAL_CTRL   w: bit 0 = 1 arms the capture; r: {busy, done}
//   0x0004        DUMP_COUNT r   number of finished integrations
//   0x2000-0x3FFF COEF       w   addr[12:11] = C1..C4, addr[10:0] = channel,
//                                wr_data[17:0] = imaginary part; the write
//                                commits {COEF_RE, imaginary} to the hybrid
//   0x4000-0x4FFF CAPTURE    r   addr[11] = branch, addr[10:1] = k/2,
//                                addr[0] = 0 real / 1 imaginary (sign-extended)
//
// The capture RAM is read through its own one-clock read port: its address
// is driven straight from rd_addr and its data is muxed into rd_data.
module ctrl_regs
  import dsbs_pkg::*;
#(
  parameter int unsigned NCHAN       = 2048,
  parameter int unsigned FFT_N       = 4096,
  parameter logic [31:0] ACC_LEN_RST = 32'd1024
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // host bus
  input  logic                     wr_en,
  input  logic [15:0]              wr_addr,
  input  logic [31:0]              wr_data,
  input  logic                     rd_en,
  input  logic [15:0]              rd_addr,
  output logic                     rd_valid,
  output logic [31:0]              rd_data,
  // controls
  output logic [31:0]              acc_len,
  output logic [$clog2(FFT_N)-1:0] fft_shift,
  output logic                     cw_en,
  output logic [1:0]               cw_sel,
  output logic [$clog2(NCHAN)-1:0] cw_chan,
  output cal_t                     cw_data,
  output logic                     cal_arm,
  // status and capture read port
  input  logic                     cal_busy,
  input  logic                     cal_done,
  input  logic [31:0]              dump_count,
  output logic [$clog2(NCHAN)-1:0] cap_addr,
  input  cplx_t                    cap_data
);

  localparam int unsigned CHW = $clog2(NCHAN);
  localparam int unsigned SW  = $clog2(FFT_N);

  localparam logic [15:0] A_ACC_LEN = 16'h0000;
  localparam logic [15:0] A_SHIFT   = 16'h0001;
  localparam logic [15:0] A_COEF_RE = 16'h0002;
  localparam logic [15:0] A_CAL     = 16'h0003;
  localparam logic [15:0] A_DUMPS   = 16'h0004;

  logic signed [CAL_W-1:0] coef_re;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_len   <= ACC_LEN_RST;
      fft_shift <= '1;
      coef_re   <= '0;
      cw_en     <= 1'b0;
      cw_sel    <= '0;
      cw_chan   <= '0;
      cw_data   <= '0;
      cal_arm   <= 1'b0;
    end else begin
      cw_en   <= 1'b0;
      cal_arm <= 1'b0;
      if (wr_en) begin
        if (wr_addr[15:13] == 3'b001) begin
          cw_en   <= 1'b1;
          cw_sel  <= wr_addr[12:11];
          cw_chan <= CHW'(wr_addr[10:0]);
          cw_data <= '{re: coef_re, im: wr_data[CAL_W-1:0]};
        end else begin
          unique case (wr_addr)
            A_ACC_LEN: acc_len   <= wr_data;
            A_SHIFT:   fft_shift <= wr_data[SW-1:0];
            A_COEF_RE: coef_re   <= wr_data[CAL_W-1:0];
            A_CAL:     cal_arm   <= wr_data[0];
            default:   ;
          endcase
        end
      end
    end
  end

  // Read path.
  assign cap_addr = CHW'({rd_addr[11], rd_addr[10:1]});

  logic [15:0] ra_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_valid <= 1'b0;
      ra_q     <= '0;
    end else begin
      rd_valid <= rd_en;
      if (rd_en) ra_q <= rd_addr;
    end
  end

  always_comb begin
    rd_data = '0;
    if (ra_q[15:12] == 4'h4) begin
      rd_data = ra_q[0] ? 32'(cap_data.im) : 32'(cap_data.re);
    end else begin
      unique case (ra_q)
        A_ACC_LEN: rd_data = acc_len;
        A_SHIFT:   rd_data = 32'(fft_shift);
        A_COEF_RE: rd_data = 32'(coef_re);
        A_CAL:     rd_data = {30'b0, cal_busy, cal_done};
        A_DUMPS:   rd_data = dump_count;
        default:   rd_data = '0;
      endcase
    end
  end

endmodule
