// cal_snapshot: capture of raw filter-bank outputs for calibration.
//
// To calibrate the hybrid, the complex outputs of both filter banks are
// recorded for the even-numbered channels (NCHAN/2 of them) and read out by
// the host, which measures the amplitude ratio and phase difference of the
// two analog branches and computes C2 and C3 from them. This module does the
// recording: after an arm pulse it waits for the start of the next spectrum,
// stores X1[k] and X2[k] for every even k of that spectrum into two
// NCHAN/2-entry RAMs at address k/2, and then reports done.
//
// In the instrument this recording was a separate spectrometer
// configuration; here it is a tap on the two filter-bank outputs that works
// alongside the sideband spectrometer. Capturing a single spectrum per arm,
// the arm/busy/done handshake and the read port are this design's choices.
//
// Read port: rd_addr = {branch, k/2}; rd_data (branch 0 = X1, 1 = X2) is
// valid one clock after rd_addr.
module cal_snapshot
  import dsbs_pkg::*;
#(
  parameter int unsigned NCHAN = 2048
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     arm,
  input  logic                     in_valid,
  input  logic                     in_sync,
  input  logic [$clog2(NCHAN)-1:0] in_chan,
  input  cplx_t                    x1,
  input  cplx_t                    x2,
  input  logic [$clog2(NCHAN)-1:0] rd_addr,
  output cplx_t                    rd_data,
  output logic                     busy,
  output logic                     done
);

  localparam int unsigned CHW  = $clog2(NCHAN);
  localparam int unsigned HALF = NCHAN / 2;

  typedef enum logic [1:0] {IDLE, ARMED, CAPTURE, DONE} state_t;
  state_t state;

  cplx_t mem1 [HALF];
  cplx_t mem2 [HALF];
  logic [CHW-1:0] n_cap;

  logic take;
  assign take = in_valid && !in_chan[0] &&
                ((state == CAPTURE && !in_sync) || (state == ARMED && in_sync));

  always_ff @(posedge clk) begin
    if (take) begin
      mem1[in_chan[CHW-1:1]] <= x1;
      mem2[in_chan[CHW-1:1]] <= x2;
    end
    rd_data <= rd_addr[CHW-1] ? mem2[rd_addr[CHW-2:0]] : mem1[rd_addr[CHW-2:0]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE;
      n_cap <= '0;
    end else begin
      if (take) n_cap <= n_cap + 1'b1;
      unique case (state)
        IDLE:    if (arm) state <= ARMED;
        ARMED:   if (take) begin
                   state <= CAPTURE;
                   n_cap <= CHW'(1);
                 end
        CAPTURE: if (take && n_cap == CHW'(HALF - 1)) state <= DONE;
        DONE:    if (arm) state <= ARMED;
        default: state <= IDLE;
      endcase
    end
  end

  assign busy = (state == ARMED) || (state == CAPTURE);
  assign done = (state == DONE);

endmodule
