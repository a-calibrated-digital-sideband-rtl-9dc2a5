// vector_accumulator: per-channel integration of power spectra.
//
// An NCHAN-entry RAM of ACC_W-bit words holds one running sum per channel.
// An integration spans acc_len consecutive spectra (acc_len = 0 counts as
// 1). During the first spectrum of an integration each channel's stored sum,
// which is the finished result of the previous integration, is sent out and
// replaced by the new power value; during the other spectra the power is
// added to the stored sum. Results therefore stream out without stopping the
// input and without a second buffer. acc_len is sampled at the start of each
// integration, so it can be rewritten at any time.
//
// Interface: in_sync marks the first channel of a spectrum (channels may
// arrive in any fixed order, each tagged with in_chan). out_valid/out_chan/
// out_data carry the results of a finished integration, one clock after the
// matching input; out_sync marks the first result of a dump. The first
// integration after reset is complete only from the first in_sync on, and
// nothing is sent out before it has finished. dump_count counts the dumps.
//
// From the paper: a 64-bit accumulator per sideband and a user-set
// accumulation length. This design's own choices: the dump-on-first-spectrum
// scheme, the RAM read in the same cycle as the write (read-modify-write,
// one channel per clock at most) and the dump counter.
module vector_accumulator
  import dsbs_pkg::*;
#(
  parameter int unsigned NCHAN = 2048,
  parameter int unsigned IN_W  = PWR_W,
  parameter int unsigned OUT_W = ACC_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [31:0]              acc_len,
  input  logic                     in_valid,
  input  logic                     in_sync,
  input  logic [$clog2(NCHAN)-1:0] in_chan,
  input  logic [IN_W-1:0]          in_data,
  output logic                     out_valid,
  output logic                     out_sync,
  output logic [$clog2(NCHAN)-1:0] out_chan,
  output logic [OUT_W-1:0]         out_data,
  output logic [31:0]              dump_count
);

  logic [OUT_W-1:0] mem [NCHAN];

  logic        started;     // an integration is in progress
  logic        have_full;   // the RAM holds a finished integration
  logic        first_q;     // current spectrum is the first of its integration
  logic [31:0] spec_idx;    // spectrum index inside the integration
  logic [31:0] len_q;       // latched accumulation length

  logic new_int, first_eff, dump_eff;
  assign new_int   = in_sync && (!started || spec_idx == len_q - 1);
  assign first_eff = in_sync ? new_int : first_q;
  assign dump_eff  = in_sync ? (new_int && started) : (first_q && have_full);

  always_ff @(posedge clk) begin
    if (in_valid) mem[in_chan] <= first_eff ? OUT_W'(in_data) : mem[in_chan] + OUT_W'(in_data);
    out_data <= mem[in_chan];
    out_chan <= in_chan;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      started    <= 1'b0;
      have_full  <= 1'b0;
      first_q    <= 1'b0;
      spec_idx   <= '0;
      len_q      <= 32'd1;
      out_valid  <= 1'b0;
      out_sync   <= 1'b0;
      dump_count <= '0;
    end else begin
      out_valid <= in_valid && first_eff && dump_eff;
      out_sync  <= in_valid && in_sync && new_int && started;
      if (in_valid && in_sync) begin
        started <= 1'b1;
        first_q <= new_int;
        if (new_int) begin
          spec_idx  <= '0;
          len_q     <= (acc_len == '0) ? 32'd1 : acc_len;
          have_full <= started;
          if (started) dump_count <= dump_count + 1'b1;
        end else begin
          spec_idx <= spec_idx + 1'b1;
        end
      end
    end
  end

endmodule
