// power_detect: power of a complex channel value, |x|^2 = re^2 + im^2.
//
// One result per valid input, registered (one clock of latency); the channel
// tag and spectrum sync travel alongside. The output keeps all 2*HYB_W bits,
// so no rounding happens here. The function is the paper's power block; the
// widths are this design's choice.
module power_detect
  import dsbs_pkg::*;
#(
  parameter int unsigned NCHAN = 2048
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic                     in_sync,
  input  logic [$clog2(NCHAN)-1:0] in_chan,
  input  hyb_t                     in_data,
  output logic                     out_valid,
  output logic                     out_sync,
  output logic [$clog2(NCHAN)-1:0] out_chan,
  output logic [PWR_W-1:0]         out_power
);

  logic [PWR_W-1:0] sq_re, sq_im;
  assign sq_re = PWR_W'(in_data.re * in_data.re);
  assign sq_im = PWR_W'(in_data.im * in_data.im);

  always_ff @(posedge clk) begin
    out_power <= sq_re + sq_im;
    out_chan  <= in_chan;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_sync  <= 1'b0;
    end else begin
      out_valid <= in_valid;
      out_sync  <= in_valid && in_sync;
    end
  end

endmodule
