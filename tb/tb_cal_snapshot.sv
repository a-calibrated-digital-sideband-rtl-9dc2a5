// tb_cal_snapshot: streams spectra (NCHAN = 32, bit-reversed channel order,
// random gaps) of random X1/X2 values. Arms the capture in the middle of a
// spectrum and checks that the next whole spectrum is recorded: busy while
// waiting and capturing, done afterwards, every even channel of that
// spectrum readable at {branch, k/2} with one clock of read latency, and the
// RAM unchanged by later spectra until the capture is armed again.
module tb_cal_snapshot;
  import dsbs_pkg::*;
  localparam int NCHAN = 32;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic arm = 0, in_valid = 0, in_sync = 0, busy, done;
  logic [4:0] in_chan = 0, rd_addr = 0;
  cplx_t x1 = '0, x2 = '0, rd_data;
  int checks = 0, failures = 0;

  cal_snapshot #(.NCHAN(NCHAN)) dut (.*);

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  cplx_t spec1 [5][NCHAN];
  cplx_t spec2 [5][NCHAN];

  function automatic int brev5(int v);
    int r = 0;
    for (int i = 0; i < 5; i++) r |= ((v >> i) & 1) << (4 - i);
    return r;
  endfunction

  task automatic run_spectrum(int s, bit arm_mid);
    for (int c = 0; c < NCHAN; c++) begin
      @(negedge clk);
      arm = arm_mid && (c == 7);
      in_valid = 1; in_sync = (c == 0); in_chan = 5'(brev5(c));
      x1 = spec1[s][brev5(c)]; x2 = spec2[s][brev5(c)];
      if ($urandom_range(0, 2) == 0) begin
        @(negedge clk); arm = 0; in_valid = 0; in_sync = 0;
      end
    end
    @(negedge clk); arm = 0; in_valid = 0; in_sync = 0;
  endtask

  task automatic check_ram(int s);
    for (int b = 0; b < 2; b++)
      for (int h = 0; h < NCHAN / 2; h++) begin
        @(negedge clk); rd_addr = 5'({b[0], 4'(h)});
        @(negedge clk);
        checks++;
        if (rd_data != (b ? spec2[s][2*h] : spec1[s][2*h])) begin
          failures++;
          if (failures < 5) $display("capture mismatch b=%0d k=%0d", b, 2*h);
        end
      end
  endtask

  initial begin
    for (int s = 0; s < 5; s++)
      for (int k = 0; k < NCHAN; k++) begin
        spec1[s][k] = {$urandom, $urandom};
        spec2[s][k] = {$urandom, $urandom};
      end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++; if (busy || done) failures++;
    run_spectrum(0, 1);         // armed in the middle of spectrum 0
    checks++; if (!busy || done) begin failures++; $display("not busy after arm"); end
    run_spectrum(1, 0);         // captured
    checks++; if (busy || !done) begin failures++; $display("not done"); end
    run_spectrum(2, 0);         // ignored
    check_ram(1);
    run_spectrum(3, 1);         // re-armed
    run_spectrum(4, 0);         // captured
    checks++; if (!done) begin failures++; $display("not done 2"); end
    check_ram(4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
