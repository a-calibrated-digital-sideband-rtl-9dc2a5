// tb_vector_accumulator: streams spectra of random power values into the
// accumulator (NCHAN = 16, channels in a shuffled but fixed order, gaps
// between samples) and keeps its own per-channel sums.
// Checks: every dumped word equals the sum of the acc_len spectra of the
// integration before it; nothing is dumped before the first integration has
// finished; acc_len changes take effect at the next integration; the dump
// interval is acc_len spectra; dump_count counts the dumps.
module tb_vector_accumulator;
  import dsbs_pkg::*;
  localparam int NCHAN = 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [31:0] acc_len = 3;
  logic in_valid = 0, in_sync = 0, out_valid, out_sync;
  logic [3:0] in_chan = 0, out_chan;
  logic [PWR_W-1:0] in_data = 0;
  logic [ACC_W-1:0] out_data;
  logic [31:0] dump_count;
  int checks = 0, failures = 0;

  vector_accumulator #(.NCHAN(NCHAN)) dut (.*);

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint unsigned run_sum [NCHAN];   // integration in progress
  longint unsigned done_sum[NCHAN];   // last finished integration
  bit have_done = 0;
  int order[NCHAN];
  int n_dumps = 0, words = 0;
  int last_dump_spec = -1;
  int spec_no = 0;
  int exp_interval[$];

  always @(negedge clk) if (rst_n && out_valid) begin
    checks++;
    words++;
    if (!have_done || out_data != done_sum[out_chan]) begin
      failures++;
      if (failures < 5) $display("dump mismatch ch=%0d got %0d exp %0d", out_chan, out_data, done_sum[out_chan]);
    end
  end

  initial begin
    int lens[6];
    lens = '{3, 3, 1, 5, 2, 2};
    for (int k = 0; k < NCHAN; k++) order[k] = (k * 7) % NCHAN;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int integ = 0; integ < 6; integ++) begin
      acc_len = lens[integ];
      for (int s = 0; s < lens[integ]; s++) begin
        for (int k = 0; k < NCHAN; k++) begin
          int ch;
          longint unsigned p;
          ch = order[k];
          p = {$urandom, $urandom} >> (64 - PWR_W);
          @(negedge clk);
          // first spectrum of an integration: the previous one is dumped now
          if (s == 0 && k == 0 && integ > 0) begin
            done_sum = run_sum;
            have_done = 1;
          end
          if (s == 0) run_sum[ch] = p; else run_sum[ch] += p;
          in_valid = 1; in_sync = (k == 0); in_chan = 4'(ch); in_data = p;
          if ($urandom_range(0, 3) == 0) begin @(negedge clk); in_valid = 0; in_sync = 0; end
        end
      end
      // before the next integration, check the count of words dumped so far
      @(negedge clk); in_valid = 0; in_sync = 0;
      @(negedge clk);
      checks++;
      if (words != (integ == 0 ? 0 : integ * NCHAN) || dump_count != 32'(integ)) begin
        failures++;
        $display("after integration %0d: words=%0d dumps=%0d", integ, words, dump_count);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
