// tb_power_detect: drives random complex values, including the extreme
// corners of the range, and checks re^2 + im^2 one clock later, together
// with the channel tag and the sync flag.
module tb_power_detect;
  import dsbs_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid = 0, in_sync = 0, out_valid, out_sync;
  logic [10:0] in_chan = 0, out_chan;
  hyb_t in_data = '0;
  logic [PWR_W-1:0] out_power;
  int checks = 0, failures = 0;

  power_detect #(.NCHAN(2048)) dut (.*);

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint signed r, i;
    longint unsigned exp_p;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      in_valid = 1;
      in_sync  = (n % 7 == 0);
      in_chan  = 11'($urandom);
      case (n)
        0: begin in_data.re = -(21'sd1 <<< 20); in_data.im = -(21'sd1 <<< 20); end
        1: begin in_data.re = (21'sd1 <<< 20) - 1; in_data.im = -(21'sd1 <<< 20); end
        default: begin in_data.re = 21'($urandom); in_data.im = 21'($urandom); end
      endcase
      r = longint'(in_data.re); i = longint'(in_data.im);
      exp_p = longint'(r * r + i * i);
      @(posedge clk); #1;
      checks++;
      if (!out_valid || out_power != PWR_W'(exp_p) || out_chan != in_chan || out_sync != in_sync) begin
        failures++;
        if (failures < 5) $display("mismatch n=%0d got %0d exp %0d", n, out_power, exp_p);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
