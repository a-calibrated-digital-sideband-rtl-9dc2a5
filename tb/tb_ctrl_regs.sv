// tb_ctrl_regs: bus-level test of the register file. Checks the reset
// values, write/read-back of ACC_LEN, FFT_SHIFT and COEF_RE, that a write
// to the coefficient window produces exactly one cw_en pulse with the staged
// real part, the selected constant and channel, that CAL_CTRL bit 0 gives a
// one-clock arm pulse, that status and dump count read back, and that a
// capture-window read drives cap_addr and returns the sign-extended part
// one clock later.
module tb_ctrl_regs;
  import dsbs_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic wr_en = 0, rd_en = 0, rd_valid;
  logic [15:0] wr_addr = 0, rd_addr = 0;
  logic [31:0] wr_data = 0, rd_data, acc_len, dump_count = 0;
  logic [11:0] fft_shift;
  logic cw_en, cal_arm, cal_busy = 0, cal_done = 0;
  logic [1:0] cw_sel;
  logic [10:0] cw_chan, cap_addr;
  cal_t cw_data;
  cplx_t cap_data = '0;
  int checks = 0, failures = 0;
  int cw_pulses = 0, arm_pulses = 0;

  ctrl_regs dut (.*);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n && cw_en) cw_pulses++;
    if (rst_n && cal_arm) arm_pulses++;
  end

  task automatic wr(input logic [15:0] a, input logic [31:0] d);
    @(negedge clk); wr_en = 1; wr_addr = a; wr_data = d;
    @(negedge clk); wr_en = 0;
  endtask

  task automatic rd_check(input logic [15:0] a, input logic [31:0] exp_d);
    @(negedge clk); rd_en = 1; rd_addr = a;
    @(negedge clk); rd_en = 0;
    checks++;
    if (!rd_valid || rd_data != exp_d) begin
      failures++;
      $display("read %h: got %h exp %h (valid %b)", a, rd_data, exp_d, rd_valid);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    rd_check(16'h0000, 32'd1024);
    rd_check(16'h0001, 32'hFFF);
    wr(16'h0000, 32'd37);
    checks++; if (acc_len != 37) begin failures++; $display("acc_len"); end
    rd_check(16'h0000, 32'd37);
    wr(16'h0001, 32'h0F0F);
    checks++; if (fft_shift != 12'hF0F) begin failures++; $display("shift"); end
    rd_check(16'h0001, 32'h0F0F);
    // coefficient writes
    for (int n = 0; n < 50; n++) begin
      logic [17:0] re, im;
      int sel, ch;
      re = 18'($urandom); im = 18'($urandom);
      sel = $urandom_range(0, 3); ch = $urandom_range(0, 2047);
      wr(16'h0002, 32'(re));
      rd_check(16'h0002, 32'(signed'(re)));
      @(negedge clk); wr_en = 1; wr_addr = 16'h2000 | 16'(sel << 11) | 16'(ch); wr_data = 32'(im);
      @(posedge clk); #1; wr_en = 0;
      checks++;
      if (!cw_en || cw_sel != 2'(sel) || cw_chan != 11'(ch) || cw_data.re != re || cw_data.im != im) begin
        failures++;
        if (failures < 5) $display("coef write %0d: en=%b sel=%0d ch=%0d", n, cw_en, cw_sel, cw_chan);
      end
    end
    repeat (2) @(negedge clk);
    checks++; if (cw_pulses != 50) begin failures++; $display("cw pulses %0d", cw_pulses); end
    // calibration arm pulse and status
    wr(16'h0003, 32'd1);
    @(negedge clk);
    checks++; if (arm_pulses != 1) begin failures++; $display("arm pulses %0d", arm_pulses); end
    cal_busy = 1; cal_done = 0;
    rd_check(16'h0003, 32'd2);
    cal_busy = 0; cal_done = 1;
    rd_check(16'h0003, 32'd1);
    dump_count = 32'd12345;
    rd_check(16'h0004, 32'd12345);
    // capture window
    for (int n = 0; n < 20; n++) begin
      int b, h, part;
      logic [17:0] re, im;
      b = $urandom_range(0, 1); h = $urandom_range(0, 1023); part = $urandom_range(0, 1);
      re = 18'($urandom); im = 18'($urandom);
      @(negedge clk); rd_en = 1; rd_addr = 16'h4000 | 16'(b << 11) | 16'(h << 1) | 16'(part);
      #1;
      checks++;
      if (cap_addr != 11'({b[0], 10'(h)})) begin failures++; $display("cap_addr"); end
      @(posedge clk); #1; rd_en = 0;
      cap_data.re = re; cap_data.im = im;
      #1;
      checks++;
      if (!rd_valid || rd_data != (part ? 32'(signed'(im)) : 32'(signed'(re)))) begin
        failures++; $display("capture read %0d", n);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
