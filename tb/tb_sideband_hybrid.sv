// tb_sideband_hybrid: checks the calibrated hybrid against a reference
// computed in the testbench with 64-bit integers.
//  1. Power-up constants form the ideal hybrid (C1 = C4 = 1, C2 = C3 = j):
//     a pair X2 = -j*X1 must land in LSB only, X2 = +j*X1 in USB only.
//  2. Random constants are written to random channels, then random data is
//     streamed and every output is compared with C1*X1 + C2*X2 and
//     C3*X1 + C4*X2, rounded by 2^-CAL_FRAC. Latency must be two clocks.
module tb_sideband_hybrid;
  import dsbs_pkg::*;
  localparam int NCHAN = 64;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid = 0, in_sync = 0, cw_en = 0, out_valid, out_sync;
  logic [5:0] in_chan = 0, cw_chan = 0, out_chan;
  logic [1:0] cw_sel = 0;
  cplx_t x1 = '0, x2 = '0;
  cal_t cw_data = '0;
  hyb_t lsb, usb;
  int checks = 0, failures = 0;

  sideband_hybrid #(.NCHAN(NCHAN)) dut (.*);

  // Reference copy of the constants.
  longint signed cre [4][NCHAN];
  longint signed cim [4][NCHAN];

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint signed rnd(longint signed v);
    return (v + (64'sd1 <<< (CAL_FRAC - 1))) >>> CAL_FRAC;
  endfunction

  // expected outputs queue
  typedef struct { longint signed lr, li, ur, ui; int ch; bit sy; } exp_t;
  exp_t q[$];

  task automatic send(input int ch, input cplx_t a, input cplx_t b, input bit sy);
    exp_t e;
    longint signed ar, ai, br, bi;
    ar = a.re; ai = a.im; br = b.re; bi = b.im;
    e.lr = rnd(cre[0][ch]*ar - cim[0][ch]*ai + cre[1][ch]*br - cim[1][ch]*bi);
    e.li = rnd(cre[0][ch]*ai + cim[0][ch]*ar + cre[1][ch]*bi + cim[1][ch]*br);
    e.ur = rnd(cre[2][ch]*ar - cim[2][ch]*ai + cre[3][ch]*br - cim[3][ch]*bi);
    e.ui = rnd(cre[2][ch]*ai + cim[2][ch]*ar + cre[3][ch]*bi + cim[3][ch]*br);
    e.ch = ch; e.sy = sy;
    q.push_back(e);
    @(negedge clk);
    in_valid = 1; in_sync = sy; in_chan = 6'(ch); x1 = a; x2 = b;
  endtask

  // Output checker: compares each valid output with the oldest expectation
  // and checks that it left two register stages after its input (the input is
  // sampled on edge P, the result is visible after edge P+1).
  int sent_cycle[$];
  int cyc = 0;
  always @(posedge clk) begin
    cyc++;
    if (in_valid) sent_cycle.push_back(cyc);
  end
  always @(negedge clk) if (rst_n && out_valid) begin
    exp_t e;
    int sc;
    e = q.pop_front();
    sc = sent_cycle.pop_front();
    checks++;
    if (longint'(lsb.re) != e.lr || longint'(lsb.im) != e.li ||
        longint'(usb.re) != e.ur || longint'(usb.im) != e.ui ||
        int'(out_chan) != e.ch || out_sync != e.sy || cyc - sc != 1) begin
      failures++;
      if (failures < 5) $display("mismatch ch=%0d lsb=%0d,%0d exp %0d,%0d usb=%0d,%0d exp %0d,%0d lat=%0d",
        e.ch, lsb.re, lsb.im, e.lr, e.li, usb.re, usb.im, e.ur, e.ui, cyc - sc);
    end
  end

  initial begin
    cplx_t a, b;
    for (int k = 0; k < NCHAN; k++) begin
      cre[0][k] = 65536; cim[0][k] = 0;
      cre[1][k] = 0;     cim[1][k] = 65536;
      cre[2][k] = 0;     cim[2][k] = 65536;
      cre[3][k] = 65536; cim[3][k] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // 1. ideal hybrid, tone-like pairs
    for (int k = 0; k < NCHAN; k++) begin
      a.re = 18'($urandom_range(0, 60000)) - 18'sd30000; a.im = 18'($urandom_range(0, 60000)) - 18'sd30000;
      if (k % 2 == 0) begin b.re = a.im;  b.im = -a.re; end   // b = -j a
      else            begin b.re = -a.im; b.im = a.re;  end   // b = +j a
      send(k, a, b, k == 0);
    end
    @(negedge clk); in_valid = 0;
    repeat (4) @(negedge clk);
    // 2. random constants, written while data streams
    for (int n = 0; n < 400; n++) begin
      int ch;
      ch = $urandom_range(0, NCHAN - 1);
      if (n % 3 == 0) begin
        int sel, wch;
        cal_t c;
        sel = $urandom_range(0, 3);
        wch = $urandom_range(0, NCHAN - 1);
        c.re = 18'($urandom); c.im = 18'($urandom);
        @(negedge clk);
        in_valid = 0;
        cw_en = 1; cw_sel = 2'(sel); cw_chan = 6'(wch); cw_data = c;
        cre[sel][wch] = longint'(c.re); cim[sel][wch] = longint'(c.im);
        @(negedge clk);
        cw_en = 0;
      end
      a.re = 18'($urandom); a.im = 18'($urandom);
      b.re = 18'($urandom); b.im = 18'($urandom);
      if (n == 0) begin a.re = -(18'sd1 <<< 17); b.re = -(18'sd1 <<< 17); a.im = 0; b.im = 0; end
      send(ch, a, b, n % 50 == 0);
    end
    @(negedge clk); in_valid = 0;
    repeat (6) @(negedge clk);
    if (q.size() != 0) begin failures++; $display("%0d outputs missing", q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
