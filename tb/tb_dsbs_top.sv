// tb_dsbs_top: end-to-end test of the sideband separating spectrometer at
// its default size (4096-point filter banks, 2048 channels per sideband,
// 4 taps, 64-bit accumulators). The testbench plays both the analog front
// end and the host computer.
//
// Front end model: a lower-sideband tone in channel KA and an upper-sideband
// tone in channel KB. Branch 1 gets A*cos for both; branch 2 gets
// G*A*sin(.+phi) for the LSB tone and -G*A*sin(.+phi) for the USB tone, so
// G and phi are the amplitude and phase imbalance of the second branch.
// Tones sit on channel centres so every frame is identical and the
// spectra are exactly periodic.
//
// Phases:
//  A  balanced front end (G = 1, phi = 0), power-up ideal hybrid
//     (C1 = C4 = 1, C2 = C3 = j), ACC_LEN = 2: each tone must land in its own
//     sideband with more than 40 dB of rejection.
//  B  imbalanced front end (G = 0.8, phi = 12 deg): the ideal hybrid only
//     reaches about 16 dB. The host arms the calibration capture, reads the
//     two branches at KA and KB back, checks them against the imbalance it
//     applied, and checks the next full dump bit-exactly for all even
//     channels against |C*X1 + C*X2|^2 * ACC_LEN computed from the captured
//     values.
//  C  the host computes C3 = -X2/X1 (LSB tone) and C2 = -X1/X2 (USB tone),
//     writes them to every channel while data flows, sets ACC_LEN = 3 and
//     expects the rejection back above 40 dB, the dump period to become
//     3*4096 clocks and the dumps to be bit-exact again.
// Mechanisms counted (each must happen): integration dumps, acc_len
// changes, coefficient writes, calibration captures, register reads.
module tb_dsbs_top;
  import dsbs_pkg::*;
  localparam int N = 4096;
  localparam int NCH = N / 2;
  localparam int KA = 300;
  localparam int KB = 700;
  localparam real PI = 3.14159265358979;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic adc_valid = 0;
  logic signed [7:0] adc0 = 0, adc1 = 0;
  logic wr_en = 0, rd_en = 0, rd_valid;
  logic [15:0] wr_addr = 0, rd_addr = 0;
  logic [31:0] wr_data = 0, rd_data;
  logic spec_valid, spec_sync;
  logic [10:0] spec_chan;
  logic [63:0] spec_lsb, spec_usb;
  int checks = 0, failures = 0;

  dsbs_top dut (.*);

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- front end model ----------------
  real gain = 1.0, phi = 0.0, amp = 60.0;
  int  n_samp = 0;
  function automatic logic signed [7:0] q8(real v);
    return 8'($rtoi(v + 1000.5) - 1000);
  endfunction
  always @(negedge clk) if (rst_n) begin
    real ta, tb;
    ta = 2.0 * PI * real'(KA) * real'(n_samp % N) / real'(N);
    tb = 2.0 * PI * real'(KB) * real'(n_samp % N) / real'(N);
    adc_valid = 1;
    adc0 = q8(amp * $cos(ta) + amp * $cos(tb));
    adc1 = q8(gain * amp * ($sin(ta + phi) - $sin(tb + phi)));
    n_samp++;
  end

  // ---------------- spectrum collector ----------------
  logic [63:0] cur_l [NCH], cur_u [NCH];
  logic [63:0] last_l[NCH], last_u[NCH];
  int words = 0, n_dumps = 0, cyc = 0;
  int sync_cyc[$];
  always @(posedge clk) begin
    cyc++;
    if (rst_n && spec_valid) begin
      if (spec_sync) begin words = 0; sync_cyc.push_back(cyc); end
      cur_l[spec_chan] = spec_lsb;
      cur_u[spec_chan] = spec_usb;
      words++;
      if (words == NCH) begin
        last_l = cur_l; last_u = cur_u;
        n_dumps++;
      end
    end
  end

  // ---------------- host ----------------
  int n_reads = 0, n_coef_writes = 0, n_len_changes = 0, n_captures = 0;

  task automatic bus_wr(input logic [15:0] a, input logic [31:0] d);
    @(negedge clk); wr_en = 1; wr_addr = a; wr_data = d;
    @(negedge clk); wr_en = 0;
    if (a == 16'h0000) n_len_changes++;
    if (a[15:13] == 3'b001) n_coef_writes++;
  endtask

  task automatic bus_rd(input logic [15:0] a, output logic [31:0] d);
    @(negedge clk); rd_en = 1; rd_addr = a;
    @(negedge clk); rd_en = 0;
    d = rd_data;
    n_reads++;
    if (!rd_valid) begin failures++; $display("read without rd_valid"); end
  endtask

  task automatic wait_dumps(int k);
    int target;
    target = n_dumps + k;
    while (n_dumps < target) @(posedge clk);
  endtask

  function automatic real srr_db(logic [63:0] want, logic [63:0] other);
    return 10.0 * $log10((real'(want) + 1.0) / (real'(other) + 1.0));
  endfunction

  // captured branch values, per even channel
  longint signed x1r[NCH/2], x1i[NCH/2], x2r[NCH/2], x2i[NCH/2];
  task automatic capture();
    logic [31:0] d;
    bus_wr(16'h0003, 32'd1);
    do bus_rd(16'h0003, d); while (d[0] != 1'b1);
    n_captures++;
    for (int h = 0; h < NCH / 2; h++) begin
      bus_rd(16'h4000 | 16'(h << 1),              d); x1r[h] = longint'(signed'(d));
      bus_rd(16'h4000 | 16'(h << 1) | 16'h0001,   d); x1i[h] = longint'(signed'(d));
      bus_rd(16'h4800 | 16'(h << 1),              d); x2r[h] = longint'(signed'(d));
      bus_rd(16'h4800 | 16'(h << 1) | 16'h0001,   d); x2i[h] = longint'(signed'(d));
    end
  endtask

  // host copy of the constants (raw Q2.16), uniform over channels here
  longint signed cr[4] = '{65536, 0, 0, 65536};
  longint signed ci[4] = '{0, 65536, 65536, 0};

  function automatic longint signed rsat(longint signed v);
    longint signed r;
    r = (v + 32768) >>> 16;
    if (r > 1048575) r = 1048575;
    if (r < -1048576) r = -1048576;
    return r;
  endfunction

  task automatic check_exact(int acc_len, string tag);
    int bad = 0;
    for (int h = 0; h < NCH / 2; h++) begin
      longint signed lr, li, ur, ui;
      longint unsigned pl, pu;
      lr = rsat(cr[0]*x1r[h] - ci[0]*x1i[h] + cr[1]*x2r[h] - ci[1]*x2i[h]);
      li = rsat(cr[0]*x1i[h] + ci[0]*x1r[h] + cr[1]*x2i[h] + ci[1]*x2r[h]);
      ur = rsat(cr[2]*x1r[h] - ci[2]*x1i[h] + cr[3]*x2r[h] - ci[3]*x2i[h]);
      ui = rsat(cr[2]*x1i[h] + ci[2]*x1r[h] + cr[3]*x2i[h] + ci[3]*x2r[h]);
      pl = longint'(lr*lr + li*li) * longint'(acc_len);
      pu = longint'(ur*ur + ui*ui) * longint'(acc_len);
      checks++;
      if (last_l[2*h] != pl || last_u[2*h] != pu) begin
        bad++; failures++;
        if (bad < 4) $display("%s: channel %0d got %0d/%0d expected %0d/%0d", tag, 2*h, last_l[2*h], last_u[2*h], pl, pu);
      end
    end
    $display("%s: %0d even channels compared, %0d differ", tag, NCH / 2, bad);
  endtask

  initial begin
    logic [31:0] d;
    real srr_a, srr_b, srr_c;
    repeat (3) @(posedge clk);
    rst_n = 1;
    bus_rd(16'h0000, d);
    checks++; if (d != 32'd1024) begin failures++; $display("ACC_LEN reset %0d", d); end
    bus_wr(16'h0000, 32'd2);

    // ---- phase A: balanced, ideal hybrid ----
    wait_dumps(3);
    checks++;
    srr_a = srr_db(last_l[KA], last_u[KA]);
    srr_b = srr_db(last_u[KB], last_l[KB]);
    $display("phase A: SRR LSB tone %f dB, USB tone %f dB", srr_a, srr_b);
    if (srr_a < 40.0 || srr_b < 40.0) failures++;
    checks++;
    if (sync_cyc[$] - sync_cyc[$-1] != 2 * N) begin failures++; $display("dump period %0d", sync_cyc[$] - sync_cyc[$-1]); end

    // ---- phase B: imbalanced front end ----
    @(negedge clk);
    gain = 0.8; phi = 12.0 * PI / 180.0;
    repeat (6 * N) @(posedge clk);
    wait_dumps(1);
    srr_a = srr_db(last_l[KA], last_u[KA]);
    srr_b = srr_db(last_u[KB], last_l[KB]);
    $display("phase B (uncalibrated): SRR LSB tone %f dB, USB tone %f dB", srr_a, srr_b);
    checks++;
    if (srr_a > 25.0 || srr_b > 25.0 || srr_a < 10.0 || srr_b < 10.0) begin failures++; $display("unexpected uncalibrated SRR"); end
    capture();
    begin
      real ar, ai, br, bi, den, rlr, rli, rur, rui, er, ei;
      // LSB tone ratio X2/X1 at KA
      ar = real'(x1r[KA/2]); ai = real'(x1i[KA/2]); br = real'(x2r[KA/2]); bi = real'(x2i[KA/2]);
      den = ar*ar + ai*ai;
      rlr = (br*ar + bi*ai) / den; rli = (bi*ar - br*ai) / den;
      // expected -j*G*exp(j*phi)
      er = gain * $sin(phi); ei = -gain * $cos(phi);
      checks++;
      if ((rlr-er)*(rlr-er) + (rli-ei)*(rli-ei) > 1.0e-4) begin failures++; $display("capture ratio at KA %f,%f expected %f,%f", rlr, rli, er, ei); end
      ar = real'(x1r[KB/2]); ai = real'(x1i[KB/2]); br = real'(x2r[KB/2]); bi = real'(x2i[KB/2]);
      den = ar*ar + ai*ai;
      rur = (br*ar + bi*ai) / den; rui = (bi*ar - br*ai) / den;
      er = -gain * $sin(phi); ei = gain * $cos(phi);
      checks++;
      if ((rur-er)*(rur-er) + (rui-ei)*(rui-ei) > 1.0e-4) begin failures++; $display("capture ratio at KB %f,%f expected %f,%f", rur, rui, er, ei); end
      wait_dumps(2);
      check_exact(2, "phase B exact");

      // ---- phase C: calibrate ----
      // C3 = -rL ; C2 = -1/rU
      cr[2] = longint'($rtoi(-rlr * 65536.0 + (rlr < 0.0 ? 0.5 : -0.5)));
      ci[2] = longint'($rtoi(-rli * 65536.0 + (rli < 0.0 ? 0.5 : -0.5)));
      den = rur*rur + rui*rui;
      er = -rur / den; ei = rui / den;
      cr[1] = longint'($rtoi(er * 65536.0 + (er < 0.0 ? -0.5 : 0.5)));
      ci[1] = longint'($rtoi(ei * 65536.0 + (ei < 0.0 ? -0.5 : 0.5)));
    end
    for (int k = 0; k < NCH; k++) begin
      bus_wr(16'h0002, 32'(cr[1]));
      bus_wr(16'h2800 | 16'(k), 32'(ci[1]));   // C2
      bus_wr(16'h0002, 32'(cr[2]));
      bus_wr(16'h3000 | 16'(k), 32'(ci[2]));   // C3
    end
    bus_wr(16'h0000, 32'd3);
    wait_dumps(3);
    srr_a = srr_db(last_l[KA], last_u[KA]);
    srr_b = srr_db(last_u[KB], last_l[KB]);
    $display("phase C (calibrated): SRR LSB tone %f dB, USB tone %f dB", srr_a, srr_b);
    checks++;
    if (srr_a < 40.0 || srr_b < 40.0) failures++;
    checks++;
    if (sync_cyc[$] - sync_cyc[$-1] != 3 * N) begin failures++; $display("dump period %0d", sync_cyc[$] - sync_cyc[$-1]); end
    check_exact(3, "phase C exact");
    bus_rd(16'h0004, d);
    checks++; if (d != 32'(n_dumps)) begin failures++; $display("DUMP_COUNT %0d vs %0d", d, n_dumps); end

    $display("mechanisms: dumps=%0d acc_len_changes=%0d coef_writes=%0d captures=%0d reads=%0d",
             n_dumps, n_len_changes, n_coef_writes, n_captures, n_reads);
    checks++; if (n_dumps == 0) failures++;
    checks++; if (n_len_changes == 0) failures++;
    checks++; if (n_coef_writes == 0) failures++;
    checks++; if (n_captures == 0) failures++;
    checks++; if (n_reads == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
