// tb_droop_fir: self-checking test of the order-8 droop correction filter with
// 2:1 decimation.
//
// The reference mirrors the five listed coefficients into the nine-tap
// symmetric vector, checks that it sums to 1.0 (unity DC gain), and computes
// the direct-form convolution y[n] = sum_i h[i] x[n-i] for n = 1, 3, 5, ...,
// rounded half up and saturated to 25 bits. It further checks the purpose of
// the filter: the gain at 20 kHz (input rate 192 kHz) must exceed the DC
// gain, lifting the band edge against the CIC filter's droop. The stimulus is
// random full-range words with random strobe gaps plus two blocks that must
// saturate the output high and low. Each output must appear on the clock edge
// after the one that takes the second sample of its input pair.
module tb_droop_fir;
  import decim_pkg::*;
  localparam int NIN = 1200;
  localparam int DWD = 25;
  localparam longint MAXV = (64'sd1 <<< (DWD - 1)) - 1;
  localparam longint MINV = -(64'sd1 <<< (DWD - 1));

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, in_valid = 0;
  logic signed [DWD-1:0] x = '0;
  logic                  out_valid, sat;
  logic signed [DWD-1:0] y;

  droop_fir dut (.clk, .rst_n, .in_valid, .x, .out_valid, .y, .sat);

  always #5 clk = ~clk;

  longint h [9];
  longint xs [NIN];
  longint acc_edge [NIN];
  longint cyc = 0;
  int     nin = 0, nout = 0, sat_hi = 0, sat_lo = 0;

  always @(posedge clk) cyc <= cyc + 1;

  function automatic longint fir(input int n, output bit s);
    longint a = 0, r;
    for (int i = 0; i < 9; i++) if (n - i >= 0) a += h[i] * xs[n-i];
    r = (a + (64'sd1 <<< 16)) >>> 17;
    s = 0;
    if (r > MAXV) begin r = MAXV; s = 1; end
    if (r < MINV) begin r = MINV; s = 1; end
    return r;
  endfunction

  initial begin
    repeat (NIN * 4 + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    longint e;
    bit     s;
    int     n;
    n = 2 * nout + 1;
    e = fir(n, s);
    checks += 3;
    if (y != DWD'(e)) begin failures++; if (failures < 10) $display("FAIL out %0d got %0d exp %0d", nout, y, e); end
    if (sat != s)     begin failures++; $display("FAIL sat flag out %0d", nout); end
    if (cyc - acc_edge[n] != 1) begin failures++; $display("FAIL timing out %0d", nout); end
    if (s && e > 0) sat_hi++;
    if (s && e < 0) sat_lo++;
    nout++;
  end

  initial begin
    longint sum;
    real    g20;
    for (int k = 0; k < 5; k++) begin h[k] = DROOP_COEF[k]; h[8-k] = DROOP_COEF[k]; end
    sum = 0; foreach (h[i]) sum += h[i];
    checks++;
    if (sum != (64'sd1 <<< 17)) begin failures++; $display("FAIL DC gain %0d", sum); end
    g20 = 0.0;
    foreach (h[i]) g20 += real'(h[i]) * $cos(2.0 * 3.14159265358979 * 20.0e3 / 192.0e3 * real'(i - 4));
    checks++;
    if (!(g20 > real'(sum) * 1.0005)) begin failures++; $display("FAIL no pass-band lift: %f", g20 / real'(sum)); end
    $display("gain at 20 kHz relative to DC: %f", g20 / real'(sum));

    for (int i = 0; i < NIN; i++)
      xs[i] = longint'(signed'(DWD'($urandom)));
    for (int i = 0; i <= 8; i++) begin
      xs[401 - i] = (h[i] >= 0) ? MAXV : MINV;
      xs[801 - i] = (h[i] >= 0) ? MINV : MAXV;
    end

    repeat (3) @(negedge clk);
    rst_n = 1;
    while (nin < NIN) begin
      @(negedge clk);
      if ($urandom_range(2) == 0) in_valid = 0;
      else begin
        in_valid = 1;
        x = DWD'(xs[nin]);
        acc_edge[nin] = cyc + 1;
        nin++;
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (5) @(negedge clk);
    checks += 2;
    if (nout != NIN / 2) begin failures++; $display("FAIL output count %0d", nout); end
    if (sat_hi == 0 || sat_lo == 0) begin failures++; $display("FAIL saturation not reached"); end
    $display("outputs %0d, saturations high %0d low %0d", nout, sat_hi, sat_lo);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
