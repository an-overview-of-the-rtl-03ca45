// tb_halfband_decim: self-checking test of the half-band 2:1 decimation filter
// in both of its uses: the second half-band filter (order 40, the module's
// default) and the first (order 4, coefficients {0.25, 0.5, 0.25}).
//
// The reference expands the coefficient list into the full tap vector
// (centre 0.5, zero at every even distance from the centre, listed values at
// odd distances, mirrored) and computes the direct-form convolution
// y[n] = sum_i h[i] x[n-i] for n = 1, 3, 5, ..., then rounds half up to the
// input scale and saturates to 25 bits. It also checks that each tap vector
// sums to exactly 1.0 (unity DC gain). The stimulus is random full-range
// 25-bit words with random strobe gaps, plus two input blocks whose signs
// follow the order-40 taps so that its output must saturate high and low.
// Each output must appear on the clock edge after the one that takes the
// second sample of its input pair.
module tb_halfband_decim;
  import decim_pkg::*;
  localparam int NIN = 1600;
  localparam int DWD = 25;
  localparam longint MAXV = (64'sd1 <<< (DWD - 1)) - 1;
  localparam longint MINV = -(64'sd1 <<< (DWD - 1));

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, in_valid = 0;
  logic signed [DWD-1:0] x = '0;
  logic                  v2, v1, sat2, sat1;
  logic signed [DWD-1:0] y2, y1;

  halfband_decim dut2 (.clk, .rst_n, .in_valid, .x, .out_valid(v2), .y(y2), .sat(sat2));
  halfband_decim #(.ORDER(4), .NODD(1), .COEF(HB1_COEF)) dut1 (
    .clk, .rst_n, .in_valid, .x, .out_valid(v1), .y(y1), .sat(sat1));

  always #5 clk = ~clk;

  longint h2 [41];
  longint h1 [5];
  longint xs [NIN];
  longint acc_edge [NIN];
  longint cyc = 0;
  int     nin = 0, n2 = 0, n1 = 0, sat_hi = 0, sat_lo = 0;

  always @(posedge clk) cyc <= cyc + 1;

  function automatic longint fir(ref longint h [], input int ntap, input int n, output bit s);
    longint a = 0, r;
    for (int i = 0; i < ntap; i++) if (n - i >= 0) a += h[i] * xs[n-i];
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

  always @(negedge clk) if (rst_n) begin
    longint e;
    bit     s;
    int     n;
    if (v2) begin
      longint hd [];
      hd = new[41];
      foreach (h2[i]) hd[i] = h2[i];
      n = 2 * n2 + 1;
      e = fir(hd, 41, n, s);
      checks += 3;
      if (y2 != DWD'(e)) begin failures++; if (failures < 10) $display("FAIL hb2 out %0d got %0d exp %0d", n2, y2, e); end
      if (sat2 != s)     begin failures++; $display("FAIL hb2 sat flag out %0d", n2); end
      if (cyc - acc_edge[n] != 1) begin failures++; $display("FAIL hb2 timing out %0d", n2); end
      if (s && e > 0) sat_hi++;
      if (s && e < 0) sat_lo++;
      n2++;
    end
    if (v1) begin
      longint hd [];
      hd = new[5];
      foreach (h1[i]) hd[i] = h1[i];
      n = 2 * n1 + 1;
      e = fir(hd, 5, n, s);
      checks += 2;
      if (y1 != DWD'(e)) begin failures++; if (failures < 10) $display("FAIL hb1 out %0d got %0d exp %0d", n1, y1, e); end
      if (cyc - acc_edge[n] != 1) begin failures++; $display("FAIL hb1 timing out %0d", n1); end
      n1++;
    end
  end

  initial begin
    longint sum2, sum1;
    foreach (h2[i]) h2[i] = 0;
    h2[20] = 64'sd1 <<< 16;
    for (int k = 0; k < 10; k++) begin
      h2[20 - (2*k+1)] = HB2_COEF[k];
      h2[20 + (2*k+1)] = HB2_COEF[k];
    end
    h1 = '{0, 32768, 65536, 32768, 0};
    sum2 = 0; foreach (h2[i]) sum2 += h2[i];
    sum1 = 0; foreach (h1[i]) sum1 += h1[i];
    checks += 2;
    if (sum2 != (64'sd1 <<< 17)) begin failures++; $display("FAIL hb2 DC gain %0d", sum2); end
    if (sum1 != (64'sd1 <<< 17)) begin failures++; $display("FAIL hb1 DC gain %0d", sum1); end

    for (int i = 0; i < NIN; i++)
      xs[i] = longint'(signed'(DWD'($urandom)));
    // blocks that drive the order-40 output to saturation, ending on odd n
    for (int i = 0; i <= 40; i++) begin
      xs[601 - i]  = (h2[i] >= 0) ? MAXV : MINV;
      xs[1201 - i] = (h2[i] >= 0) ? MINV : MAXV;
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
    if (n2 != NIN / 2 || n1 != NIN / 2) begin failures++; $display("FAIL output counts %0d %0d", n2, n1); end
    if (sat_hi == 0 || sat_lo == 0) begin failures++; $display("FAIL saturation not reached"); end
    $display("outputs %0d/%0d, saturations high %0d low %0d", n2, n1, sat_hi, sat_lo);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
