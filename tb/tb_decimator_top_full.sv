// tb_decimator_top_full: the decimation chain at its default configuration
// (pipelined CIC, all default parameters) running an audio workload: a
// dithered 1 kHz tone of amplitude 13 (of the 5-bit input's +-16) sampled at
// 6.144 MHz for 5 ms, which yields 240 PCM words at 48 kHz.
//
// Every CIC and PCM word is compared bit-exactly with the reference model, the
// PCM rate (one word per 128 inputs) and the 7-clock latency are checked, and
// a least-squares fit of a 1 kHz sine to the settled PCM words (4 whole
// periods) must give an amplitude within 1% of 13 * 2^20, the input amplitude
// times the CIC gain 16^5 at unity pass-band gain of the FIR stages. The
// residual after the fit is reported as a signal-to-noise figure.
module tb_decimator_top_full;
  import decim_pkg::*;
  import decim_ref_pkg::*;

  localparam int  NIN = 128 * 240;
  localparam int  LAT = 7;
  localparam real PI  = 3.14159265358979;
  localparam real AMP = 13.0;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, sd_valid = 0;
  logic [4:0] sd_data = '0;
  logic                 cic_valid, pcm_valid;
  logic signed [24:0]   cic_data, pcm_data;
  logic [2:0]           sat;

  decimator_top dut (.clk, .rst_n, .sd_valid, .sd_data, .cic_valid, .cic_data,
                     .pcm_valid, .pcm_data, .sat);

  always #5 clk = ~clk;

  lq_t    xs, cic_ref, pcm_ref;
  longint acc_edge [NIN];
  longint cyc = 0;
  int     nin = 0, ncic = 0, npcm = 0;
  real    pcm [$];

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (NIN * 2 + 2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n) begin
    if (cic_valid) begin
      checks++;
      if (ncic >= cic_ref.size() || cic_data != 25'(cic_ref[ncic])) begin
        failures++;
        if (failures < 10) $display("FAIL cic out %0d got %0d", ncic, cic_data);
      end
      ncic++;
    end
    if (pcm_valid) begin
      int n;
      n = 128 * npcm + 127;
      checks += 2;
      if (npcm >= pcm_ref.size() || pcm_data != 25'(pcm_ref[npcm])) begin
        failures++;
        if (failures < 10) $display("FAIL pcm out %0d got %0d", npcm, pcm_data);
      end
      if (n >= nin || cyc - acc_edge[n] != LAT) begin
        failures++;
        $display("FAIL pcm out %0d latency", npcm);
      end
      pcm.push_back(real'(pcm_data));
      npcm++;
    end
    checks++;
    if (sat != 3'b000) begin failures++; $display("FAIL unexpected saturation"); end
  end

  initial begin
    lq_t s1, s2;
    int  ns;
    real sc, ss, a, b, amp, res, sig;
    for (int n = 0; n < NIN; n++) begin
      real v;
      v = AMP * $sin(2.0 * PI * 1.0e3 * real'(n) / 6.144e6)
          + (real'($urandom_range(1000)) / 1000.0 - 0.5);
      xs.push_back(longint'($rtoi(v >= 0.0 ? v + 0.5 : v - 0.5)));
    end
    cic_ref = cic_full(xs);
    s1 = fir_dec2(cic_ref, hb1_taps(), ns);
    s2 = fir_dec2(s1, droop_taps(), ns);
    pcm_ref = fir_dec2(s2, hb2_taps(), ns);

    repeat (3) @(negedge clk);
    rst_n = 1;
    while (nin < NIN) begin
      @(negedge clk);
      sd_valid = 1;
      sd_data  = 5'(xs[nin]);
      acc_edge[nin] = cyc + 1;
      nin++;
    end
    @(negedge clk) sd_valid = 0;
    repeat (20) @(negedge clk);

    checks++;
    if (npcm != NIN / 128) begin failures++; $display("FAIL %0d PCM outputs", npcm); end

    // least-squares fit over PCM words 48..239 (four 48-sample periods)
    sc = 0.0; ss = 0.0;
    for (int k = 48; k < 240 && k < pcm.size(); k++) begin
      sc += pcm[k] * $cos(2.0 * PI * real'(k) / 48.0);
      ss += pcm[k] * $sin(2.0 * PI * real'(k) / 48.0);
    end
    a = sc * 2.0 / 192.0; b = ss * 2.0 / 192.0;
    amp = $sqrt(a * a + b * b);
    res = 0.0;
    for (int k = 48; k < 240 && k < pcm.size(); k++) begin
      real e;
      e = pcm[k] - a * $cos(2.0 * PI * real'(k) / 48.0) - b * $sin(2.0 * PI * real'(k) / 48.0);
      res += e * e;
    end
    sig = amp * amp / 2.0;
    $display("1 kHz tone: amplitude %f of expected %f, SNR %f dB", amp, AMP * 1048576.0,
             10.0 * $log10(sig / (res / 192.0)));
    checks++;
    if (amp < 0.99 * AMP * 1048576.0 || amp > 1.01 * AMP * 1048576.0) begin
      failures++; $display("FAIL tone amplitude");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
