// tb_decimator_snr: signal-to-noise workload for the decimation chain at its
// default configuration. A behavioural third-order sigma-delta modulator
// (5-bit quantiser, noise transfer function (1 - z^-1)^3) turns a 1 kHz sine
// of amplitude 10 quantiser steps into a 6.144 MHz noise-shaped stream; the
// chain decimates it to 48 kHz.
//
// After 64 settling words the test fits a 1 kHz sine plus DC to 480 PCM words
// (ten whole periods, so the fit is exact for the tone) and reports the power
// of the remainder against the tone power as the SNR over 0..24 kHz. It also
// compares every PCM word bit-exactly with the reference model fed the same
// modulator stream, checks the tone amplitude (10 * 2^20 within 0.5%), that
// the modulator never clipped, and that the SNR is at least 120 dB: far above
// the 32 dB a bare 5-bit quantiser gives, so both the noise shaping and the
// chain's rejection of the shaped noise must work. A second chain with the
// pruned-width CIC runs on the same stream; its words are checked against the
// pruned reference model and its SNR is reported for comparison (its 16-bit
// CIC word and truncation noise put it far below the pipelined chain).
module tb_decimator_snr;
  import decim_pkg::*;
  import decim_ref_pkg::*;

  localparam int  NSETTLE = 64;
  localparam int  NFIT    = 480;
  localparam int  NPCM    = NSETTLE + NFIT;
  localparam int  NIN     = 128 * NPCM;
  localparam real PI      = 3.14159265358979;
  localparam real AMP     = 10.0;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, en = 0;
  real  u = 0.0;
  logic sd_valid;
  logic [4:0] sd_data;
  int   clamps;
  logic                 cic_valid, pcm_valid;
  logic signed [24:0]   cic_data, pcm_data;
  logic [2:0]           sat;

  sd_modulator_model mod (.clk, .rst_n, .en, .u, .valid(sd_valid), .y(sd_data), .clamps);
  decimator_top dut (.clk, .rst_n, .sd_valid, .sd_data, .cic_valid, .cic_data,
                     .pcm_valid, .pcm_data, .sat);

  // the same chain with the pruned-width CIC, for comparison
  logic                 t_cic_valid, t_pcm_valid;
  logic signed [24:0]   t_cic_data, t_pcm_data;
  logic [2:0]           t_sat;
  decimator_top #(.CIC_MODE(CIC_TRUNCATED)) dut_t (.clk, .rst_n, .sd_valid, .sd_data,
    .cic_valid(t_cic_valid), .cic_data(t_cic_data), .pcm_valid(t_pcm_valid),
    .pcm_data(t_pcm_data), .sat(t_sat));

  always #5 clk = ~clk;

  lq_t xs, pcm_ref;
  real pcm [$], tpcm [$];
  int  nsat = 0;

  initial begin
    repeat (NIN + 5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n) begin
    if (sd_valid && xs.size() < NIN) xs.push_back(longint'(signed'(sd_data)));
    if (pcm_valid) pcm.push_back(real'(pcm_data));
    if (t_pcm_valid) tpcm.push_back(real'(t_pcm_data));
    if (sat != 3'b000) nsat++;
  end

  // SNR (dB) of a 1 kHz tone plus DC fitted over ten periods; amplitude out
  function automatic real snr_of(const ref real x [$], output real amp);
    real sc = 0.0, ss = 0.0, dc = 0.0, a, b, res = 0.0;
    for (int k = NSETTLE; k < NPCM; k++) begin
      sc += x[k] * $cos(2.0 * PI * real'(k) / 48.0);
      ss += x[k] * $sin(2.0 * PI * real'(k) / 48.0);
      dc += x[k];
    end
    a = sc * 2.0 / NFIT; b = ss * 2.0 / NFIT; dc = dc / NFIT;
    amp = $sqrt(a * a + b * b);
    for (int k = NSETTLE; k < NPCM; k++) begin
      real e;
      e = x[k] - dc - a * $cos(2.0 * PI * real'(k) / 48.0) - b * $sin(2.0 * PI * real'(k) / 48.0);
      res += e * e;
    end
    res = res / NFIT;
    return 10.0 * $log10((amp * amp / 2.0) / res);
  endfunction

  initial begin
    lq_t s1, s2, c;
    int  ns;
    real amp, snr, tamp, tsnr;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < NIN; n++) begin
      en = 1;
      u  = AMP * $sin(2.0 * PI * 1.0e3 * real'(n) / 6.144e6);
      @(negedge clk);
    end
    en = 0;
    repeat (30) @(negedge clk);

    checks++;
    if (pcm.size() != NPCM) begin failures++; $display("FAIL %0d PCM words", pcm.size()); end
    // bit-exact comparison with the reference model on the recorded stream
    c = cic_full(xs);
    s1 = fir_dec2(c, hb1_taps(), ns);
    s2 = fir_dec2(s1, droop_taps(), ns);
    pcm_ref = fir_dec2(s2, hb2_taps(), ns);
    for (int k = 0; k < pcm.size() && k < pcm_ref.size(); k++) begin
      checks++;
      if (longint'(pcm[k]) != pcm_ref[k]) begin
        failures++;
        if (failures < 10) $display("FAIL pcm %0d got %0d exp %0d", k, longint'(pcm[k]), pcm_ref[k]);
      end
    end
    // the same for the pruned-CIC chain
    checks++;
    if (tpcm.size() != NPCM) begin failures++; $display("FAIL %0d PCM words (pruned CIC)", tpcm.size()); end
    c = cic_pruned(xs, ns);
    s1 = fir_dec2(c, hb1_taps(), ns);
    s2 = fir_dec2(s1, droop_taps(), ns);
    pcm_ref = fir_dec2(s2, hb2_taps(), ns);
    for (int k = 0; k < tpcm.size() && k < pcm_ref.size(); k++) begin
      checks++;
      if (longint'(tpcm[k]) != pcm_ref[k]) begin
        failures++;
        if (failures < 10) $display("FAIL pruned pcm %0d got %0d exp %0d", k, longint'(tpcm[k]), pcm_ref[k]);
      end
    end
    snr = snr_of(pcm, amp);
    tsnr = snr_of(tpcm, tamp);
    $display("pipelined CIC: tone amplitude %f (expected %f), SNR %f dB; modulator clips %0d",
             amp, AMP * 1048576.0, snr, clamps);
    $display("pruned CIC:    tone amplitude %f, SNR %f dB", tamp, tsnr);
    checks += 4;
    if (amp < 0.995 * AMP * 1048576.0 || amp > 1.005 * AMP * 1048576.0) begin
      failures++; $display("FAIL tone amplitude");
    end
    if (snr < 120.0) begin failures++; $display("FAIL SNR below 120 dB"); end
    checks++;
    if (tamp < 0.99 * AMP * 1048576.0 || tamp > 1.01 * AMP * 1048576.0) begin
      failures++; $display("FAIL tone amplitude (pruned CIC)");
    end
    if (clamps != 0) begin failures++; $display("FAIL modulator clipped"); end
    if (nsat != 0)   begin failures++; $display("FAIL chain saturated"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
