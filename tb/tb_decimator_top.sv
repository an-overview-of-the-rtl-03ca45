// tb_decimator_top: end-to-end test of the decimation chain in both CIC
// modes: one chain with the pipelined CIC (the default) and one with the
// pruned-width CIC, driven by the same 5-bit input stream.
//
// The stream imitates a multi-bit sigma-delta output: a dithered 3 kHz sine
// near full scale, then full-scale square-wave steps between -16 and +15
// whose overshoot in the FIR stages forces output saturation, with random
// one-cycle gaps in the input strobe. The reference model computes every
// stage's output stream from the input alone, and the test compares the CIC
// output and the 48 kHz PCM output of both chains sample by sample. It also
// checks one CIC output per 16 inputs, one PCM output per 128 inputs, the
// fixed 7-clock latency from the 128th input to its PCM word, and counts the
// mechanisms the chain must show: integrator wrap-around, input gaps, FIR
// saturation and both CIC modes; a mechanism that never occurred is a failure.
module tb_decimator_top;
  import decim_pkg::*;
  import decim_ref_pkg::*;

  localparam int NIN = 128 * 120;
  localparam int LAT = 7;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, sd_valid = 0;
  logic [4:0] sd_data = '0;

  logic                 cv [2], pv [2];
  logic signed [24:0]   cd [2], pd [2];
  logic [2:0]           st [2];

  decimator_top dut_p (.clk, .rst_n, .sd_valid, .sd_data,
    .cic_valid(cv[0]), .cic_data(cd[0]), .pcm_valid(pv[0]), .pcm_data(pd[0]), .sat(st[0]));
  decimator_top #(.CIC_MODE(CIC_TRUNCATED)) dut_t (.clk, .rst_n, .sd_valid, .sd_data,
    .cic_valid(cv[1]), .cic_data(cd[1]), .pcm_valid(pv[1]), .pcm_data(pd[1]), .sat(st[1]));

  always #5 clk = ~clk;

  lq_t    xs;
  lq_t    cic_ref [2], pcm_ref [2];
  longint acc_edge [NIN];
  longint cyc = 0;
  int     nin = 0, gaps = 0, wraps = 0;
  int     ncic [2] = '{0, 0}, npcm [2] = '{0, 0}, nsat [2] = '{0, 0}, ref_sat [2] = '{0, 0};

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (NIN * 2 + 2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n) begin
    for (int d = 0; d < 2; d++) begin
      if (cv[d]) begin
        checks++;
        if (ncic[d] >= cic_ref[d].size() || cd[d] != 25'(cic_ref[d][ncic[d]])) begin
          failures++;
          if (failures < 10) $display("FAIL mode %0d cic out %0d got %0d", d, ncic[d], cd[d]);
        end
        ncic[d]++;
      end
      if (pv[d]) begin
        int n;
        n = 128 * npcm[d] + 127;
        checks += 2;
        if (npcm[d] >= pcm_ref[d].size() || pd[d] != 25'(pcm_ref[d][npcm[d]])) begin
          failures++;
          if (failures < 10) $display("FAIL mode %0d pcm out %0d got %0d exp %0d", d, npcm[d], pd[d],
                                      pcm_ref[d][npcm[d]]);
        end
        if (n >= nin || cyc - acc_edge[n] != LAT) begin
          failures++;
          $display("FAIL mode %0d pcm out %0d latency", d, npcm[d]);
        end
        npcm[d]++;
      end
      nsat[d] += int'(st[d][0]) + int'(st[d][1]) + int'(st[d][2]);
    end
  end

  initial begin
    lq_t hb1, hb2, dr, s1, s2;
    int  ns;
    // stimulus
    for (int n = 0; n < NIN; n++) begin
      real v;
      int  q;
      if (n < NIN / 2)
        v = 14.0 * $sin(2.0 * 3.14159265358979 * 3.0e3 * real'(n) / 6.144e6)
            + (real'($urandom_range(1000)) / 1000.0 - 0.5);
      else
        v = (((n - NIN / 2) / 1024) % 2 == 0) ? 15.0 : -16.0;
      q = int'(v);
      if (q > 15) q = 15;
      if (q < -16) q = -16;
      xs.push_back(q);
    end
    // reference streams
    hb1 = hb1_taps(); hb2 = hb2_taps(); dr = droop_taps();
    cic_ref[0] = cic_full(xs);
    cic_ref[1] = cic_pruned(xs, wraps);
    for (int d = 0; d < 2; d++) begin
      s1 = fir_dec2(cic_ref[d], hb1, ns);  ref_sat[d] += ns;
      s2 = fir_dec2(s1, dr, ns);           ref_sat[d] += ns;
      pcm_ref[d] = fir_dec2(s2, hb2, ns);  ref_sat[d] += ns;
    end

    repeat (3) @(negedge clk);
    rst_n = 1;
    while (nin < NIN) begin
      @(negedge clk);
      if ($urandom_range(9) == 0) begin
        sd_valid = 0; gaps++;
      end else begin
        sd_valid = 1;
        sd_data  = 5'(xs[nin]);
        acc_edge[nin] = cyc + 1;
        nin++;
      end
    end
    @(negedge clk) sd_valid = 0;
    repeat (20) @(negedge clk);
    for (int d = 0; d < 2; d++) begin
      checks += 3;
      if (ncic[d] != NIN / 16) begin failures++; $display("FAIL mode %0d: %0d CIC outputs", d, ncic[d]); end
      if (npcm[d] != NIN / 128) begin failures++; $display("FAIL mode %0d: %0d PCM outputs", d, npcm[d]); end
      if (nsat[d] != ref_sat[d] || nsat[d] == 0) begin
        failures++; $display("FAIL mode %0d: %0d saturations, model %0d", d, nsat[d], ref_sat[d]);
      end
    end
    checks += 2;
    if (wraps == 0) begin failures++; $display("FAIL: no integrator wrap-around"); end
    if (gaps == 0)  begin failures++; $display("FAIL: no input gaps"); end
    $display("mechanisms: wrap-arounds %0d, input gaps %0d, saturations %0d/%0d, PCM outputs %0d/%0d (pipelined/pruned CIC)",
             wraps, gaps, nsat[0], nsat[1], npcm[0], npcm[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
