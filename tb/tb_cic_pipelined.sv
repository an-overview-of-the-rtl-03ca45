// tb_cic_pipelined: self-checking test of the pipelined five-stage CIC
// decimator (R = 16, 25-bit stages).
//
// The reference is the filter's impulse response, h = (1 + z^-1 + ... + z^-15)^5
// (76 taps), convolved directly with the input history; it does not model
// integrators, combs or wrap-around. Output m must equal y_full[16m - 54]: five
// input samples of integrator pipeline delay and four decimated samples of comb
// pipeline delay. The stimulus mixes random 5-bit words with long full-scale
// constant runs (-16 and +15), which drive the 25-bit output to its limits and
// make the integrators wrap many times; input strobes have random gaps. The
// test also checks one output per 16 inputs and that out_valid rises on the
// clock edge after the one that takes the 16th input sample.
module tb_cic_pipelined;
  localparam int NIN = 16 * 420;
  localparam int NH  = 76;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [4:0]  cic_in = '0;
  logic        out_valid;
  logic [24:0] cic_out;

  cic_pipelined dut (.clk, .rst_n, .in_valid, .cic_in, .out_valid, .cic_out);

  always #5 clk = ~clk;

  longint h [NH];
  int     xs [NIN];
  longint acc_edge [NIN];
  longint cyc = 0;
  int     nin = 0, nout = 0, wraps = 0, gaps = 0;
  longint iref [5];

  always @(posedge clk) cyc <= cyc + 1;

  function automatic longint y_full(int n);
    longint s = 0;
    for (int k = 0; k < NH; k++) if (n - k >= 0) s += h[k] * longint'(xs[n-k]);
    return s;
  endfunction

  function automatic int stim(int n);
    if (n >= 1500 && n < 3000) return -16;
    if (n >= 3600 && n < 4600) return 15;
    return int'($urandom_range(31)) - 16;
  endfunction

  // watchdog
  initial begin
    repeat (NIN * 4 + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output checker (samples at the falling edge)
  always @(negedge clk) if (rst_n && out_valid) begin
    int n_last;
    longint exp_v;
    n_last = 16 * nout + 15;
    exp_v  = y_full(16 * nout - 54);
    checks++;
    if (signed'(cic_out) != exp_v) begin
      failures++;
      if (failures < 10) $display("FAIL out %0d: got %0d exp %0d", nout, signed'(cic_out), exp_v);
    end
    checks++;
    if (n_last >= nin || cyc - acc_edge[n_last] != 1) begin
      failures++;
      $display("FAIL timing out %0d: cyc %0d input edge %0d", nout, cyc, acc_edge[n_last]);
    end
    nout++;
  end

  initial begin
    h[0] = 1;
    for (int i = 1; i < NH; i++) h[i] = 0;
    for (int s = 0; s < 5; s++) begin         // multiply by the 16-tap box, 5 times
      longint t [NH];
      for (int i = 0; i < NH; i++) begin
        t[i] = 0;
        for (int k = 0; k < 16; k++) if (i - k >= 0) t[i] += h[i-k];
      end
      h = t;
    end
    for (int i = 0; i < 5; i++) iref[i] = 0;
    for (int i = 0; i < NIN; i++) xs[i] = stim(i);

    repeat (3) @(negedge clk);
    rst_n = 1;
    while (nin < NIN) begin
      @(negedge clk);
      if ($urandom_range(4) == 0) begin
        in_valid = 0; gaps++;
      end else begin
        longint v;
        v = xs[nin];
        in_valid = 1;
        cic_in   = 5'(xs[nin]);
        acc_edge[nin] = cyc + 1;
        // count wrap-arounds of a 25-bit integrator cascade fed this input
        for (int j = 0; j < 5; j++) begin
          longint t;
          t = iref[j] + v;
          if (t >= (64'sd1 <<< 24) || t < -(64'sd1 <<< 24)) wraps++;
          t = (t + (64'sd1 <<< 24)) & ((64'sd1 <<< 25) - 1);
          iref[j] = t - (64'sd1 <<< 24);
          v = iref[j];
        end
        nin++;
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (40) @(negedge clk);
    checks++;
    if (nout != NIN / 16) begin
      failures++;
      $display("FAIL: %0d outputs for %0d inputs", nout, NIN);
    end
    checks++;
    if (wraps == 0 || gaps == 0) begin
      failures++;
      $display("FAIL: stimulus did not exercise wrap-around (%0d) or gaps (%0d)", wraps, gaps);
    end
    $display("outputs %0d, integrator wrap-arounds %0d, input gaps %0d", nout, wraps, gaps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
