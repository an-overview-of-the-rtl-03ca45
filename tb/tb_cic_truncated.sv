// tb_cic_truncated: self-checking test of the five-stage CIC decimator with
// pruned register widths 25/22/20/18/16 and 16-bit combs (R = 16).
//
// Two references, both computed here without the DUT's structure:
//  1. Bit-exact: a word-level model of the pruned arithmetic. Each integrator
//     register is a modulo-2^Wj counter fed with the top Wj bits of the
//     previous stage's 25-bit-aligned word; each comb is a modulo-2^16
//     difference. The 16-bit output must match exactly.
//  2. Accuracy: the full-precision response y_full = h * x with
//     h = (1 + z^-1 + ... + z^-15)^5, scaled to the output LSB (2^-9). The
//     pruned result may differ from it only by the truncation error, whose
//     worst case for these widths is 1182 output LSBs (the sum over the four
//     truncation points of the discarded LSB weight times the larger of the
//     positive and negative tap sums of the response from that point). The
//     test also reports the largest error seen.
// Output m belongs to input sample 16m+15. The test also checks one output per
// 16 inputs and that out_valid rises on the clock edge after the one that
// takes the 16th input. The stimulus mixes random words, full-scale constant
// runs and random gaps in the input strobe.
module tb_cic_truncated;
  localparam int NIN = 16 * 400;
  localparam int NH  = 76;
  localparam int W [5] = '{25, 22, 20, 18, 16};
  localparam int WORST_ERR = 1182;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [4:0]  a_in = '0;
  logic        out_valid;
  logic [15:0] s_out;

  cic_truncated dut (.clk, .rst_n, .in_valid, .a_in, .out_valid, .s_out);

  always #5 clk = ~clk;

  longint h [NH];
  int     xs [NIN];
  longint acc_edge [NIN];
  longint cyc = 0;
  int     nin = 0, nout = 0, max_err = 0;
  longint unsigned ia [5];       // model integrator registers
  longint unsigned cd [5];       // model comb delay registers
  longint unsigned ds;
  int     exp_q [$];

  always @(posedge clk) cyc <= cyc + 1;

  function automatic longint y_full(int n);
    longint s = 0;
    for (int k = 0; k < NH; k++) if (n - k >= 0) s += h[k] * longint'(xs[n-k]);
    return s;
  endfunction

  function automatic int stim(int n);
    if (n >= 1200 && n < 2400) return -16;
    if (n >= 3000 && n < 4000) return 15;
    return int'($urandom_range(31)) - 16;
  endfunction

  // word-level model of the pruned filter, one input sample
  task automatic model_step(int x);
    longint unsigned v;
    v = longint'(x) & ((64'd1 << 25) - 1);
    for (int j = 0; j < 5; j++) begin
      ia[j] = (ia[j] + v) & ((64'd1 << W[j]) - 1);
      if (j < 4) v = ia[j] >> (W[j] - W[j+1]);
    end
  endtask

  task automatic model_decimate();
    longint unsigned v, c;
    v = ia[4];
    for (int j = 0; j < 5; j++) begin
      c = (v - cd[j]) & 64'hFFFF;
      cd[j] = v;
      v = c;
    end
    exp_q.push_back(int'(16'(v)));
  endtask

  initial begin
    repeat (NIN * 4 + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    int n_last, e, d, got;
    n_last = 16 * nout + 15;
    got = int'(signed'(s_out));
    checks++;
    e = exp_q.pop_front();
    if (16'(got) != 16'(e)) begin
      failures++;
      if (failures < 10) $display("FAIL out %0d: got %0d model %0d", nout, got, signed'(16'(e)));
    end
    // difference to the full-precision result, modulo the 16-bit word
    d = int'(signed'(16'(got - int'(y_full(n_last) >>> 9))));
    if (d < 0) d = -d;
    if (d > max_err) max_err = d;
    checks++;
    if (d > WORST_ERR) begin
      failures++;
      $display("FAIL out %0d: error %0d LSB beyond the truncation bound", nout, d);
    end
    checks++;
    if (cyc - acc_edge[n_last] != 1) begin
      failures++;
      $display("FAIL timing out %0d", nout);
    end
    nout++;
  end

  initial begin
    h[0] = 1;
    for (int i = 1; i < NH; i++) h[i] = 0;
    for (int s = 0; s < 5; s++) begin
      longint t [NH];
      for (int i = 0; i < NH; i++) begin
        t[i] = 0;
        for (int k = 0; k < 16; k++) if (i - k >= 0) t[i] += h[i-k];
      end
      h = t;
    end
    for (int j = 0; j < 5; j++) begin ia[j] = 0; cd[j] = 0; end
    for (int i = 0; i < NIN; i++) xs[i] = stim(i);

    repeat (3) @(negedge clk);
    rst_n = 1;
    while (nin < NIN) begin
      @(negedge clk);
      if ($urandom_range(4) == 0) begin
        in_valid = 0;
      end else begin
        in_valid = 1;
        a_in     = 5'(xs[nin]);
        acc_edge[nin] = cyc + 1;
        model_step(xs[nin]);
        if (nin % 16 == 15) model_decimate();
        nin++;
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (20) @(negedge clk);
    checks++;
    if (nout != NIN / 16) begin
      failures++;
      $display("FAIL: %0d outputs for %0d inputs", nout, NIN);
    end
    $display("outputs %0d, largest truncation error %0d LSB", nout, max_err);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
