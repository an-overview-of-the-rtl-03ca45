// cic_truncated: five-stage CIC decimation filter (N = 5, M = 1, R = 16) with
// pruned register widths, after Fig. 4 of the paper: integrators of 25, 22,
// 20, 18 and 16 bits, a 16:1 down-sampler, and five 16-bit combs.
//
// How it works: all registers are MSB-aligned to the 25-bit full-precision
// word (B_IN + N*log2(R*M) = 5 + 20 bits). Integrator 1 takes the sign-extended
// input word; each later integrator drops the LSBs its narrower register has
// no room for (truncation: bits 24..3 feed integrator 2, 24..5 integrator 3,
// and so on), so the pruning error enters as truncation noise while the MSBs,
// and with them the wrap-around arithmetic, stay exact. The integrators are
// the unpipelined kind (register in the feedback loop), so they form one
// combinational chain. The down-sampler captures integrator 5's output on
// every 16th input sample. On the next cycle the five combinational combs
// evaluate the captured word and the 16-bit result, bits 24..9 of the full
// precision output, is registered onto s_out.
//
// Interface: in_valid marks one input sample a_in (two's complement, B_IN
// bits); it may be high on every clock. out_valid pulses for one cycle per 16
// input samples; it rises on the clock edge after the one that takes
// the 16th sample.
// The widths are the paper's (Fig. 4). B_IN = 5, the valid/reset interface
// and the output register are this design's choices. The low bits each
// integrator's successor drops are deliberately left unconnected: that is the
// truncation, and lint tools report them as unused.
module cic_truncated
  import decim_pkg::*;
#(
  parameter int unsigned R = CIC_R
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic [B_IN-1:0]         a_in,
  output logic                    out_valid,
  output logic [TRUNC_COMB_W-1:0] s_out
);
  localparam int unsigned W1 = TRUNC_INT_W[0];
  localparam int unsigned W2 = TRUNC_INT_W[1];
  localparam int unsigned W3 = TRUNC_INT_W[2];
  localparam int unsigned W4 = TRUNC_INT_W[3];
  localparam int unsigned W5 = TRUNC_INT_W[4];
  localparam int unsigned WC = TRUNC_COMB_W;

  logic [W1-1:0] i1;
  logic [W2-1:0] i2;
  logic [W3-1:0] i3;
  logic [W4-1:0] i4;
  logic [W5-1:0] i5;

  // Integrator section: combinational chain, truncating LSBs between stages
  cic_integrator #(.W(W1), .PIPE(1'b0)) u_int1 (.clk, .rst_n, .en(in_valid),
    .x(W1'(signed'(a_in))), .y(i1));
  cic_integrator #(.W(W2), .PIPE(1'b0)) u_int2 (.clk, .rst_n, .en(in_valid),
    .x(i1[W1-1 -: W2]), .y(i2));
  cic_integrator #(.W(W3), .PIPE(1'b0)) u_int3 (.clk, .rst_n, .en(in_valid),
    .x(i2[W2-1 -: W3]), .y(i3));
  cic_integrator #(.W(W4), .PIPE(1'b0)) u_int4 (.clk, .rst_n, .en(in_valid),
    .x(i3[W3-1 -: W4]), .y(i4));
  cic_integrator #(.W(W5), .PIPE(1'b0)) u_int5 (.clk, .rst_n, .en(in_valid),
    .x(i4[W4-1 -: W5]), .y(i5));

  // Down-sampler: keep every R-th integrator output
  logic [$clog2(R)-1:0] phase;
  logic [WC-1:0]        ds;
  logic                 ds_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase    <= '0;
      ds       <= '0;
      ds_valid <= 1'b0;
    end else begin
      ds_valid <= 1'b0;
      if (in_valid) begin
        phase <= (phase == ($clog2(R))'(R - 1)) ? '0 : phase + 1'b1;
        if (phase == ($clog2(R))'(R - 1)) begin
          ds       <= i5[W5-1 -: WC];
          ds_valid <= 1'b1;
        end
      end
    end
  end

  // Comb section: combinational chain at the decimated rate
  logic [WC-1:0] c [6];
  assign c[0] = ds;
  for (genvar j = 0; j < 5; j++) begin : g_comb
    cic_comb #(.W(WC), .PIPE(1'b0)) u_comb (.clk, .rst_n, .en(ds_valid),
      .x(c[j]), .y(c[j+1]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_out     <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= ds_valid;
      if (ds_valid) s_out <= c[5];
    end
  end

  // One output per R inputs: never two valid outputs on consecutive cycles
  a_out_spaced: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid |=> !out_valid);
endmodule
