// cic_pipelined: five-stage pipelined CIC decimation filter (N = 5, M = 1,
// R = 16) after Fig. 6 of the paper, with every stage 25 bits wide.
//
// How it works: each integrator keeps its register in the forward path, so
// its output is registered and the integrator section needs no extra
// pipeline registers: the longest path is one 25-bit carry look-ahead adder.
// The down-sampler captures the last integrator's register on every 16th
// input sample. Each comb has a pipeline register after its subtractor, so
// the comb section too has one adder per register stage. Both sections
// update only on their sample strobes, so the pipeline registers add sample
// delays, not extra cycles: integrators add 5 input samples, combs 4
// decimated samples on top of the output register. With y_full[n] the
// full-precision CIC response to the input stream (x[0] the first sample
// after reset), output number m (m = 0, 1, ...) is y_full[16*m - 54].
//
// Interface: in_valid marks one input sample cic_in (two's complement, B_IN
// bits); it may be high every clock. out_valid pulses for one cycle per 16
// input samples; it rises on the clock edge after the one that takes
// the 16th sample. The output
// is the 25-bit full-precision result (input times 16^5 at DC).
// The 25-bit widths and register placement are the paper's (Fig. 6); B_IN,
// the valid/reset interface and the sample-strobed pipeline are this design's.
module cic_pipelined
  import decim_pkg::*;
#(
  parameter int unsigned R = CIC_R,
  parameter int unsigned W = CIC_BMAX
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  logic [B_IN-1:0] cic_in,
  output logic            out_valid,
  output logic [W-1:0]    cic_out
);
  // Integrator section
  logic [W-1:0] ii [CIC_N+1];
  assign ii[0] = W'(signed'(cic_in));
  for (genvar j = 0; j < CIC_N; j++) begin : g_int
    cic_integrator #(.W(W), .PIPE(1'b1)) u_int (.clk, .rst_n, .en(in_valid),
      .x(ii[j]), .y(ii[j+1]));
  end

  // Down-sampler
  logic [$clog2(R)-1:0] phase;
  logic [W-1:0]         ds;
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
          ds       <= ii[CIC_N];
          ds_valid <= 1'b1;
        end
      end
    end
  end

  // Comb section, one pipeline register per comb
  logic [W-1:0] cc [CIC_N+1];
  assign cc[0] = ds;
  for (genvar j = 0; j < CIC_N; j++) begin : g_comb
    cic_comb #(.W(W), .PIPE(1'b1)) u_comb (.clk, .rst_n, .en(ds_valid),
      .x(cc[j]), .y(cc[j+1]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= ds_valid;
  end
  assign cic_out = cc[CIC_N];

  a_out_spaced: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid |=> !out_valid);
endmodule
