// cic_integrator: one integrator cell of a CIC filter, y[n] = y[n-1] + x[n],
// wrapping modulo 2^W (two's complement wrap-around is harmless in a CIC
// filter: the combs remove it as long as the final output fits its word).
// The addition is done by the modified carry look-ahead adder.
//
// PIPE = 0 (truncated CIC, Fig. 4): the register sits in the feedback loop
//   and the output is the adder output, y = x + acc, so cascaded integrators
//   form one combinational chain.
// PIPE = 1 (pipelined CIC, Fig. 6): the register sits in the forward path and
//   is the output, y = acc, acc <= acc + x; each integrator is then one
//   pipeline stage and adds one sample of delay (transfer z^-1/(1-z^-1)).
// The register updates on clock edges where en is high (one input sample);
// rst_n clears it asynchronously (reset style is this design's choice).
module cic_integrator #(
  parameter int unsigned W    = 25,
  parameter bit          PIPE = 1'b1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         en,
  input  logic [W-1:0] x,
  output logic [W-1:0] y
);
  logic [W-1:0] acc, sum;

  mcla_adder #(.WIDTH(W)) u_add (.a(x), .b(acc), .ci(1'b0), .s(sum));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  acc <= '0;
    else if (en) acc <= sum;
  end

  assign y = PIPE ? acc : sum;
endmodule
