// cic_comb: one comb cell of a CIC filter with differential delay M = 1,
// y[m] = x[m] - x[m-1], evaluated at the decimated rate and wrapping modulo
// 2^W. The subtraction is done by the modified carry look-ahead adder as
// x + ~d + 1.
//
// PIPE = 0 (truncated CIC, Fig. 4): y is the subtractor output, so cascaded
//   combs form one combinational chain.
// PIPE = 1 (pipelined CIC, Fig. 6): a pipeline register follows the
//   subtractor and is the output, adding one decimated sample of delay.
// The delay register d (and the pipeline register) update on clock edges
// where en is high (one decimated sample); rst_n clears them asynchronously.
module cic_comb #(
  parameter int unsigned W    = 25,
  parameter bit          PIPE = 1'b1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         en,
  input  logic [W-1:0] x,
  output logic [W-1:0] y
);
  logic [W-1:0] d, diff, y_q;

  mcla_adder #(.WIDTH(W)) u_sub (.a(x), .b(~d), .ci(1'b1), .s(diff));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d   <= '0;
      y_q <= '0;
    end else if (en) begin
      d   <= x;
      y_q <= diff;
    end
  end

  assign y = PIPE ? y_q : diff;
endmodule
