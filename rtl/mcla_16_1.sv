// mcla_16_1: the 16-bit modified carry look-ahead adder (MCLA_16_1 in the adder
// figure), built from four 4-bit look-ahead groups whose carry-outs chain from
// one group to the next. The figure shows this block only as a box with
// a[15:0], b[15:0] and s[15:0]; its inside here follows the text's
// description of 4-bit modules, each passing its carry-out to the next.
// The carry-in and carry-out pins are this design's addition (the carry-in
// turns the adder into a subtractor for the comb stages). Combinational.
module mcla_16_1 (
  input  logic [15:0] a,
  input  logic [15:0] b,
  input  logic        ci,
  output logic [15:0] s,
  output logic        co
);
  logic [4:0] c;
  assign c[0] = ci;

  for (genvar k = 0; k < 4; k++) begin : g_grp
    mcla_4 u_grp (.a(a[4*k+:4]), .b(b[4*k+:4]), .ci(c[k]), .s(s[4*k+:4]), .co(c[k+1]));
  end

  assign co = c[4];
endmodule
