// mcla_adder: WIDTH-bit modified carry look-ahead adder (MCLA), s = a + b + ci
// modulo 2^WIDTH. It is the adder of every integrator and comb stage of the
// CIC filters.
//
// Structure (default WIDTH = 25, the paper's adder): bits 15..0 are the 16-bit
// block MCLA_16_1; above it sit 4-bit groups, each four PFA cells with a CLL-2
// look-ahead block, that take the previous group's carry-out (Co4, Co5) as
// their carry-in; the MSB is a single SPFA fed by the last carry (Co6). So the
// 25-bit adder is 16 + 4 + 4 + 1 bits, as drawn in the paper. Other widths
// (the pruned stages of the truncated CIC use 22, 20, 18 and 16 bits) follow
// the same rule: MCLA_16_1, then as many whole 4-bit groups as fit below the
// MSB, then PFA cells rippling into the SPFA at the MSB; this generalisation
// is this design's own. The carry-in pin is this design's addition so that
// a - b can be formed as a + ~b + 1 in the comb stages. Combinational, no
// clock; WIDTH must be at least 16. At WIDTH = 16 the adder is MCLA_16_1
// alone and its carry-out is unused.
module mcla_adder #(
  parameter int unsigned WIDTH = 25
) (
  input  logic [WIDTH-1:0] a,
  input  logic [WIDTH-1:0] b,
  input  logic             ci,
  output logic [WIDTH-1:0] s
);
  localparam int unsigned REST   = WIDTH - 16;                // bits above MCLA_16_1
  localparam int unsigned GROUPS = (REST == 0) ? 0 : (REST - 1) / 4;
  localparam int unsigned TAIL   = REST - 4 * GROUPS;         // bits left, MSB included

  if (WIDTH < 16) begin : g_bad_width
    $error("mcla_adder: WIDTH must be at least 16");
  end

  logic [GROUPS:0] gc;     // carries between 4-bit groups (gc[0] = Co4)
  logic            co16;

  mcla_16_1 u_low (.a(a[15:0]), .b(b[15:0]), .ci(ci), .s(s[15:0]), .co(co16));
  assign gc[0] = co16;

  for (genvar k = 0; k < GROUPS; k++) begin : g_grp
    mcla_4 u_grp (.a(a[16+4*k+:4]), .b(b[16+4*k+:4]), .ci(gc[k]),
                  .s(s[16+4*k+:4]), .co(gc[k+1]));
  end

  if (TAIL > 0) begin : g_tail
    localparam int unsigned BASE = 16 + 4 * GROUPS;
    logic [TAIL-1:0] tc;   // carry into each tail bit
    assign tc[0] = gc[GROUPS];
    for (genvar i = 0; i + 1 < TAIL; i++) begin : g_rip
      logic g, p;
      pfa u_pfa (.a(a[BASE+i]), .b(b[BASE+i]), .c(tc[i]), .g(g), .p(p), .s(s[BASE+i]));
      assign tc[i+1] = g | (p & tc[i]);
    end
    spfa u_msb (.a(a[WIDTH-1]), .b(b[WIDTH-1]), .c(tc[TAIL-1]), .s(s[WIDTH-1]));
  end
endmodule
