// halfband_decim: half-band low-pass filter with 2:1 decimation. The chain
// uses it twice: the first half-band filter (order 4, 384 -> 192 kHz) and the
// second (order 40, 96 -> 48 kHz).
//
// How it works: in a half-band filter every coefficient at an even distance
// from the centre is zero, except the centre tap, which is exactly 0.5. The
// filter therefore multiplies only the taps at odd distances 1, 3, 5, ...
// (pairwise, since the response is symmetric: the two samples of a pair are
// added before the multiply) and takes the centre tap as a one-bit shift.
// Only every second output is computed, which is the 2:1 decimation. This
// needs about half the multiplies of a direct-form filter of the same order.
//
// A delay line holds the last ORDER+1 input samples. Each in_valid shifts in
// one sample; on every second one (input samples 1, 3, 5, ... after reset)
// the next clock computes
//   y = 0.5*x[n-ORDER/2] + sum_k COEF[k]*2^-FRAC*(x[n-ORDER/2-(2k+1)] + x[n-ORDER/2+(2k+1)])
// rounds it to DATA_W bits (round half up) and saturates it to the DATA_W-bit range,
// registers it on y and pulses out_valid for one cycle; sat pulses with
// out_valid when saturation was applied.
// The orders (4 and 40), the half-band property and the 0.5 centre tap are
// the paper's; the coefficients, word widths, rounding, saturation and the
// valid interface are this design's choices (the paper lists no coefficients).
module halfband_decim
  import decim_pkg::*;
#(
  parameter int unsigned DATA_W    = decim_pkg::DW,
  parameter int unsigned ORDER = HB2_ORDER,
  parameter int unsigned NODD  = (ORDER / 2 + 1) / 2,   // taps at odd offsets, one side
  parameter int          COEF [NODD] = HB2_COEF
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic signed [DATA_W-1:0] x,
  output logic                 out_valid,
  output logic signed [DATA_W-1:0] y,
  output logic                 sat
);
  localparam int unsigned CTR   = ORDER / 2;
  localparam int unsigned ACC_W = DATA_W + COEF_W + 8;

  logic signed [DATA_W-1:0] line [ORDER+1];
  logic                 phase, calc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i <= ORDER; i++) line[i] <= '0;
      phase <= 1'b0;
      calc  <= 1'b0;
    end else begin
      calc <= 1'b0;
      if (in_valid) begin
        line[0] <= x;
        for (int i = 1; i <= ORDER; i++) line[i] <= line[i-1];
        phase <= ~phase;
        calc  <= phase;
      end
    end
  end

  // Multiply-accumulate over the non-zero taps only
  logic signed [ACC_W-1:0] acc, rnd;
  logic signed [DATA_W-1:0]    y_next;
  logic                    sat_next;

  always_comb begin
    acc = ACC_W'(line[CTR]) <<< (COEF_FRAC - 1);          // centre tap 0.5
    for (int k = 0; k < NODD; k++) begin
      acc += ACC_W'(ACC_W'(line[CTR-(2*k+1)]) + ACC_W'(line[CTR+(2*k+1)]))
             * ACC_W'(COEF[k]);
    end
    rnd = (acc + (ACC_W'(1) <<< (COEF_FRAC - 1))) >>> COEF_FRAC;
    sat_next = 1'b0;
    if (rnd > ACC_W'((2 ** (DATA_W - 1)) - 1)) begin
      y_next   = {1'b0, {(DATA_W-1){1'b1}}};
      sat_next = 1'b1;
    end else if (rnd < -ACC_W'(2 ** (DATA_W - 1))) begin
      y_next   = {1'b1, {(DATA_W-1){1'b0}}};
      sat_next = 1'b1;
    end else begin
      y_next = DATA_W'(rnd);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      y         <= '0;
      out_valid <= 1'b0;
      sat       <= 1'b0;
    end else begin
      out_valid <= calc;
      sat       <= calc & sat_next;
      if (calc) y <= y_next;
    end
  end
endmodule
