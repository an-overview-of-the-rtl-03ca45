// droop_fir: droop correction filter with 2:1 decimation (192 -> 96 kHz).
// The CIC filter's sinc^5 response sags across the audio band; this order-8
// linear-phase FIR has a pass band shaped like the inverse of that sag, so
// the whole chain comes out flat, and it also low-passes ahead of the 2:1
// decimation.
//
// How it works: the nine taps are symmetric, h[k] = h[ORDER-k], so each pair
// of samples sharing a coefficient is added first and multiplied once
// (ORDER/2 + 1 multiplies). A delay line holds the last ORDER+1 samples;
// each in_valid shifts in one sample and on every second one (input samples
// 1, 3, 5, ... after reset) the next clock computes
//   y = sum_{k<ORDER/2} COEF[k]*2^-FRAC*(x[n-k] + x[n-ORDER+k]) + COEF[ORDER/2]*2^-FRAC*x[n-ORDER/2]
// rounds it to DATA_W bits (round half up), saturates it, registers it on y
// and pulses out_valid for one cycle; sat pulses with out_valid when
// saturation was applied.
// The order (8), the decimation ratio (2) and the purpose (inverse-CIC pass
// band) are the paper's. The coefficients were fitted by this design to
// 1/(CIC response x first half-band response) over 0..20 kHz with a stop band
// from 76 kHz; they, the widths, rounding and saturation are this design's own.
module droop_fir
  import decim_pkg::*;
#(
  parameter int unsigned DATA_W = decim_pkg::DW,
  parameter int unsigned ORDER  = DROOP_ORDER,
  parameter int          COEF [ORDER/2+1] = DROOP_COEF
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic signed [DATA_W-1:0] x,
  output logic                     out_valid,
  output logic signed [DATA_W-1:0] y,
  output logic                     sat
);
  localparam int unsigned HALF  = ORDER / 2;
  localparam int unsigned ACC_W = DATA_W + COEF_W + 8;

  logic signed [DATA_W-1:0] line [ORDER+1];
  logic                     phase, calc;

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

  logic signed [ACC_W-1:0]  acc, rnd;
  logic signed [DATA_W-1:0] y_next;
  logic                     sat_next;

  always_comb begin
    acc = ACC_W'(line[HALF]) * ACC_W'(COEF[HALF]);
    for (int k = 0; k < HALF; k++) begin
      acc += ACC_W'(ACC_W'(line[k]) + ACC_W'(line[ORDER-k])) * ACC_W'(COEF[k]);
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
