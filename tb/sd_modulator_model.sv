// sd_modulator_model: behavioural model of a third-order sigma-delta
// modulator with a 5-bit quantiser, used only to give the decimation chain a
// realistic noise-shaped input. It is not a model of any particular analog
// circuit: the modulator's loop filter is not part of this design, so the
// model uses the simplest third-order structure, error feedback with the
// noise transfer function (1 - z^-1)^3:
//   w[n] = u[n] - 3 e[n-1] + 3 e[n-2] - e[n-3]
//   y[n] = clamp(round(w[n]), -16, 15),  e[n] = y[n] - w[n]
// so that y = u + (1 - z^-1)^3 e. The input u is a real number in quantiser
// steps; the loop stays stable (no clamping) for |u| up to about 11.5.
// On each clock edge with en high it takes u and presents y on the next
// cycle with valid high; rst_n clears the error history.
module sd_modulator_model (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       en,
  input  real        u,
  output logic       valid,
  output logic [4:0] y,
  output int         clamps
);
  real e1, e2, e3;

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      e1 = 0.0; e2 = 0.0; e3 = 0.0;
      valid <= 1'b0;
      y <= '0;
      clamps = 0;
    end else begin
      valid <= en;
      if (en) begin
        real w;
        int  q;
        w = u - 3.0 * e1 + 3.0 * e2 - e3;
        q = $rtoi(w >= 0.0 ? w + 0.5 : w - 0.5);
        if (q > 15)  begin q = 15;  clamps++; end
        if (q < -16) begin q = -16; clamps++; end
        e3 = e2; e2 = e1;
        e1 = real'(q) - w;
        y <= 5'(q);
      end
    end
  end
endmodule
