// decimator_top: the complete multirate decimation filter for a sigma-delta
// audio A/D converter. It takes the modulator's 6.144 MHz output words down
// to 48 kHz PCM, an overall ratio of 128, in four stages:
//
//   sd_data --CIC 16:1--> 384 kHz --half-band (order 4) 2:1--> 192 kHz
//           --droop correction (order 8) 2:1--> 96 kHz
//           --half-band (order 40) 2:1--> 48 kHz pcm_data
//
// The CIC filter removes most of the modulator's shaped quantisation noise
// without multipliers; the first half-band filter and the droop corrector
// flatten the CIC's pass-band sag; the long second half-band filter sets the
// sharp transition band at the output Nyquist rate.
//
// CIC_MODE selects the CIC structure: CIC_PIPELINED (default, the paper's
// preferred pipelined filter with 25-bit stages) or CIC_TRUNCATED (pruned
// register widths, 16-bit result, placed MSB-aligned into the 25-bit word so
// both give the same scale). Every adder in either CIC is the modified carry
// look-ahead adder.
//
// Interface: one clock at the modulator rate; sd_valid marks a modulator
// sample (it may be high on every cycle). cic_valid/cic_data expose the CIC
// output; pcm_valid pulses once per 128 input samples with pcm_data. sat[0],
// sat[1], sat[2] pulse when the first half-band, droop and second half-band
// filters saturate their output. rst_n is an asynchronous active-low reset.
// The stage order, rates and ratios follow the paper; the word widths of the
// FIR stages, the coefficients, saturation and the valid interface are this
// design's choices. The sigma-delta modulator itself (analog) is outside this
// module; its output enters on sd_data.
module decimator_top
  import decim_pkg::*;
#(
  parameter cic_mode_e CIC_MODE = CIC_PIPELINED
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 sd_valid,
  input  logic [B_IN-1:0]      sd_data,
  output logic                 cic_valid,
  output logic signed [DW-1:0] cic_data,
  output logic                 pcm_valid,
  output logic signed [DW-1:0] pcm_data,
  output logic [2:0]           sat
);
  if (CIC_MODE == CIC_PIPELINED) begin : g_cic
    logic [DW-1:0] cic_out;
    cic_pipelined #(.R(CIC_R), .W(DW)) u_cic (
      .clk, .rst_n, .in_valid(sd_valid), .cic_in(sd_data),
      .out_valid(cic_valid), .cic_out(cic_out));
    assign cic_data = signed'(cic_out);
  end else begin : g_cic
    logic [TRUNC_COMB_W-1:0] s_out;
    cic_truncated #(.R(CIC_R)) u_cic (
      .clk, .rst_n, .in_valid(sd_valid), .a_in(sd_data),
      .out_valid(cic_valid), .s_out(s_out));
    assign cic_data = {s_out, {(DW - TRUNC_COMB_W){1'b0}}};
  end

  logic                 hb1_valid, droop_valid;
  logic signed [DW-1:0] hb1_data, droop_data;

  halfband_decim #(.DATA_W(DW), .ORDER(HB1_ORDER), .NODD(1), .COEF(HB1_COEF)) u_hb1 (
    .clk, .rst_n, .in_valid(cic_valid), .x(cic_data),
    .out_valid(hb1_valid), .y(hb1_data), .sat(sat[0]));

  droop_fir #(.DATA_W(DW), .ORDER(DROOP_ORDER), .COEF(DROOP_COEF)) u_droop (
    .clk, .rst_n, .in_valid(hb1_valid), .x(hb1_data),
    .out_valid(droop_valid), .y(droop_data), .sat(sat[1]));

  halfband_decim #(.DATA_W(DW), .ORDER(HB2_ORDER), .NODD(10), .COEF(HB2_COEF)) u_hb2 (
    .clk, .rst_n, .in_valid(droop_valid), .x(droop_data),
    .out_valid(pcm_valid), .y(pcm_data), .sat(sat[2]));
endmodule
