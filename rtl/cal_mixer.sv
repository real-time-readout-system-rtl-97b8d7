// cal_mixer: the calibration "digital mixer" between the converters and the
// signal-processing blocks.
//
// For the simultaneous sweep of all resonators the stimulus comb is mixed up
// by a user-defined frequency before the DAC, and the ADC signal is mixed
// down again by the same frequency, so the channelization chain needs no
// reconfiguration. One NCO (32-bit phase accumulator, 1024-point sine table)
// serves both directions: TX = x * exp(+j*phi), RX = y * exp(-j*phi). With
// enable low both paths pass the samples unchanged. The NCO advances on the
// 250 MSps strobe. Each path has one register stage (out_valid follows
// in_valid by one clock). Widths, bypass and rounding are this design's own.
module cal_mixer
  import dsp_pkg::*;
#(
  parameter int PHASE_W = 32,
  parameter int LUT_W   = 10
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               enable,
  input  logic [PHASE_W-1:0] freq_word,   // phase increment per sample
  input  logic               tick,        // 250 MSps sample strobe
  input  cplx_t              tx_in,
  output cplx_t              tx_out,
  input  cplx_t              rx_in,
  output cplx_t              rx_out
);
  logic [PHASE_W-1:0] phase;
  logic signed [15:0] c, s;

  sincos_lut #(.ADDR_W(LUT_W)) u_lut (.phase(phase[PHASE_W-1 -: LUT_W]), .cos_o(c), .sin_o(s));

  always_ff @(posedge clk) begin
    if (!rst_n) phase <= '0;
    else if (tick) phase <= enable ? phase + freq_word : '0;
  end

  // (a+jb)(c+js) = (ac-bs) + j(as+bc); (a+jb)(c-js) = (ac+bs) + j(bc-as)
  function automatic cplx_t rot(input cplx_t x, input logic signed [15:0] cc,
                                input logic signed [15:0] ss, input logic conj);
    longint re, im, sg;
    sg = conj ? -64'sd1 : 64'sd1;
    re = longint'(x.i) * cc - sg * longint'(x.q) * ss;
    im = sg * longint'(x.i) * ss + longint'(x.q) * cc;
    rot.i = sat16((re + 16384) >>> 15);
    rot.q = sat16((im + 16384) >>> 15);
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      tx_out <= '0;
      rx_out <= '0;
    end else if (tick) begin
      tx_out <= enable ? rot(tx_in, c, s, 1'b0) : tx_in;
      rx_out <= enable ? rot(rx_in, c, s, 1'b1) : rx_in;
    end
  end
endmodule
