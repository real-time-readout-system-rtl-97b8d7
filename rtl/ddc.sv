// ddc: second down-conversion stage, one time-multiplexed instance for all
// tones of a readout line.
//
// Every tone sample (tone t, one per frame of the channel stream, i.e. at
// the channel rate fs/64 = 3.90625 MSps) is multiplied by exp(-j*theta_t),
// where theta_t is a per-tone NCO phase: the accumulator advances by
// freq[t] per sample and a per-tone phase offset poff[t] is added before the
// sine table. The frequency removes the tone's offset from its channel
// centre; the phase offset rotates the resonance circle so that the trigger
// can work on a single component (the paper's phase rotation). The mixed
// samples are low-pass filtered and decimated by DECIM (20) with a
// 2*DECIM-tap windowed-sinc FIR (cut-off fs_ch/(2*DECIM) = 97.7 kHz, the
// paper's 100 kHz detector bandwidth). The FIR is computed in transposed
// form with two partial sums per tone: the sample with phase r = 0..DECIM-1
// within the output period adds h[DECIM-1-r]*x to the current output and
// h[2*DECIM-1-r]*x to the next one. Output rate per tone:
// 250 MSps / 64 / 20 = 195.3125 kSps; all tones of one output period leave
// in a burst, one per clock, two clocks after their last input sample.
// The paper gives the function (variable mixer with phase-offset input,
// 100 kHz FIR, decimation 20); filter length, NCO widths and the
// two-partial-sum structure are this design's choices.
module ddc
  import dsp_pkg::*;
#(
  parameter int NUM_TONES = 128,
  parameter int DECIM     = 20,
  parameter int LUT_W     = 10
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // configuration: sel 0 = frequency word, 1 = phase offset
  input  logic                         cfg_we,
  input  logic                         cfg_sel,
  input  logic [$clog2(NUM_TONES)-1:0] cfg_tone,
  input  logic [31:0]                  cfg_data,
  // tone stream from bin_select
  input  logic                         in_valid,
  input  logic [$clog2(NUM_TONES)-1:0] in_tone,
  input  logic                         in_last,
  input  cplx_t                        in_data,
  // decimated detector stream
  output logic                         out_valid,
  output logic [$clog2(NUM_TONES)-1:0] out_tone,
  output cplx_t                        out_data
);
  localparam int TW   = $clog2(NUM_TONES);
  localparam int L    = 2 * DECIM;
  localparam int FRAC = 15;
  localparam logic [MAX_TAPS*18-1:0] H = lowpass_coefs(L, DECIM, FRAC);

  logic [31:0] freq  [NUM_TONES];
  logic [31:0] poff  [NUM_TONES];
  logic [31:0] phase [NUM_TONES];
  longint acc0_i [NUM_TONES], acc0_q [NUM_TONES];
  longint acc1_i [NUM_TONES], acc1_q [NUM_TONES];
  logic [$clog2(DECIM)-1:0] r;

  always_ff @(posedge clk) begin
    if (cfg_we && !cfg_sel) freq[cfg_tone] <= cfg_data;
    if (cfg_we &&  cfg_sel) poff[cfg_tone] <= cfg_data;
  end

  // stage 1: mixer
  logic [31:0] theta;
  logic signed [15:0] c, s;
  sincos_lut #(.ADDR_W(LUT_W)) u_lut (.phase(theta[31 -: LUT_W]), .cos_o(c), .sin_o(s));
  assign theta = phase[in_tone] + poff[in_tone];

  logic          m_valid, m_last;
  logic [TW-1:0] m_tone;
  longint        m_i, m_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      m_valid <= 1'b0;
      m_last  <= 1'b0;
      m_tone  <= '0;
      m_i     <= 0;
      m_q     <= 0;
      for (int t = 0; t < NUM_TONES; t++) phase[t] <= '0;
    end else begin
      m_valid <= in_valid;
      if (in_valid) begin
        m_tone <= in_tone;
        m_last <= in_last;
        // x * (c - j s), Q15 result
        m_i <= (longint'(in_data.i) * c + longint'(in_data.q) * s + 16384) >>> 15;
        m_q <= (longint'(in_data.q) * c - longint'(in_data.i) * s + 16384) >>> 15;
        phase[in_tone] <= phase[in_tone] + freq[in_tone];
      end
    end
  end

  // stage 2: decimating FIR
  longint h0, h1, a0_i, a0_q, a1_i, a1_q;
  always_comb begin
    h0   = longint'($signed(H[(DECIM - 1 - 32'(r)) * 18 +: 18]));
    h1   = longint'($signed(H[(2 * DECIM - 1 - 32'(r)) * 18 +: 18]));
    a0_i = acc0_i[m_tone] + h0 * m_i;
    a0_q = acc0_q[m_tone] + h0 * m_q;
    a1_i = acc1_i[m_tone] + h1 * m_i;
    a1_q = acc1_q[m_tone] + h1 * m_q;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      r         <= '0;
      out_valid <= 1'b0;
      out_tone  <= '0;
      out_data  <= '0;
      for (int t = 0; t < NUM_TONES; t++) begin
        acc0_i[t] <= 0; acc0_q[t] <= 0; acc1_i[t] <= 0; acc1_q[t] <= 0;
      end
    end else begin
      out_valid <= 1'b0;
      if (m_valid) begin
        if (r == $bits(r)'(DECIM - 1)) begin
          out_valid  <= 1'b1;
          out_tone   <= m_tone;
          out_data.i <= sat16((a0_i + 16384) >>> FRAC);
          out_data.q <= sat16((a0_q + 16384) >>> FRAC);
          acc0_i[m_tone] <= a1_i;
          acc0_q[m_tone] <= a1_q;
          acc1_i[m_tone] <= 0;
          acc1_q[m_tone] <= 0;
        end else begin
          acc0_i[m_tone] <= a0_i;
          acc0_q[m_tone] <= a0_q;
          acc1_i[m_tone] <= a1_i;
          acc1_q[m_tone] <= a1_q;
        end
        if (m_last) r <= (r == $bits(r)'(DECIM - 1)) ? '0 : r + 1'b1;
      end
    end
  end
endmodule
