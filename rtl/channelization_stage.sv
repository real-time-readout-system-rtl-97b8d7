// channelization_stage: from the 250 MSps ADC baseband stream to the
// decimated signals of the individual resonators of one readout line.
//
// Two 64-channel polyphase filter banks run in parallel, the second on a
// copy of the input shifted by half a channel spacing (spectrum_shift), so
// that every frequency lies near the centre of some channel. Their outputs
// are interleaved into one 128-channel stream at the 500 MHz clock rate,
// bin_select picks one channel per resonance tone (dropping empty channels,
// duplicating shared ones), and the DDC mixes each tone to zero frequency,
// rotates it by its phase offset and low-passes and decimates it by 20.
// The result is a time-multiplexed stream of NUM_TONES detector signals at
// 195.3125 kSps each. Input: one sample every second clock (in_valid).
// The unshifted path is delayed by one clock to stay aligned with the
// shifted one. Structure and rates follow the paper; the blocks' inner
// choices are described in their own files.
module channelization_stage
  import dsp_pkg::*;
#(
  parameter int NCH       = 64,
  parameter int TAPS      = 8,
  parameter int NUM_TONES = 128,
  parameter int DECIM     = 20
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         in_valid,
  input  cplx_t                        in_data,
  // configuration
  input  logic                         tab_we,
  input  logic [$clog2(NUM_TONES)-1:0] tab_addr,
  input  logic [$clog2(2*NCH)-1:0]     tab_bin,
  input  logic [$clog2(NUM_TONES):0]   num_tones,
  input  logic                         ddc_we,
  input  logic                         ddc_sel,
  input  logic [$clog2(NUM_TONES)-1:0] ddc_tone,
  input  logic [31:0]                  ddc_data,
  // detector stream
  output logic                         out_valid,
  output logic [$clog2(NUM_TONES)-1:0] out_tone,
  output cplx_t                        out_data
);
  localparam int CW = $clog2(NCH);
  localparam int TW = $clog2(NUM_TONES);

  logic  d_valid, s_valid;
  cplx_t d_data, s_data;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      d_valid <= 1'b0;
      d_data  <= '0;
    end else begin
      d_valid <= in_valid;
      d_data  <= in_data;
    end
  end

  spectrum_shift #(.SHIFT_DIV(2 * NCH)) u_shift (
    .clk, .rst_n, .in_valid, .in_data, .out_valid(s_valid), .out_data(s_data));

  logic          a_valid, b_valid;
  logic [CW-1:0] a_chan, b_chan;
  cplx_t         a_data, b_data;

  pfb_channelizer #(.NCH(NCH), .TAPS(TAPS)) u_pfb_a (
    .clk, .rst_n, .in_valid(d_valid), .in_data(d_data),
    .out_valid(a_valid), .out_chan(a_chan), .out_data(a_data));

  pfb_channelizer #(.NCH(NCH), .TAPS(TAPS)) u_pfb_b (
    .clk, .rst_n, .in_valid(s_valid), .in_data(s_data),
    .out_valid(b_valid), .out_chan(b_chan), .out_data(b_data));

  logic          i_valid;
  logic [CW:0]   i_chan;
  cplx_t         i_data;

  interleaver #(.NCH(NCH)) u_il (
    .clk, .rst_n,
    .a_valid, .a_chan, .a_data, .b_valid, .b_chan, .b_data,
    .out_valid(i_valid), .out_chan(i_chan), .out_data(i_data));

  logic          t_valid, t_last;
  logic [TW-1:0] t_tone;
  cplx_t         t_data;

  bin_select #(.NBINS(2 * NCH), .NUM_TONES(NUM_TONES)) u_sel (
    .clk, .rst_n, .tab_we, .tab_addr, .tab_bin, .num_tones,
    .in_valid(i_valid), .in_chan(i_chan), .in_data(i_data),
    .out_valid(t_valid), .out_tone(t_tone), .out_last(t_last), .out_data(t_data));

  ddc #(.NUM_TONES(NUM_TONES), .DECIM(DECIM)) u_ddc (
    .clk, .rst_n,
    .cfg_we(ddc_we), .cfg_sel(ddc_sel), .cfg_tone(ddc_tone), .cfg_data(ddc_data),
    .in_valid(t_valid), .in_tone(t_tone), .in_last(t_last), .in_data(t_data),
    .out_valid, .out_tone, .out_data);
endmodule
