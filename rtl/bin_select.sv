// bin_select: channel selection after the interleaved filter banks.
//
// A frame of NBINS channel samples (channel 0 first, channel NBINS-1 last)
// is written into one half of a double buffer while the previous frame is
// read from the other half. Reading follows a tone table: tone t takes the
// sample of channel tone_bin[t], for t = 0..num_tones-1. Channels no tone
// points to are dropped; a channel holding several resonance tones is named
// by several table entries and so duplicated. Tones leave one per clock,
// starting the clock after the last channel of a frame arrives, tagged with
// their tone number, and the last one of each frame is flagged. num_tones
// may not exceed the number of clocks per frame (NBINS at the 500 MHz rate).
// Table layout, double buffering and the tone limit are this design's
// choices; the paper gives the function.
module bin_select
  import dsp_pkg::*;
#(
  parameter int NBINS     = 128,
  parameter int NUM_TONES = 128
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // tone table: tone index -> channel
  input  logic                         tab_we,
  input  logic [$clog2(NUM_TONES)-1:0] tab_addr,
  input  logic [$clog2(NBINS)-1:0]     tab_bin,
  input  logic [$clog2(NUM_TONES):0]   num_tones,
  // channel stream
  input  logic                         in_valid,
  input  logic [$clog2(NBINS)-1:0]     in_chan,
  input  cplx_t                        in_data,
  // tone stream
  output logic                         out_valid,
  output logic [$clog2(NUM_TONES)-1:0] out_tone,
  output logic                         out_last,
  output cplx_t                        out_data
);
  localparam int BW = $clog2(NBINS);
  localparam int TW = $clog2(NUM_TONES);

  cplx_t          frame_buf [2][NBINS];
  logic [BW-1:0]  tone_bin  [NUM_TONES];
  logic           wbank;
  logic           reading;
  logic [TW:0]    rd_tone;

  always_ff @(posedge clk) begin
    if (tab_we) tone_bin[tab_addr] <= tab_bin;
  end

  always_ff @(posedge clk) begin
    if (in_valid) frame_buf[wbank][in_chan] <= in_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wbank     <= 1'b0;
      reading   <= 1'b0;
      rd_tone   <= '0;
      out_valid <= 1'b0;
      out_tone  <= '0;
      out_last  <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      if (reading) begin
        out_valid <= 1'b1;
        out_tone  <= TW'(rd_tone);
        out_data  <= frame_buf[~wbank][tone_bin[TW'(rd_tone)]];
        out_last  <= (rd_tone + 1'b1 == num_tones);
        if (rd_tone + 1'b1 == num_tones) reading <= 1'b0;
        rd_tone <= rd_tone + 1'b1;
      end
      if (in_valid && in_chan == BW'(NBINS - 1)) begin
        wbank   <= ~wbank;
        reading <= (num_tones != 0);
        rd_tone <= '0;
      end
    end
  end

  // A new frame must not start before the previous one is read out.
  readout_done: assert property (@(posedge clk) disable iff (!rst_n)
      (in_valid && in_chan == BW'(NBINS - 1)) |-> !reading || (rd_tone + 1'b1 == num_tones));
endmodule
