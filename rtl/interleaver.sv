// interleaver: merges the outputs of the two polyphase channelizers into one
// stream of twice the rate (2 x 64 channels at 250 MSps -> 128 channels at
// 500 MSps in the paper).
//
// Both inputs deliver channel k on the same clock, at most every second
// clock (the 250 MSps strobe in the 500 MHz clock domain). The module
// forwards channel k of input A on the next clock and channel k of input B
// on the clock after, numbering them 2k and 2k+1. Because input B sees the
// spectrum shifted by half a channel spacing, output channel j is centred at
// j * fs/(2*NCH): the merged channels are ordered by frequency in half-
// channel steps. The ordering rule is this design's choice; the paper states
// only that the two sets are combined by interleaving.
module interleaver
  import dsp_pkg::*;
#(
  parameter int NCH = 64
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     a_valid,
  input  logic [$clog2(NCH)-1:0]   a_chan,
  input  cplx_t                    a_data,
  input  logic                     b_valid,
  input  logic [$clog2(NCH)-1:0]   b_chan,
  input  cplx_t                    b_data,
  output logic                     out_valid,
  output logic [$clog2(NCH):0]     out_chan,
  output cplx_t                    out_data
);
  logic                   pend;
  logic [$clog2(NCH)-1:0] pend_chan;
  cplx_t                  pend_data;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pend      <= 1'b0;
      pend_chan <= '0;
      pend_data <= '0;
      out_valid <= 1'b0;
      out_chan  <= '0;
      out_data  <= '0;
    end else begin
      if (a_valid) begin
        out_valid <= 1'b1;
        out_chan  <= {a_chan, 1'b0};
        out_data  <= a_data;
        pend      <= b_valid;
        pend_chan <= b_chan;
        pend_data <= b_data;
      end else if (pend) begin
        out_valid <= 1'b1;
        out_chan  <= {pend_chan, 1'b1};
        out_data  <= pend_data;
        pend      <= 1'b0;
      end else begin
        out_valid <= 1'b0;
      end
    end
  end

  // The two channelizers run in lock step at half the clock rate.
  a_b_aligned: assert property (@(posedge clk) disable iff (!rst_n)
                                a_valid == b_valid && (!a_valid || a_chan == b_chan));
  half_rate:   assert property (@(posedge clk) disable iff (!rst_n) !(a_valid && pend));
endmodule
