// pfb_channelizer: critically sampled polyphase filter bank with NCH
// channels (64 in the paper), turning one complex stream into a
// time-division-multiplexed stream of NCH sub-band signals.
//
// Input samples are dealt to the NCH branches by a commutator: sample s of a
// frame (s = 0..NCH-1) goes to branch p = NCH-1-s. Each branch is a TAPS-tap
// FIR whose coefficients are every NCH-th coefficient of one low-pass
// prototype (length NCH*TAPS, cut-off fs/(2*NCH), unity DC gain), so the
// branch outputs y_p of one frame form the polyphase-decomposed filter
// output. An NCH-point DFT, X_k = sum_p y_p * exp(+j*2*pi*p*k/NCH), then
// separates the channels; it is computed as running sums, every branch output
// being added into all NCH bins as soon as it is ready. For an input tone at
// k*fs/NCH, channel k carries the tone with its input amplitude.
// Channel k is centred at k*fs/NCH (k >= NCH/2 are the negative
// frequencies). Each channel is decimated by NCH (critical sampling), so the
// output rate equals the input rate: one result per in_valid, channel k in
// slot k of the frame that follows the frame it was computed from
// (out_valid one clock after in_valid, latency one frame plus one clock).
// The paper names the structure (64 sub-bands, critically sampled); TAPS,
// the prototype filter, the DFT method and the fixed-point scaling are this
// design's choices.
module pfb_channelizer
  import dsp_pkg::*;
#(
  parameter int NCH  = 64,
  parameter int TAPS = 8
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  cplx_t                  in_data,
  output logic                   out_valid,
  output logic [$clog2(NCH)-1:0] out_chan,
  output cplx_t                  out_data
);
  localparam int CW   = $clog2(NCH);
  localparam int L    = NCH * TAPS;
  localparam int FRAC = 17;                    // coefficient Q format
  localparam int YSH  = FRAC - CW;             // branch output keeps CW extra bits
  localparam int OSH  = CW + 15;               // DFT output scaling
  localparam logic [MAX_TAPS*18-1:0] H = lowpass_coefs(L, NCH, FRAC);

  function automatic logic [NCH*32-1:0] make_tw();
    logic [NCH*32-1:0] t;
    for (int k = 0; k < NCH; k++) begin
      t[k*32 +: 16]      = cos_q15(k, NCH);
      t[k*32 + 16 +: 16] = sin_q15(k, NCH);
    end
    return t;
  endfunction
  localparam logic [NCH*32-1:0] TW = make_tw();

  cplx_t  hist [NCH][TAPS-1];
  longint acc_i [NCH], acc_q [NCH];
  longint obuf_i [NCH], obuf_q [NCH];
  logic [CW-1:0] s, p;
  logic primed;

  longint y_i, y_q;
  longint nxt_i [NCH], nxt_q [NCH];

  always_comb begin
    longint si, sq, h;
    logic [CW-1:0] ti;
    logic signed [15:0] c, sn;
    p  = CW'(NCH - 1) - s;
    h  = longint'($signed(H[32'(p) * 18 +: 18]));
    si = h * in_data.i;
    sq = h * in_data.q;
    for (int t = 1; t < TAPS; t++) begin
      h  = longint'($signed(H[(32'(p) + t * NCH) * 18 +: 18]));
      si = si + h * hist[p][t-1].i;
      sq = sq + h * hist[p][t-1].q;
    end
    y_i = si >>> YSH;
    y_q = sq >>> YSH;
    for (int k = 0; k < NCH; k++) begin
      ti = CW'(32'(p) * k);
      c  = $signed(TW[32*ti +: 16]);
      sn = $signed(TW[32*ti + 16 +: 16]);
      nxt_i[k] = acc_i[k] + y_i * c - y_q * sn;
      nxt_q[k] = acc_q[k] + y_i * sn + y_q * c;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s         <= '0;
      primed    <= 1'b0;
      out_valid <= 1'b0;
      out_chan  <= '0;
      out_data  <= '0;
      for (int k = 0; k < NCH; k++) begin
        acc_i[k]  <= 0;
        acc_q[k]  <= 0;
        obuf_i[k] <= 0;
        obuf_q[k] <= 0;
        for (int t = 0; t < TAPS - 1; t++) hist[k][t] <= '0;
      end
    end else begin
      out_valid <= in_valid && primed;
      if (in_valid) begin
        // branch delay line
        hist[p][0] <= in_data;
        for (int t = 1; t < TAPS - 1; t++) hist[p][t] <= hist[p][t-1];
        // output of the previous frame, channel s
        out_chan   <= s;
        out_data.i <= sat16((obuf_i[s] + (64'sd1 <<< (OSH - 1))) >>> OSH);
        out_data.q <= sat16((obuf_q[s] + (64'sd1 <<< (OSH - 1))) >>> OSH);
        if (s == CW'(NCH - 1)) begin
          for (int k = 0; k < NCH; k++) begin
            obuf_i[k] <= nxt_i[k];
            obuf_q[k] <= nxt_q[k];
            acc_i[k]  <= 0;
            acc_q[k]  <= 0;
          end
          primed <= 1'b1;
          s      <= '0;
        end else begin
          for (int k = 0; k < NCH; k++) begin
            acc_i[k] <= nxt_i[k];
            acc_q[k] <= nxt_q[k];
          end
          s <= s + 1'b1;
        end
      end
    end
  end
endmodule
