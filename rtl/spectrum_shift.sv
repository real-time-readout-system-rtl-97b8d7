// spectrum_shift: frequency shift of the ADC stream by half a channel
// spacing, feeding the second polyphase channelizer.
//
// The critically sampled filter bank attenuates tones that fall between two
// channels. A second filter bank working on a copy of the input shifted by
// fs/128 = 1.953125 MHz (the paper's 1.95 MHz at fs = 250 MSps) places those
// tones at its channel centres. The shift multiplies sample n by
// exp(-j*2*pi*n/SHIFT_DIV) from a SHIFT_DIV-entry table, so it is exact and
// periodic. The direction (down) is this design's choice. One sample per
// in_valid, out_valid one clock later.
module spectrum_shift
  import dsp_pkg::*;
#(
  parameter int SHIFT_DIV = 128
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  cplx_t in_data,
  output logic  out_valid,
  output cplx_t out_data
);
  localparam int IW = $clog2(SHIFT_DIV);

  function automatic logic [SHIFT_DIV*32-1:0] make_table();
    logic [SHIFT_DIV*32-1:0] t;
    for (int k = 0; k < SHIFT_DIV; k++) begin
      t[k*32 +: 16]      = cos_q15(k, SHIFT_DIV);
      t[k*32 + 16 +: 16] = sin_q15(k, SHIFT_DIV);
    end
    return t;
  endfunction
  localparam logic [SHIFT_DIV*32-1:0] TABLE = make_table();

  logic [IW-1:0] n;
  logic signed [15:0] c, s;
  logic signed [63:0] re, im;

  always_comb begin
    c  = TABLE[32*n +: 16];
    s  = TABLE[32*n + 16 +: 16];
    // x * (c - j s)
    re = longint'(in_data.i) * c + longint'(in_data.q) * s;
    im = longint'(in_data.q) * c - longint'(in_data.i) * s;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      n         <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        n          <= (n == IW'(SHIFT_DIV - 1)) ? '0 : n + 1'b1;
        out_data.i <= sat16((re + 16384) >>> 15);
        out_data.q <= sat16((im + 16384) >>> 15);
      end
    end
  end
endmodule
