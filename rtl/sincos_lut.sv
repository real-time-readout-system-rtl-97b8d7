// sincos_lut: constant cosine/sine table for the numerically controlled
// oscillators (NCOs) of the calibration mixer, the VNA and the DDC.
//
// The phase input addresses a table of 2^ADDR_W points on the unit circle;
// cos and sin are returned as Q15 values (32767 = +1). The table is built at
// elaboration time by dsp_pkg::cos_q15/sin_q15, so it becomes a ROM (or
// LUT logic) when synthesised. The lookup is combinational: the caller
// registers the result in its own pipeline. The table size is this design's
// choice; the paper only states that the mixers are driven by an NCO.
module sincos_lut #(
  parameter int ADDR_W = 10
) (
  input  logic [ADDR_W-1:0]  phase,
  output logic signed [15:0] cos_o,
  output logic signed [15:0] sin_o
);
  import dsp_pkg::*;
  localparam int N = 1 << ADDR_W;

  function automatic logic [N*32-1:0] make_table();
    logic [N*32-1:0] t;
    for (int k = 0; k < N; k++) begin
      t[k*32 +: 16]      = cos_q15(k, N);
      t[k*32 + 16 +: 16] = sin_q15(k, N);
    end
    return t;
  endfunction

  localparam logic [N*32-1:0] TABLE = make_table();

  always_comb begin
    cos_o = TABLE[32*phase +: 16];
    sin_o = TABLE[32*phase + 16 +: 16];
  end
endmodule
