// comb_generator: frequency-comb stimulus by cyclic replay of a sample memory.
//
// The host computes the sum of all stimulus tones (frequency, amplitude and
// phase of each) as time-domain complex samples and writes them into this
// memory through the write port. While enabled, the module reads the memory
// at the 250 MSps sample strobe and wraps from address len-1 back to 0,
// producing a continuous periodic waveform. Only tones with an integer number
// of periods in len samples are continuous, so the comb's frequency
// resolution is fs/len (100 Hz for the full 2,500,000-sample memory at
// 250 MSps, as in the paper). The paper places the full-size memory in DDR;
// here it is an on-chip array whose depth is the DEPTH parameter.
// Timing: one output sample per strobe, one clock after the strobe (registered
// read). Reset, the length register and the enable are this design's choices.
module comb_generator
  import dsp_pkg::*;
#(
  parameter int DEPTH  = 2500000,
  parameter int ADDR_W = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  // host write port
  input  logic              wr_en,
  input  logic [ADDR_W-1:0] wr_addr,
  input  cplx_t             wr_data,
  // replay control
  input  logic              enable,
  input  logic [ADDR_W:0]   len,      // number of samples in one period
  input  logic              tick,     // 250 MSps sample strobe
  output logic              out_valid,
  output cplx_t             out_data
);
  cplx_t mem [DEPTH];
  logic [ADDR_W-1:0] rd_addr;

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd_addr   <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= tick;
      if (tick) begin
        if (enable) begin
          out_data <= mem[rd_addr];
          if ({1'b0, rd_addr} >= len - 1'b1) rd_addr <= '0;
          else rd_addr <= rd_addr + 1'b1;
        end else begin
          out_data <= '0;
          rd_addr  <= '0;
        end
      end
    end
  end
endmodule
