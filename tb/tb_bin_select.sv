`timescale 1ns/1ps
// tb_bin_select: 16 channels, tone table {3, 3, 15, 0}: every frame must
// yield four tones in order, tone 1 duplicating channel 3, the others
// dropped, the last flagged, and the values from the frame just completed.
module tb_bin_select;
  import dsp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  logic tab_we = 0, in_valid = 0, out_valid, out_last;
  logic [2:0] tab_addr = 0, out_tone;
  logic [3:0] tab_bin = 0, in_chan = 0;
  logic [3:0] num_tones = 4;
  cplx_t in_data, out_data;
  int table_bins [4] = '{3, 3, 15, 0};

  bin_select #(.NBINS(16), .NUM_TONES(8)) dut (.*);

  initial begin
    #20000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int frame_out = 0, tone_out = 0;
  always @(posedge clk) if (rst_n && out_valid) begin
    checks++;
    if (out_tone != 3'(tone_out) || out_last != (tone_out == 3) ||
        out_data.i != 16'(frame_out * 100 + table_bins[tone_out]) || out_data.q != 16'(frame_out)) begin
      failures++;
      $display("FAIL frame %0d tone %0d got tone %0d data %0d last %b", frame_out, tone_out,
               out_tone, out_data.i, out_last);
    end
    if (tone_out == 3) begin tone_out = 0; frame_out++; end else tone_out++;
  end

  initial begin
    in_data = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int t = 0; t < 4; t++) begin
      @(posedge clk); tab_we <= 1; tab_addr <= 3'(t); tab_bin <= 4'(table_bins[t]);
    end
    @(posedge clk); tab_we <= 0;
    for (int f = 0; f < 6; f++)
      for (int c = 0; c < 16; c++) begin
        @(posedge clk);
        in_valid <= 1; in_chan <= 4'(c);
        in_data <= '{i: 16'(f * 100 + c), q: 16'(f)};
      end
    @(posedge clk); in_valid <= 0;
    repeat (10) @(posedge clk);
    checks++;
    if (frame_out != 6) begin failures++; $display("FAIL frames %0d", frame_out); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
