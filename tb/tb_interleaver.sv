`timescale 1ns/1ps
// tb_interleaver: two lock-step channel streams at half rate (channel k of
// A and of B on the same clock, every second clock) must leave as one
// full-rate stream A0 B0 A1 B1 ... numbered 2k and 2k+1, with data intact.
module tb_interleaver;
  import dsp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  logic a_valid = 0, b_valid = 0, out_valid;
  logic [5:0] a_chan = 0, b_chan = 0;
  logic [6:0] out_chan;
  cplx_t a_data, b_data, out_data;

  interleaver dut (.*);

  initial begin
    #20000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // monitor
  int expect_j = 0;
  always @(posedge clk) if (rst_n && out_valid) begin
    checks++;
    if (out_chan != 7'(expect_j % 128) ||
        out_data.i != 16'(expect_j * 3) || out_data.q != 16'(-expect_j)) begin
      failures++;
      $display("FAIL j=%0d chan=%0d data=%h", expect_j, out_chan, out_data);
    end
    expect_j++;
  end

  initial begin
    a_data = '0; b_data = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int k = 0; k < 200; k++) begin
      @(posedge clk);
      a_valid <= 1; b_valid <= 1;
      a_chan <= 6'(k % 64); b_chan <= 6'(k % 64);
      a_data <= '{i: 16'((2*(k%64) + 128*(k/64)) * 3), q: 16'(-(2*(k%64) + 128*(k/64)))};
      b_data <= '{i: 16'((2*(k%64) + 1 + 128*(k/64)) * 3), q: 16'(-(2*(k%64) + 1 + 128*(k/64)))};
      @(posedge clk);
      a_valid <= 0; b_valid <= 0;
    end
    repeat (4) @(posedge clk);
    checks++;
    if (expect_j != 400) begin failures++; $display("FAIL count %0d", expect_j); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
