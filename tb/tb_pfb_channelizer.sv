`timescale 1ns/1ps
// tb_pfb_channelizer: two complex tones at the centres of channel 5
// (amplitude 8000) and channel 60 = -4 (amplitude 5000) must appear in those
// channels with their amplitude (+-5 %), every other channel staying below
// 2 % of full scale once the 8-tap branch filters are filled. Also checks
// that one result leaves per input sample, in channel order, and that the
// first result appears after one full frame.
module tb_pfb_channelizer;
  import dsp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid = 0, out_valid;
  logic [5:0] out_chan;
  cplx_t in_data, out_data;

  pfb_channelizer #(.NCH(64), .TAPS(8)) dut (.*);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int n_in = 0, n_out = 0, first_out = -1;
  always @(posedge clk) if (rst_n && out_valid) begin
    real mag;
    if (first_out < 0) first_out = n_in;
    checks++;
    if (out_chan != 6'(n_out % 64)) begin failures++; $display("FAIL order"); end
    mag = $sqrt(real'(out_data.i) ** 2 + real'(out_data.q) ** 2);
    if (n_out >= 64 * 9) begin
      checks++;
      if (out_chan == 5) begin
        if (mag < 7600 || mag > 8400) begin failures++; $display("FAIL ch5 mag %0.1f", mag); end
      end else if (out_chan == 60) begin
        if (mag < 4750 || mag > 5250) begin failures++; $display("FAIL ch60 mag %0.1f", mag); end
      end else if (mag > 650) begin
        failures++; $display("FAIL ch%0d leak %0.1f", out_chan, mag);
      end
    end
    n_out++;
  end

  initial begin
    real a, b;
    in_data = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int n = 0; n < 64 * 12; n++) begin
      a = 2.0 * 3.14159265358979 * 5.0 * n / 64.0;
      b = -2.0 * 3.14159265358979 * 4.0 * n / 64.0;
      @(posedge clk);
      in_valid <= 1;
      in_data.i <= 16'($rtoi(8000.0 * $cos(a) + 5000.0 * $cos(b)));
      in_data.q <= 16'($rtoi(8000.0 * $sin(a) + 5000.0 * $sin(b)));
      n_in++;
      @(posedge clk); in_valid <= 0;
    end
    repeat (4) @(posedge clk);
    checks++;
    if ((first_out < 65 || first_out > 66) || n_out != 64 * 11) begin
      failures++; $display("FAIL timing first=%0d count=%0d", first_out, n_out);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
