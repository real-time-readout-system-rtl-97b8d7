`timescale 1ns/1ps
// tb_spectrum_shift: a constant input must come out multiplied by
// exp(-j*2*pi*n/128), i.e. shifted down by fs/128 (half a channel of the
// 64-channel filter bank); checked against $cos/$sin over 300 samples,
// which covers the wrap of the 128-entry table.
module tb_spectrum_shift;
  import dsp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid = 0, out_valid;
  cplx_t in_data, out_data;

  spectrum_shift dut (.*);

  task automatic near(int got, real exp, string what);
    checks++;
    if ((real'(got) - exp) > 3.0 || (exp - real'(got)) > 3.0) begin
      failures++;
      $display("FAIL %s: got %0d exp %0.1f", what, got, exp);
    end
  endtask

  initial begin
    #20000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    real a;
    in_data = '{i: 16'sd20000, q: 16'sd0};
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int n = 0; n < 300; n++) begin
      @(posedge clk) in_valid <= 1;
      @(posedge clk) in_valid <= 0;
      #0.1;
      a = 2.0 * 3.14159265358979 * n / 128.0;
      checks++;
      if (!out_valid) begin failures++; $display("FAIL valid"); end
      near(out_data.i, 20000.0 * $cos(a), "i");
      near(out_data.q, -20000.0 * $sin(a), "q");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
