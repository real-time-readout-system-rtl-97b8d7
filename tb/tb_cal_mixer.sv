`timescale 1ns/1ps
// tb_cal_mixer: with the mixer on at fs/16, a constant TX input must come
// out as a rotating phasor exp(+j*2*pi*n/16) and a constant RX input as
// exp(-j*2*pi*n/16); reference values from the real-valued $cos/$sin.
// With the mixer off both paths must pass the samples unchanged.
module tb_cal_mixer;
  import dsp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic enable = 0, tick = 0;
  logic [31:0] freq_word = 32'h1000_0000;   // 1/16 cycle per sample
  cplx_t tx_in, tx_out, rx_in, rx_out;

  cal_mixer dut (.*);

  task automatic near(int got, real exp, string what);
    checks++;
    if ((real'(got) - exp) > 4.0 || (exp - real'(got)) > 4.0) begin
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
    tx_in = '{i: 16'sd10000, q: 16'sd0};
    rx_in = '{i: 16'sd0, q: 16'sd12000};
    repeat (3) @(posedge clk);
    rst_n <= 1; enable <= 1;
    for (int n = 0; n < 40; n++) begin
      @(posedge clk) tick <= 1;
      @(posedge clk) tick <= 0;
      #0.1;
      a = 2.0 * 3.14159265358979 * n / 16.0;
      near(tx_out.i, 10000.0 * $cos(a), "tx i");
      near(tx_out.q, 10000.0 * $sin(a), "tx q");
      // (0 + j12000) * (cos - j sin) = 12000 sin + j 12000 cos
      near(rx_out.i, 12000.0 * $sin(a), "rx i");
      near(rx_out.q, 12000.0 * $cos(a), "rx q");
    end
    enable <= 0;
    @(posedge clk) tick <= 1;
    @(posedge clk) tick <= 0;
    #0.1;
    checks++;
    if (tx_out != tx_in || rx_out != rx_in) begin failures++; $display("FAIL bypass"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
