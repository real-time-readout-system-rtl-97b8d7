`timescale 1ns/1ps
// tb_vna: the VNA sweeps 4 points (0, 1/8, 2/8, 3/8 of the sample rate)
// through a device that averages two successive samples, whose magnitude
// response is |cos(pi*f)|. The measured |S21| * amp must match
// 10000*|cos(pi*f)| within 2 %, points must come in order, busy must drop
// after the last one, and each point must take settle + 2^avg_log2 samples.
module tb_vna;
  import dsp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  logic tick = 0, start = 0, busy, res_valid;
  logic [31:0] f_start = 0, f_step = 32'h2000_0000;
  logic [15:0] npts = 4, settle = 8, amp = 16'd10000, res_point;
  logic [4:0] avg_log2 = 6;
  cplx_t tx_out, rx_in, res_data, prev_tx;

  vna dut (.*);

  // device under measurement: y[n] = (x[n] + x[n-1]) / 2, one sample delay
  always @(posedge clk) if (tick) begin
    rx_in.i <= 16'((int'(tx_out.i) + int'(prev_tx.i)) / 2);
    rx_in.q <= 16'((int'(tx_out.q) + int'(prev_tx.q)) / 2);
    prev_tx <= tx_out;
  end

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int ticks = 0, last_tick = 0, got = 0;
  always @(posedge clk) if (tick) ticks++;
  always @(posedge clk) if (rst_n && res_valid) begin
    real mag, expm;
    mag  = $sqrt(real'(res_data.i) ** 2 + real'(res_data.q) ** 2);
    expm = 10000.0 * $cos(3.14159265358979 * real'(got) / 8.0);
    checks++;
    if (res_point != 16'(got) || mag < expm * 0.98 - 20 || mag > expm * 1.02 + 20) begin
      failures++; $display("FAIL point %0d: mag %0.1f exp %0.1f", res_point, mag, expm);
    end
    if (got > 0) begin
      checks++;
      if (ticks - last_tick != 8 + 64) begin failures++; $display("FAIL point time %0d", ticks - last_tick); end
    end
    last_tick = ticks;
    got++;
  end

  initial begin
    rx_in = '0; prev_tx = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk) start <= 1;
    @(posedge clk) start <= 0;
    for (int c = 0; c < 2000 && (busy || c < 2); c++) begin
      @(posedge clk) tick <= 1;
      @(posedge clk) tick <= 0;
    end
    repeat (4) @(posedge clk);
    checks++;
    if (got != 4 || busy) begin failures++; $display("FAIL points %0d busy %b", got, busy); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
