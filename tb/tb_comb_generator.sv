`timescale 1ns/1ps
// tb_comb_generator: loads a short pattern into a 64-word comb memory,
// replays it with a period of 10 samples at the half-rate strobe, and checks
// every output sample, the one-clock latency, the wrap-around and the muted
// output when disabled.
module tb_comb_generator;
  import dsp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic wr_en = 0, enable = 0, tick = 0;
  logic [5:0] wr_addr = 0;
  cplx_t wr_data = '0, out_data;
  logic [6:0] len = 7'd10;
  logic out_valid;

  comb_generator #(.DEPTH(64)) dut (.*);

  function automatic cplx_t pat(int a);
    pat.i = 16'(a * 37 - 500);
    pat.q = 16'(-a * 11);
  endfunction

  initial begin
    #20000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int a = 0; a < 64; a++) begin
      @(posedge clk);
      wr_en <= 1; wr_addr <= 6'(a); wr_data <= pat(a);
    end
    @(posedge clk); wr_en <= 0; enable <= 1;
    n = 0;
    for (int c = 0; c < 70; c++) begin
      @(posedge clk); tick <= (c % 2 == 0);
      #0.1;
      if (tick) begin
        @(posedge clk); tick <= 0; #0.1;
        checks++;
        if (!out_valid || out_data != pat(n % 10)) begin
          failures++;
          $display("FAIL sample %0d: got %h exp %h", n, out_data, pat(n % 10));
        end
        n++;
        c++;
      end
    end
    @(posedge clk); enable <= 0; tick <= 1;
    @(posedge clk); tick <= 0; #0.1;
    checks++;
    if (out_data != '0) begin failures++; $display("FAIL muted output %h", out_data); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
