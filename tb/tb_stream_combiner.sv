`timescale 1ns/1ps
// tb_stream_combiner: four lines of eight tones burst at the same time, as
// the DDCs do. Every detector number line*8+tone must leave exactly once per
// period with its own data, at one sample per clock, without overflow. A
// ninth-plus burst into a full FIFO must then raise the overflow flag.
module tb_stream_combiner;
  import dsp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  logic [3:0] in_valid = 0;
  logic [2:0] in_tone [4];
  cplx_t in_data [4], out_data;
  logic out_valid, overflow;
  logic [11:0] out_det;

  stream_combiner #(.NUM_LINES(4), .NUM_TONES(8), .FIFO_DEPTH(8), .DET_W(12)) dut (.*);

  initial begin
    #20000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int seen [32], period = 0, outs = 0;
  always @(posedge clk) if (rst_n && out_valid) begin
    checks++;
    if (out_det >= 32 || out_data.i != 16'(int'(out_det) + 1000 * period) || out_data.q != 16'(-int'(out_det))) begin
      failures++; $display("FAIL det %0d data %0d", out_det, out_data.i);
    end else seen[out_det]++;
    outs++;
  end

  initial begin
    for (int l = 0; l < 4; l++) begin in_tone[l] = 0; in_data[l] = '0; end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int p = 0; p < 3; p++) begin
      period = p;
      for (int t = 0; t < 8; t++) begin
        @(posedge clk);
        in_valid <= 4'hF;
        for (int l = 0; l < 4; l++) begin
          in_tone[l] <= 3'(t);
          in_data[l] <= '{i: 16'(l * 8 + t + 1000 * p), q: 16'(-(l * 8 + t))};
        end
      end
      @(posedge clk) in_valid <= 0;
      repeat (30) @(posedge clk);
    end
    for (int d = 0; d < 32; d++) begin
      checks++;
      if (seen[d] != 3) begin failures++; $display("FAIL det %0d seen %0d", d, seen[d]); end
    end
    checks++;
    if (overflow) begin failures++; $display("FAIL early overflow"); end
    // overflow: 12 samples into line 0 while the arbiter cannot drain fast enough
    period = 3;
    for (int t = 0; t < 12; t++) begin
      @(posedge clk);
      in_valid <= 4'hF;
      for (int l = 0; l < 4; l++) begin
        in_tone[l] <= 3'(t % 8);
        in_data[l] <= '{i: 16'(l * 8 + t % 8 + 3000), q: 16'(-(l * 8 + t % 8))};
      end
    end
    @(posedge clk) in_valid <= 0;
    repeat (60) @(posedge clk);
    checks++;
    if (!overflow) begin failures++; $display("FAIL no overflow"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
