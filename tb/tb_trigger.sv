`timescale 1ns/1ps
// tb_trigger: 8 detectors in time multiplex, PRE_LEN = 4, packages of 16.
// Detector d carries a baseline 100*d plus a small ramp; at sample 40 a
// step of +3000 is added to detector 3 (and at sample 120, -3000 with the
// inverted polarity test). For each algorithm (difference, moving average,
// IIR) the test checks that exactly detector 3 fires, that its package has
// 16 beats flagged first/last, that the first beat is the sample 4 samples
// before the firing one (pre-trigger), and that the other detectors keep
// being evaluated (no dead time: a second step on detector 5 during
// detector 3's package also fires).
module tb_trigger;
  import dsp_pkg::*;
  import daq_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic enable = 0, use_q = 0, invert = 0, in_valid = 0, out_valid;
  trig_algo_e algo = TRIG_DIFF;
  logic signed [31:0] threshold = 500;
  logic [3:0] iir_k = 3;
  logic [4:0] pkg_len = 16;
  logic [DET_W-1:0] in_det = 0;
  cplx_t in_data;
  beat_t out_beat;
  logic [31:0] fire_count;

  trigger #(.NUM_DET(8), .PKG_LEN(16), .PRE_LEN(4), .MA_LEN(4)) dut (.*);

  initial begin
    #400000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic int value(int d, int n);
    int v;
    v = 100 * d + (n % 3);
    if (d == 3 && n >= 40) v += 3000;
    if (d == 5 && n >= 46) v += 3000;
    return v;
  endfunction

  int beats [8], firsts [8], lasts [8], first_val [8];
  always @(posedge clk) if (rst_n && out_valid) begin
    beats[out_beat.det]++;
    if (out_beat.first) begin
      firsts[out_beat.det]++;
      first_val[out_beat.det] = out_beat.data.i;
      checks++;
      if (out_beat.algo != algo) begin failures++; $display("FAIL algo tag"); end
    end
    if (out_beat.last) lasts[out_beat.det]++;
  end

  task automatic run(trig_algo_e a);
    algo = a;
    for (int d = 0; d < 8; d++) begin beats[d] = 0; firsts[d] = 0; lasts[d] = 0; end
    rst_n <= 0;
    repeat (3) @(posedge clk);
    rst_n <= 1; enable <= 1;
    for (int n = 0; n < 80; n++)
      for (int d = 0; d < 8; d++) begin
        @(posedge clk);
        in_valid <= 1; in_det <= DET_W'(d);
        in_data <= '{i: 16'(value(d, n)), q: 16'sd7};
      end
    @(posedge clk) in_valid <= 0;
    repeat (3) @(posedge clk);
    for (int d = 0; d < 8; d++) begin
      checks++;
      if (d == 3 || d == 5) begin
        if (firsts[d] != 1 || lasts[d] != 1 || beats[d] != 16) begin
          failures++; $display("FAIL algo %0d det %0d: firsts %0d lasts %0d beats %0d", a, d, firsts[d], lasts[d], beats[d]);
        end
        checks++;
        // the first beat is the sample PRE_LEN = 4 before the firing one
        if (first_val[d] != value(d, (d == 3 ? 40 : 46) - 4)) begin
          failures++; $display("FAIL algo %0d det %0d pre-trigger value %0d", a, d, first_val[d]);
        end
      end else if (beats[d] != 0) begin
        failures++; $display("FAIL algo %0d det %0d fired", a, d);
      end
    end
  endtask

  initial begin
    in_data = '0;
    run(TRIG_DIFF);
    run(TRIG_MA);
    run(TRIG_IIR);
    checks++;
    if (fire_count != 2) begin failures++; $display("FAIL fire_count %0d", fire_count); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
