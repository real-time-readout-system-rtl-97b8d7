`timescale 1ns/1ps
// tb_axis_switch: with sel = 0 only package beats pass, unchanged; a switch
// request during an open package takes effect only after its last beat;
// with sel = 1 only raw samples pass, flagged raw with their detector
// number; switching back restores packages.
module tb_axis_switch;
  import dsp_pkg::*;
  import daq_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  logic sel = 0, trig_valid = 0, raw_valid = 0, out_valid;
  beat_t trig_beat, out_beat;
  logic [DET_W-1:0] raw_det = 0;
  cplx_t raw_data;

  axis_switch dut (.*);

  initial begin
    #20000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int n_pkg = 0, n_raw = 0;
  always @(posedge clk) if (rst_n && out_valid) begin
    if (out_beat.raw) begin
      n_raw++;
      checks++;
      if (out_beat.data.i != 16'(out_beat.det) * 2) begin failures++; $display("FAIL raw data"); end
    end else begin
      n_pkg++;
      checks++;
      if (out_beat.data.i != 16'sd77) begin failures++; $display("FAIL pkg data"); end
    end
  end

  // one beat per clock on both inputs; a package = 6 beats of det 9
  task automatic cycle(int k, bit pkt);
    @(posedge clk);
    raw_valid <= 1; raw_det <= DET_W'(k % 16); raw_data <= '{i: 16'((k % 16) * 2), q: 16'sd0};
    trig_valid <= pkt;
    trig_beat <= '0;
    trig_beat.det <= 9; trig_beat.data <= '{i: 16'sd77, q: 16'sd0};
    trig_beat.first <= (k % 6 == 0); trig_beat.last <= (k % 6 == 5);
  endtask

  initial begin
    trig_beat = '0; raw_data = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int k = 0; k < 12; k++) cycle(k, 1);       // two packages
    for (int k = 12; k < 15; k++) cycle(k, 1);      // start of a third
    sel <= 1;                                       // request raw mid-package
    for (int k = 15; k < 18; k++) cycle(k, 1);      // rest of the third package
    for (int k = 18; k < 38; k++) cycle(k, 0);      // raw phase
    sel <= 0;
    for (int k = 38; k < 44; k++) cycle(k, 0);
    for (int k = 0; k < 6; k++) cycle(k, 1);        // a fourth package
    @(posedge clk) begin raw_valid <= 0; trig_valid <= 0; end
    repeat (4) @(posedge clk);
    checks++;
    if (n_pkg != 24) begin failures++; $display("FAIL package beats %0d", n_pkg); end
    checks++;
    if (n_raw < 18 || n_raw > 27) begin failures++; $display("FAIL raw beats %0d", n_raw); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
