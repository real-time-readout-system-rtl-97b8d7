`timescale 1ns/1ps
// tb_dma_writer: a snapshot of 5 words must store beats 0..4 at base..base+4
// and stop; a continuous run into a ring of 4 words must keep writing until
// stop, wrapping (10 beats -> 2 wraps, last beats at the right slots); a
// beat meeting mem_ready low is counted as dropped; a snapshot with a time
// limit ends after that many clocks.
module tb_dma_writer;
  import dsp_pkg::*;
  import daq_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  logic start = 0, stop = 0, continuous = 0, in_valid = 0, mem_we, mem_ready = 1, busy;
  logic [31:0] base = 32'h100, words = 5, time_limit = 0, count, wrapped, dropped, mem_addr;
  logic [127:0] mem_wdata;
  beat_t in_beat;
  logic [127:0] mem [int];

  dma_writer dut (.*);

  always @(posedge clk) if (mem_we) mem[mem_addr] = mem_wdata;

  initial begin
    #20000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic send(int n0, int n);
    for (int k = n0; k < n0 + n; k++) begin
      @(posedge clk); in_valid <= 1; in_beat <= '0; in_beat.det <= DET_W'(k);
    end
    @(posedge clk) in_valid <= 0;
    repeat (2) @(posedge clk);
  endtask

  function automatic int det_at(logic [31:0] a);
    beat_t b;
    b = beat_t'(mem[a]);
    return int'(b.det);
  endfunction

  initial begin
    in_beat = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    // snapshot
    @(posedge clk) start <= 1;
    @(posedge clk) start <= 0;
    send(0, 8);
    chk(!busy && count == 5, "snapshot stop");
    for (int k = 0; k < 5; k++) chk(det_at(32'h100 + k) == k, "snapshot data");
    chk(!mem.exists(32'h105), "snapshot overrun");
    // continuous ring of 4
    base <= 32'h200; words <= 4; continuous <= 1;
    @(posedge clk) start <= 1;
    @(posedge clk) start <= 0;
    send(20, 10);
    chk(busy && wrapped == 2 && count == 10, "continuous running");
    chk(det_at(32'h200) == 28 && det_at(32'h201) == 29 && det_at(32'h202) == 26, "ring data");
    mem_ready <= 0;
    send(40, 3);
    mem_ready <= 1;
    chk(dropped == 3, "dropped count");
    @(posedge clk) stop <= 1;
    @(posedge clk) stop <= 0;
    @(posedge clk);
    chk(!busy, "stopped");
    // time-limited snapshot
    continuous <= 0; words <= 1000; time_limit <= 6;
    @(posedge clk) start <= 1;
    @(posedge clk) start <= 0;
    repeat (10) @(posedge clk);
    chk(!busy, "time limit");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
