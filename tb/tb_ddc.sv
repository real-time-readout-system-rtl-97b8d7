`timescale 1ns/1ps
// tb_ddc: four tones, one sample each per frame.
//   tone 0: constant (1000, 0), NCO off        -> (1000, 0) (unity DC gain)
//   tone 1: phasor at +1/32 cycle per sample, NCO at the same frequency
//           -> constant of magnitude 1000
//   tone 2: constant (1000, 0), phase offset 90 degrees -> (0, -1000)
//   tone 3: phasor at 1/4 cycle per sample, far outside the 100 kHz band
//           -> suppressed below 3 %
// It also checks that each tone yields exactly one output per 20 frames.
module tb_ddc;
  import dsp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  logic cfg_we = 0, cfg_sel = 0, in_valid = 0, in_last = 0, out_valid;
  logic [1:0] cfg_tone = 0, in_tone = 0, out_tone;
  logic [31:0] cfg_data = 0;
  cplx_t in_data, out_data;

  ddc #(.NUM_TONES(4), .DECIM(20)) dut (.*);

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int frame = 0, outs [4] = '{0, 0, 0, 0}, last_frame [4] = '{-1, -1, -1, -1};
  always @(posedge clk) if (rst_n && out_valid) begin
    real mi, mq, mag;
    mi = real'(out_data.i); mq = real'(out_data.q);
    mag = $sqrt(mi * mi + mq * mq);
    if (last_frame[out_tone] >= 0) begin
      checks++;
      if (frame - last_frame[out_tone] != 20) begin
        failures++; $display("FAIL tone %0d period %0d", out_tone, frame - last_frame[out_tone]);
      end
    end
    last_frame[out_tone] = frame;
    if (outs[out_tone] >= 2) begin
      checks++;
      case (out_tone)
        0: if (mi < 990 || mi > 1010 || mq > 10 || mq < -10) begin failures++; $display("FAIL t0 %0d %0d", out_data.i, out_data.q); end
        1: if (mag < 980 || mag > 1020) begin failures++; $display("FAIL t1 mag %0.1f", mag); end
        2: if (mq > -990 || mq < -1010 || mi > 10 || mi < -10) begin failures++; $display("FAIL t2 %0d %0d", out_data.i, out_data.q); end
        default: if (mag > 30) begin failures++; $display("FAIL t3 mag %0.1f", mag); end
      endcase
    end
    outs[out_tone]++;
  end

  task automatic cfg(bit sel, int t, logic [31:0] d);
    @(posedge clk); cfg_we <= 1; cfg_sel <= sel; cfg_tone <= 2'(t); cfg_data <= d;
  endtask

  initial begin
    real a;
    in_data = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    cfg(0, 0, 0); cfg(1, 0, 0);
    cfg(0, 1, 32'h0800_0000); cfg(1, 1, 0);
    cfg(0, 2, 0); cfg(1, 2, 32'h4000_0000);
    cfg(0, 3, 0); cfg(1, 3, 0);
    @(posedge clk); cfg_we <= 0;
    for (int f = 0; f < 20 * 8; f++) begin
      for (int t = 0; t < 4; t++) begin
        @(posedge clk);
        in_valid <= 1; in_tone <= 2'(t); in_last <= (t == 3);
        case (t)
          1: begin a = 2.0 * 3.14159265358979 * f / 32.0;
                   in_data <= '{i: 16'($rtoi(1000.0 * $cos(a))), q: 16'($rtoi(1000.0 * $sin(a)))}; end
          3: begin a = 2.0 * 3.14159265358979 * f / 4.0;
                   in_data <= '{i: 16'($rtoi(1000.0 * $cos(a))), q: 16'($rtoi(1000.0 * $sin(a)))}; end
          default: in_data <= '{i: 16'sd1000, q: 16'sd0};
        endcase
      end
      @(posedge clk); in_valid <= 0;
      repeat (3) @(posedge clk);
      frame++;
    end
    repeat (5) @(posedge clk);
    for (int t = 0; t < 4; t++) begin
      checks++;
      if (outs[t] != 8) begin failures++; $display("FAIL tone %0d outputs %0d", t, outs[t]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
