`timescale 1ns/1ps
// tb_channelization_stage: the ADC stream holds two tones, amplitude 6000
// at the centre of filter-bank channel 5 (5 * 3.90625 MHz, merged
// channel 10) and amplitude 4000 half a channel higher (merged channel 11, visible only
// through the shifted filter bank). The tone table is {10, 11, 10, 30}:
//   tone 0 must carry |x| = 6000 and tone 1 |x| = 4000 (+-4 %);
//   tone 2 duplicates channel 10 with a 90 degree phase offset and must
//   equal tone 0 rotated by -90 degrees;
//   tone 3 points at an empty channel and must stay below 2 % of 6000.
// Each tone must deliver one sample every 2560 clocks (195.3125 kSps at
// 500 MHz).
module tb_channelization_stage;
  import dsp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid = 0, tab_we = 0, ddc_we = 0, ddc_sel = 0, out_valid;
  cplx_t in_data, out_data;
  logic [1:0] tab_addr = 0, ddc_tone = 0, out_tone;
  logic [6:0] tab_bin = 0;
  logic [2:0] num_tones = 4;
  logic [31:0] ddc_data = 0;

  channelization_stage #(.NCH(64), .TAPS(8), .NUM_TONES(4), .DECIM(20)) dut (.*);

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  longint cyc = 0;
  always @(posedge clk) cyc++;

  int outs [4];
  longint last_cyc [4];
  cplx_t t0;
  always @(posedge clk) if (rst_n && out_valid) begin
    real mag;
    mag = $sqrt(real'(out_data.i) ** 2 + real'(out_data.q) ** 2);
    if (outs[out_tone] > 0) begin
      checks++;
      if (cyc - last_cyc[out_tone] != 2560) begin
        failures++; $display("FAIL tone %0d period %0d", out_tone, cyc - last_cyc[out_tone]);
      end
    end
    last_cyc[out_tone] = cyc;
    if (outs[out_tone] >= 2) begin
      checks++;
      case (out_tone)
        0: if (mag < 5760 || mag > 6240) begin failures++; $display("FAIL tone 0 mag %0.1f", mag); end
        1: if (mag < 3840 || mag > 4160) begin failures++; $display("FAIL tone 1 mag %0.1f", mag); end
        2: if ((out_data.i - t0.q) > 30 || (out_data.i - t0.q) < -30 ||
               (out_data.q + t0.i) > 30 || (out_data.q + t0.i) < -30) begin
             failures++; $display("FAIL rotation %0d %0d vs %0d %0d", out_data.i, out_data.q, t0.i, t0.q);
           end
        default: if (mag > 120) begin failures++; $display("FAIL empty channel mag %0.1f", mag); end
      endcase
    end
    if (out_tone == 0) t0 = out_data;
    outs[out_tone]++;
  end

  int bin_tab [4] = '{10, 11, 10, 30};
  initial begin
    real a, b;
    in_data = '0; t0 = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int t = 0; t < 4; t++) begin
      @(posedge clk); tab_we <= 1; tab_addr <= 2'(t); tab_bin <= 7'(bin_tab[t]);
      ddc_we <= 1; ddc_sel <= 1; ddc_tone <= 2'(t); ddc_data <= (t == 2) ? 32'h4000_0000 : 0;
      @(posedge clk); tab_we <= 0; ddc_sel <= 0; ddc_data <= 0;
    end
    @(posedge clk); ddc_we <= 0;
    for (int n = 0; n < 64 * 20 * 7; n++) begin
      a = 2.0 * 3.14159265358979 * 5.0 * n / 64.0;
      b = 2.0 * 3.14159265358979 * 5.5 * n / 64.0;
      @(posedge clk);
      in_valid <= 1;
      in_data.i <= 16'($rtoi(6000.0 * $cos(a) + 4000.0 * $cos(b)));
      in_data.q <= 16'($rtoi(6000.0 * $sin(a) + 4000.0 * $sin(b)));
      @(posedge clk) in_valid <= 0;
    end
    repeat (200) @(posedge clk);
    for (int t = 0; t < 4; t++) begin
      checks++;
      if (outs[t] < 6) begin failures++; $display("FAIL tone %0d outputs %0d", t, outs[t]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
