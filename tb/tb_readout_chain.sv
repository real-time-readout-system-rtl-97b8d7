`timescale 1ns/1ps
// tb_readout_chain: one line with the DAC looped back to the ADC.
//  1. Readout: the comb memory (256 samples) holds a tone at 5 channel
//     spacings (20 periods in 256 samples); tone 0 of the table points at
//     merged channel 10 and must read back |x| = 8000 (+-5 %).
//  2. Calibration sweep: the mixer is switched on at +1/64 of the sample
//     rate; because the same mixer moves the comb up on TX and down on RX,
//     tone 0 must still read |x| = 8000.
//  3. VNA: a 3-point sweep with amplitude 10000 through the loop-back must
//     report |S21 * amp| = 10000 (+-3 %) at every point.
module tb_readout_chain;
  import dsp_pkg::*;
  import daq_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  logic tick = 0, cfg_we = 0;
  logic [26:0] cfg_addr = 0;
  logic [31:0] cfg_wdata = 0;
  cplx_t adc_data, dac_data, vna_data, det_data;
  logic vna_busy, vna_valid, det_valid;
  logic [15:0] vna_point;
  logic [1:0] det_tone;

  readout_chain #(.COMB_DEPTH(256), .NUM_TONES(4)) dut (.*);

  always @(posedge clk) adc_data <= dac_data;   // loop-back
  always @(posedge clk) tick <= ~tick;

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic wr(logic [2:0] region, int offs, logic [31:0] d);
    @(posedge clk); cfg_we <= 1; cfg_addr <= {region, 24'(offs)}; cfg_wdata <= d;
    @(posedge clk); cfg_we <= 0;
  endtask

  int phase_no = 0, n_det [3], n_vna = 0;
  always @(posedge clk) if (rst_n && det_valid && det_tone == 0) begin
    real mag;
    mag = $sqrt(real'(det_data.i) ** 2 + real'(det_data.q) ** 2);
    n_det[phase_no]++;
    if (n_det[phase_no] > 3) begin
      checks++;
      if (mag < 7600 || mag > 8400) begin failures++; $display("FAIL phase %0d tone mag %0.1f", phase_no, mag); end
    end
  end
  always @(posedge clk) if (rst_n && vna_valid) begin
    real mag;
    mag = $sqrt(real'(vna_data.i) ** 2 + real'(vna_data.q) ** 2);
    checks++;
    if (vna_point != 16'(n_vna) || mag < 9700 || mag > 10300) begin
      failures++; $display("FAIL vna point %0d mag %0.1f", vna_point, mag);
    end
    n_vna++;
  end

  initial begin
    real a;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int n = 0; n < 256; n++) begin
      a = 2.0 * 3.14159265358979 * 5.0 * n / 64.0;
      wr(REG_COMB, n, {16'($rtoi(8000.0 * $cos(a))), 16'($rtoi(8000.0 * $sin(a)))});
    end
    wr(REG_CTRL, LREG_COMB_LEN, 256);
    wr(REG_TONE, 0, 10);
    wr(REG_DFREQ, 0, 0);
    wr(REG_DPOFF, 0, 0);
    wr(REG_CTRL, LREG_NUM_TONES, 1);
    wr(REG_CTRL, LREG_MODE, 3'b100);            // comb on, mixer off, readout path
    repeat (2560 * 8) @(posedge clk);
    phase_no = 1;
    wr(REG_CTRL, LREG_MIX_FREQ, 32'h0400_0000);
    wr(REG_CTRL, LREG_MODE, 3'b110);            // comb on, mixer on
    repeat (2560 * 8) @(posedge clk);
    phase_no = 2;
    wr(REG_CTRL, LREG_MODE, 3'b001);            // VNA path, mixer off
    wr(REG_CTRL, LREG_VNA_FSTART, 32'h0100_0000);
    wr(REG_CTRL, LREG_VNA_FSTEP, 32'h0200_0000);
    wr(REG_CTRL, LREG_VNA_NPTS, 3);
    wr(REG_CTRL, LREG_VNA_SETTLE, 16);
    wr(REG_CTRL, LREG_VNA_AVG, 6);
    wr(REG_CTRL, LREG_VNA_AMP, 10000);
    wr(REG_CTRL, LREG_VNA_START, 1);
    repeat (4) @(posedge clk);
    while (vna_busy) @(posedge clk);
    repeat (4) @(posedge clk);
    checks++;
    if (n_det[0] < 6 || n_det[1] < 6 || n_vna != 3) begin
      failures++; $display("FAIL counts det %0d %0d vna %0d", n_det[0], n_det[1], n_vna);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
