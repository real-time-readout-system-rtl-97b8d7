`timescale 1ns/1ps
// tb_daq_full: one complete measurement on the design at its full default
// size (16 lines, 2,500,000-sample comb memories, 128 tone slots per line,
// 2560-detector trigger, 1024-beat package limit, 128 pre-trigger samples).
// Lines 0 and 15 replay a 256-sample comb (one tone at channel 5 of the
// filter bank) looped back from DAC to ADC; each reads it with tone 0.
// The test takes a raw snapshot (detectors 0 and 1920 at amplitude ~8000),
// then arms the difference trigger, removes the line-15 loop-back signal
// and checks that a 16-beat package of detector 1920 (line 15, tone 0),
// flagged first/last and starting with the pre-trigger samples at full
// amplitude, lands in DDR4, and that detector 0 stays quiet.
module tb_daq_full;
  import dsp_pkg::*;
  import daq_pkg::*;
  localparam int NL = 16;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic adc_valid = 0, cfg_we = 0, mem_we, mem_ready = 1;
  cplx_t adc_data [NL], dac_data [NL], vna_data [NL];
  logic [31:0] cfg_addr = 0, cfg_wdata = 0, mem_addr;
  logic [NL-1:0] vna_busy, vna_valid;
  logic [15:0] vna_point [NL];
  logic [127:0] mem_wdata;
  logic dma_busy, comb_overflow;
  logic [31:0] dma_count, dma_wrapped, dma_dropped, trig_fires;

  daq_top dut (.*);

  int gain [NL];
  always @(posedge clk) adc_valid <= ~adc_valid;
  always @(posedge clk)
    for (int l = 0; l < NL; l++) begin
      adc_data[l].i <= 16'((int'(dac_data[l].i) * gain[l]) / 256);
      adc_data[l].q <= 16'((int'(dac_data[l].q) * gain[l]) / 256);
    end

  beat_t ddr [int];
  always @(posedge clk) if (mem_we) ddr[int'(mem_addr)] = beat_t'(mem_wdata);

  initial begin
    #3000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  task automatic wr(logic [31:0] a, logic [31:0] d);
    @(posedge clk); cfg_we <= 1; cfg_addr <= a; cfg_wdata <= d;
    @(posedge clk); cfg_we <= 0;
  endtask
  function automatic logic [31:0] la(int line, logic [2:0] region, int offs);
    return {1'b0, 4'(line), region, 24'(offs)};
  endfunction
  function automatic logic [31:0] ga(logic [7:0] idx);
    return {1'b1, 23'd0, idx};
  endfunction
  function automatic real magn(cplx_t x);
    return $sqrt(real'(x.i) ** 2 + real'(x.q) ** 2);
  endfunction

  initial begin
    real a;
    beat_t bt;
    cplx_t d15;
    int n0, n15, pk_beats, pk_first, pk_last, other;
    bit use_q, inv, first_ok;
    for (int l = 0; l < NL; l++) begin adc_data[l] = '0; gain[l] = 256; end
    repeat (4) @(posedge clk);
    rst_n <= 1;
    for (int n = 0; n < 256; n++) begin
      a = 2.0 * 3.14159265358979 * 5.0 * n / 64.0;
      wr(la(0, REG_COMB, n), {16'($rtoi(8000.0 * $cos(a))), 16'($rtoi(8000.0 * $sin(a)))});
      wr(la(15, REG_COMB, n), {16'($rtoi(8000.0 * $cos(a))), 16'($rtoi(8000.0 * $sin(a)))});
    end
    foreach (gain[l]) begin
      if (l == 0 || l == 15) begin
        wr(la(l, REG_CTRL, LREG_COMB_LEN), 256);
        wr(la(l, REG_DFREQ, 0), 0);
        wr(la(l, REG_DPOFF, 0), 0);
        wr(la(l, REG_TONE, 0), 10);
        wr(la(l, REG_CTRL, LREG_NUM_TONES), 1);
        wr(la(l, REG_CTRL, LREG_MODE), 3'b100);
      end
    end
    repeat (2560 * 6) @(posedge clk);
    // raw snapshot
    wr(ga(GREG_SW_SEL), 1);
    wr(ga(GREG_DMA_BASE), 0);
    wr(ga(GREG_DMA_WORDS), 8);
    wr(ga(GREG_DMA_CTRL), 1);
    repeat (4) @(posedge clk);
    while (dma_busy) @(posedge clk);
    repeat (3) @(posedge clk);
    n0 = 0; n15 = 0;
    for (int k = 0; k < 8; k++) begin
      bt = ddr[k];
      chk(bt.raw && magn(bt.data) > 7600 && magn(bt.data) < 8400, "raw amplitude");
      if (bt.det == 0) n0++;
      else if (bt.det == 1920) begin n15++; d15 = bt.data; end
    end
    chk(n0 == 4 && n15 == 4, "raw detectors 0 and 1920");
    // trigger
    use_q = (d15.q < 0 ? -d15.q : d15.q) > (d15.i < 0 ? -d15.i : d15.i);
    inv   = use_q ? (d15.q > 0) : (d15.i > 0);
    wr(ga(GREG_SW_SEL), 0);
    wr(ga(GREG_DMA_BASE), 100);
    wr(ga(GREG_DMA_WORDS), 1000);
    wr(ga(GREG_DMA_CTRL), 3'b101);
    wr(ga(GREG_PKG_LEN), 16);
    wr(ga(GREG_TRIG_THR), 2000);
    wr(ga(GREG_TRIG_CTRL), {27'd0, inv, use_q, TRIG_DIFF, 1'b1});
    // the trigger arms after PRE_LEN + 4 samples per detector
    repeat (2560 * 134) @(posedge clk);
    chk(trig_fires == 0, "quiet before the pulse");
    gain[15] = 0;
    pk_beats = 0; pk_first = 0; pk_last = 0; other = 0; first_ok = 0;
    for (int c = 0; c < 2560 * 22; c++) begin
      @(posedge clk);
      if (mem_we) begin
        bt = beat_t'(mem_wdata);
        if (bt.det == 1920) begin
          pk_beats++;
          if (bt.first) begin
            pk_first++;
            first_ok = magn(bt.data) > 7600 && magn(bt.data) < 8400;
          end
          if (bt.last) pk_last++;
        end else other++;
      end
    end
    chk(pk_beats == 16 && pk_first == 1 && pk_last == 1, "package of detector 1920");
    chk(first_ok, "pre-trigger sample at full amplitude");
    chk(other == 0, "no other packages");
    chk(!comb_overflow && dma_dropped == 0, "no overflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
