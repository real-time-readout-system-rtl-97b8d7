`timescale 1ns/1ps
// tb_daq_top: end-to-end run of the readout system with two lines, four
// tone slots per line, 16-beat packages with 4 pre-trigger samples; all
// other sizes (64-channel filter banks, 8 taps, decimation 20) at default.
// Each line's DAC output is looped back to its ADC through a gain that the
// test can change (a stand-in for a resonator response).
//   line 0: comb tone at channel 5 (merged channel 10), read by tone 0 and,
//           duplicated with a 90 degree phase offset, by tone 1 (dets 0, 1)
//   line 1: comb tone half a channel higher (merged channel 11), tone 0
//           (det 4)
// Steps and the mechanisms they must show:
//   1. raw acquisition: snapshot of 60 raw beats into DDR; dets 0, 1, 4 at
//      amplitude ~8000, det 1 = det 0 rotated by -90 degrees
//   2. trigger: continuous DMA into a ring, difference trigger on the
//      component of det 4 that the raw data showed to be largest; the
//      line-1 loop gain drops to zero -> exactly one package of det 4
//      (16 beats, first/last flags, trigger type), none for dets 0, 1
//   3. continuous DMA wraps the ring and stops on request
//   4. VNA sweep on line 0 through the loop-back, 4 points of |S21| ~ 1
//   5. calibration mixer on line 1: tone still read at full amplitude
module tb_daq_top;
  import dsp_pkg::*;
  import daq_pkg::*;
  localparam int NL = 2;
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

  daq_top #(.NUM_LINES(NL), .COMB_DEPTH(256), .NUM_TONES(4), .NUM_DET(8),
            .PKG_LEN(16), .PRE_LEN(4)) dut (.*);

  // converter loop-back with per-line gain (in 1/256)
  int gain [NL] = '{256, 256};
  always @(posedge clk) adc_valid <= ~adc_valid;
  always @(posedge clk)
    for (int l = 0; l < NL; l++) begin
      adc_data[l].i <= 16'((int'(dac_data[l].i) * gain[l]) / 256);
      adc_data[l].q <= 16'((int'(dac_data[l].q) * gain[l]) / 256);
    end

  // DDR4 stand-in
  beat_t ddr [int];
  always @(posedge clk) if (mem_we) ddr[int'(mem_addr)] = beat_t'(mem_wdata);

  initial begin
    #4000000; failures++;
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

  // mechanism counters
  int n_raw = 0, n_pkg = 0, n_wrap = 0, n_vna = 0, n_dup = 0, n_mix = 0, n_snap = 0;

  int vna_pts = 0;
  always @(posedge clk) if (rst_n && vna_valid[0]) begin
    real mag;
    mag = $sqrt(real'(vna_data[0].i) ** 2 + real'(vna_data[0].q) ** 2);
    chk(mag > 9600 && mag < 10400, "VNA |S21|");
    vna_pts++;
  end

  function automatic real magn(cplx_t x);
    return $sqrt(real'(x.i) ** 2 + real'(x.q) ** 2);
  endfunction

  initial begin
    real a, b;
    beat_t bt;
    cplx_t d0, d1, d4;
    int n0, n1, n4, pk_beats, pk_first, pk_last, other, first_at;
    bit use_q, inv;
    for (int l = 0; l < NL; l++) adc_data[l] = '0;
    repeat (4) @(posedge clk);
    rst_n <= 1;
    // ---- configuration ----
    for (int n = 0; n < 256; n++) begin
      a = 2.0 * 3.14159265358979 * 5.0 * n / 64.0;
      b = 2.0 * 3.14159265358979 * 5.5 * n / 64.0;
      wr(la(0, REG_COMB, n), {16'($rtoi(8000.0 * $cos(a))), 16'($rtoi(8000.0 * $sin(a)))});
      wr(la(1, REG_COMB, n), {16'($rtoi(8000.0 * $cos(b))), 16'($rtoi(8000.0 * $sin(b)))});
    end
    for (int l = 0; l < NL; l++) begin
      wr(la(l, REG_CTRL, LREG_COMB_LEN), 256);
      for (int t = 0; t < 4; t++) begin
        wr(la(l, REG_DFREQ, t), 0);
        wr(la(l, REG_DPOFF, t), (l == 0 && t == 1) ? 32'h4000_0000 : 0);
      end
      wr(la(l, REG_CTRL, LREG_MODE), 3'b100);
    end
    wr(la(0, REG_TONE, 0), 10);
    wr(la(0, REG_TONE, 1), 10);
    wr(la(0, REG_CTRL, LREG_NUM_TONES), 2);
    wr(la(1, REG_TONE, 0), 11);
    wr(la(1, REG_CTRL, LREG_NUM_TONES), 1);
    repeat (2560 * 8) @(posedge clk);

    // ---- 1. raw snapshot ----
    wr(ga(GREG_SW_SEL), 1);
    wr(ga(GREG_DMA_BASE), 0);
    wr(ga(GREG_DMA_WORDS), 60);
    wr(ga(GREG_DMA_CTRL), 1);
    repeat (4) @(posedge clk);
    while (dma_busy) @(posedge clk);
    repeat (3) @(posedge clk);
    chk(dma_count == 60, "snapshot length");
    if (dma_count == 60) n_snap++;
    n0 = 0; n1 = 0; n4 = 0;
    for (int k = 0; k < 60; k++) begin
      bt = ddr[k];
      chk(bt.raw, "raw flag");
      if (bt.raw) n_raw++;
      case (bt.det)
        0: begin d0 = bt.data; n0++; end
        1: begin d1 = bt.data; n1++;
             chk(magn(bt.data) > 7600 && magn(bt.data) < 8400, "det 1 amplitude");
             // det 1 is det 0 rotated by -90 degrees: (i, q) -> (q, -i)
             chk((d1.i - d0.q) < 40 && (d1.i - d0.q) > -40 && (d1.q + d0.i) < 40 && (d1.q + d0.i) > -40,
                 "duplicated tone rotation");
             n_dup++;
           end
        4: begin d4 = bt.data; n4++; end
        default: begin chk(0, "unexpected raw detector"); $display("det %0d at %0d", bt.det, k); end
      endcase
    end
    chk(n0 == 20 && n1 == 20 && n4 == 20, "raw detector counts");
    chk(magn(d0) > 7600 && magn(d0) < 8400, "det 0 amplitude");
    chk(magn(d4) > 7600 && magn(d4) < 8400, "det 4 amplitude");

    // ---- 2. trigger with continuous ring ----
    use_q = (d4.q < 0 ? -d4.q : d4.q) > (d4.i < 0 ? -d4.i : d4.i);
    inv   = use_q ? (d4.q > 0) : (d4.i > 0);    // a drop to zero must give a positive step
    wr(ga(GREG_SW_SEL), 0);
    wr(ga(GREG_DMA_BASE), 1000);
    wr(ga(GREG_DMA_WORDS), 10);
    wr(ga(GREG_DMA_CTRL), 3'b101);
    wr(ga(GREG_PKG_LEN), 16);
    wr(ga(GREG_TRIG_THR), 2000);
    wr(ga(GREG_TRIG_CTRL), {27'd0, inv, use_q, TRIG_DIFF, 1'b1});
    repeat (2560 * 10) @(posedge clk);
    chk(trig_fires == 0, "no trigger before the pulse");
    gain[1] = 0;
    pk_beats = 0; pk_first = 0; pk_last = 0; other = 0;
    for (int c = 0; c < 2560 * 24; c++) begin
      @(posedge clk);
      if (mem_we) begin
        bt = beat_t'(mem_wdata);
        if (bt.det == 4) begin
          pk_beats++;
          if (bt.first) begin pk_first++; chk(bt.algo == TRIG_DIFF, "trigger type"); end
          if (bt.last) pk_last++;
        end else other++;
      end
    end
    chk(pk_beats == 16 && pk_first == 1 && pk_last == 1, "det 4 package");
    chk(other == 0, "no packages of quiet detectors");
    if (pk_first == 1 && pk_last == 1) n_pkg++;
    // ---- 3. continuous ring wrapped, then stop ----
    chk(dma_wrapped == 1 && dma_busy, "continuous ring wrapped");
    if (dma_wrapped >= 1) n_wrap++;
    wr(ga(GREG_DMA_CTRL), 3'b010);
    repeat (2) @(posedge clk);
    chk(!dma_busy, "continuous stop");
    gain[1] = 256;

    // ---- 4. VNA on line 0 ----
    wr(la(0, REG_CTRL, LREG_MODE), 3'b001);
    wr(la(0, REG_CTRL, LREG_VNA_FSTART), 32'h0100_0000);
    wr(la(0, REG_CTRL, LREG_VNA_FSTEP), 32'h0100_0000);
    wr(la(0, REG_CTRL, LREG_VNA_NPTS), 4);
    wr(la(0, REG_CTRL, LREG_VNA_SETTLE), 16);
    wr(la(0, REG_CTRL, LREG_VNA_AVG), 5);
    wr(la(0, REG_CTRL, LREG_VNA_AMP), 10000);
    wr(la(0, REG_CTRL, LREG_VNA_START), 1);
    repeat (4) @(posedge clk);
    while (vna_busy[0]) @(posedge clk);
    repeat (2) @(posedge clk);
    chk(vna_pts == 4, "VNA points");
    if (vna_pts == 4) n_vna++;

    // ---- 5. calibration mixer on line 1, raw snapshot of det 4 ----
    wr(la(1, REG_CTRL, LREG_MIX_FREQ), 32'h0200_0000);
    wr(la(1, REG_CTRL, LREG_MODE), 3'b110);
    repeat (2560 * 6) @(posedge clk);
    wr(ga(GREG_SW_SEL), 1);
    wr(ga(GREG_DMA_BASE), 2000);
    wr(ga(GREG_DMA_WORDS), 12);
    wr(ga(GREG_DMA_CTRL), 1);
    repeat (4) @(posedge clk);
    while (dma_busy) @(posedge clk);
    repeat (3) @(posedge clk);
    for (int k = 2000; k < 2012; k++) begin
      bt = ddr[k];
      if (bt.det == 4) begin
        chk(magn(bt.data) > 7600 && magn(bt.data) < 8400, "mixer sweep keeps amplitude");
        n_mix++;
      end
    end

    // ---- mechanism coverage ----
    chk(n_raw > 0,  "raw acquisition happened");
    chk(n_snap > 0, "snapshot happened");
    chk(n_dup > 0,  "duplicated channel happened");
    chk(n_pkg > 0,  "triggered package happened");
    chk(n_wrap > 0, "continuous wrap happened");
    chk(n_vna > 0,  "VNA sweep happened");
    chk(n_mix > 0,  "calibration mixer sweep happened");
    chk(!comb_overflow && dma_dropped == 0, "no overflow or drop");
    $display("mechanisms: raw=%0d snapshot=%0d dup=%0d package=%0d wrap=%0d vna=%0d mixer=%0d",
             n_raw, n_snap, n_dup, n_pkg, n_wrap, n_vna, n_mix);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
