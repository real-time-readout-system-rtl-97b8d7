// daq_top: programmable-logic part of the BULLKID-DM style readout system.
//
// NUM_LINES readout chains (one per cryogenic line: stimulus comb, VNA,
// calibration mixer, channelization stage) deliver the decimated resonator
// signals; a stream combiner merges them into one time-multiplexed stream;
// one trigger evaluates all detectors and cuts packages around pulses; an
// AXI-Stream style switch selects triggered packages or raw samples; a DMA
// writer stores the beats in DDR4. The converters, the DDR4 controller and
// the processor are outside: their signals are ports.
//
// Clocking: one clock, 500 MHz in the intended system. The converters
// exchange one complex sample per line every second clock (adc_valid, the
// 250 MSps rate of the paper's converter configuration); the channel stream
// after interleaving and the trigger run at the full clock rate.
// Configuration: a write-only register port (cfg_we/cfg_addr/cfg_wdata,
// address map in daq_pkg), driven by the processor's bus bridge.
// The block structure and rates follow the paper; the single clock, the
// register map and the port list are this design's choices.
module daq_top
  import dsp_pkg::*;
  import daq_pkg::*;
#(
  parameter int NUM_LINES  = 16,
  parameter int COMB_DEPTH = 2500000,
  parameter int NCH        = 64,
  parameter int TAPS       = 8,
  parameter int NUM_TONES  = 128,
  parameter int DECIM      = 20,
  parameter int NUM_DET    = 2560,
  parameter int PKG_LEN    = 1024,
  parameter int PRE_LEN    = 128
) (
  input  logic          clk,
  input  logic          rst_n,
  // RF data converters (one complex stream per line, 250 MSps)
  input  logic          adc_valid,
  input  cplx_t         adc_data [NUM_LINES],
  output cplx_t         dac_data [NUM_LINES],
  // configuration from the processing system
  input  logic          cfg_we,
  input  logic [31:0]   cfg_addr,
  input  logic [31:0]   cfg_wdata,
  // VNA results per line
  output logic [NUM_LINES-1:0] vna_busy,
  output logic [NUM_LINES-1:0] vna_valid,
  output logic [15:0]   vna_point [NUM_LINES],
  output cplx_t         vna_data  [NUM_LINES],
  // DDR4 controller write port
  output logic          mem_we,
  output logic [31:0]   mem_addr,
  output logic [127:0]  mem_wdata,
  input  logic          mem_ready,
  // status
  output logic          dma_busy,
  output logic [31:0]   dma_count,
  output logic [31:0]   dma_wrapped,
  output logic [31:0]   dma_dropped,
  output logic [31:0]   trig_fires,
  output logic          comb_overflow
);
  localparam int TW = $clog2(NUM_TONES);

  // ---------------- global registers ----------------
  logic        g_we;
  logic [7:0]  g_idx;
  assign g_we  = cfg_we && cfg_addr[31];
  assign g_idx = cfg_addr[7:0];

  logic        trig_en, trig_use_q, trig_inv;
  trig_algo_e  trig_algo;
  logic [31:0] trig_thr;
  logic [3:0]  trig_k;
  logic [$clog2(PKG_LEN):0] pkg_len;
  logic        sw_sel, dma_start, dma_stop, dma_cont;
  logic [31:0] dma_base, dma_words, dma_time;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      trig_en    <= 1'b0;
      trig_algo  <= TRIG_DIFF;
      trig_use_q <= 1'b0;
      trig_inv   <= 1'b0;
      trig_thr   <= 32'sd1000;
      trig_k     <= 4'd6;
      pkg_len    <= ($clog2(PKG_LEN)+1)'(PKG_LEN);
      sw_sel     <= 1'b0;
      dma_start  <= 1'b0;
      dma_stop   <= 1'b0;
      dma_cont   <= 1'b0;
      dma_base   <= '0;
      dma_words  <= '0;
      dma_time   <= '0;
    end else begin
      dma_start <= 1'b0;
      dma_stop  <= 1'b0;
      if (g_we) begin
        case (g_idx)
          GREG_TRIG_CTRL: begin
            trig_en    <= cfg_wdata[0];
            trig_algo  <= trig_algo_e'(cfg_wdata[2:1]);
            trig_use_q <= cfg_wdata[3];
            trig_inv   <= cfg_wdata[4];
          end
          GREG_TRIG_THR:  trig_thr  <= cfg_wdata;
          GREG_TRIG_IIRK: trig_k    <= cfg_wdata[3:0];
          GREG_PKG_LEN:   pkg_len   <= (cfg_wdata > PKG_LEN) ? ($clog2(PKG_LEN)+1)'(PKG_LEN)
                                                             : cfg_wdata[$clog2(PKG_LEN):0];
          GREG_SW_SEL:    sw_sel    <= cfg_wdata[0];
          GREG_DMA_CTRL: begin
            dma_start <= cfg_wdata[0];
            dma_stop  <= cfg_wdata[1];
            dma_cont  <= cfg_wdata[2];
          end
          GREG_DMA_BASE:  dma_base  <= cfg_wdata;
          GREG_DMA_WORDS: dma_words <= cfg_wdata;
          GREG_DMA_TIME:  dma_time  <= cfg_wdata;
          default: ;
        endcase
      end
    end
  end

  // ---------------- readout lines ----------------
  logic [NUM_LINES-1:0] det_valid;
  logic [TW-1:0]        det_tone [NUM_LINES];
  cplx_t                det_data [NUM_LINES];

  for (genvar l = 0; l < NUM_LINES; l++) begin : g_line
    readout_chain #(
      .COMB_DEPTH(COMB_DEPTH), .NCH(NCH), .TAPS(TAPS),
      .NUM_TONES(NUM_TONES), .DECIM(DECIM)
    ) u_chain (
      .clk, .rst_n, .tick(adc_valid),
      .adc_data(adc_data[l]), .dac_data(dac_data[l]),
      .cfg_we(cfg_we && !cfg_addr[31] && cfg_addr[30:27] == 4'(l)),
      .cfg_addr(cfg_addr[26:0]), .cfg_wdata,
      .vna_busy(vna_busy[l]), .vna_valid(vna_valid[l]),
      .vna_point(vna_point[l]), .vna_data(vna_data[l]),
      .det_valid(det_valid[l]), .det_tone(det_tone[l]), .det_data(det_data[l]));
  end

  // ---------------- combine, trigger, store ----------------
  logic             c_valid;
  logic [DET_W-1:0] c_det;
  cplx_t            c_data;

  stream_combiner #(.NUM_LINES(NUM_LINES), .NUM_TONES(NUM_TONES),
                    .FIFO_DEPTH(NUM_TONES), .DET_W(DET_W)) u_comb (
    .clk, .rst_n, .in_valid(det_valid), .in_tone(det_tone), .in_data(det_data),
    .out_valid(c_valid), .out_det(c_det), .out_data(c_data), .overflow(comb_overflow));

  logic  t_valid;
  beat_t t_beat;

  trigger #(.NUM_DET(NUM_DET), .PKG_LEN(PKG_LEN), .PRE_LEN(PRE_LEN)) u_trig (
    .clk, .rst_n, .enable(trig_en), .algo(trig_algo), .use_q(trig_use_q),
    .invert(trig_inv), .threshold(trig_thr), .iir_k(trig_k), .pkg_len,
    .in_valid(c_valid), .in_det(c_det), .in_data(c_data),
    .out_valid(t_valid), .out_beat(t_beat), .fire_count(trig_fires));

  logic  s_valid;
  beat_t s_beat;

  axis_switch u_sw (
    .clk, .rst_n, .sel(sw_sel),
    .trig_valid(t_valid), .trig_beat(t_beat),
    .raw_valid(c_valid), .raw_det(c_det), .raw_data(c_data),
    .out_valid(s_valid), .out_beat(s_beat));

  dma_writer #(.ADDR_W(32)) u_dma (
    .clk, .rst_n, .start(dma_start), .stop(dma_stop), .continuous(dma_cont),
    .base(dma_base), .words(dma_words), .time_limit(dma_time),
    .in_valid(s_valid), .in_beat(s_beat),
    .mem_we, .mem_addr, .mem_wdata, .mem_ready,
    .busy(dma_busy), .count(dma_count), .wrapped(dma_wrapped), .dropped(dma_dropped));
endmodule
