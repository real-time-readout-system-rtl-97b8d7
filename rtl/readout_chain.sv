// readout_chain: everything that serves one cryogenic line (one wafer).
//
// TX: the comb generator (normal readout) or the VNA tone (resonator
// search) is selected by the mode register and passes through the
// calibration mixer to the DAC. RX: the ADC samples pass the same mixer
// (down-mixing by the same frequency) and are routed either to the VNA or to
// the channelization stage. With the mixer enabled and the comb selected,
// all resonators are swept at once by changing the mixer frequency while the
// channelization stage stays configured as for the measurement.
// The line has its own configuration port (write-only registers and tables,
// address map in daq_pkg). Samples move at 250 MSps as a strobe (tick) in
// the 500 MHz clock; the ADC and DAC sample strobe is the same tick.
// The path switches and blocks follow the paper's firmware diagram; the
// register map, the reset values and the single shared tick are this
// design's choices.
module readout_chain
  import dsp_pkg::*;
  import daq_pkg::*;
#(
  parameter int COMB_DEPTH = 2500000,
  parameter int NCH        = 64,
  parameter int TAPS       = 8,
  parameter int NUM_TONES  = 128,
  parameter int DECIM      = 20
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         tick,
  // converters
  input  cplx_t                        adc_data,
  output cplx_t                        dac_data,
  // configuration (line-local address)
  input  logic                         cfg_we,
  input  logic [26:0]                  cfg_addr,
  input  logic [31:0]                  cfg_wdata,
  // VNA results
  output logic                         vna_busy,
  output logic                         vna_valid,
  output logic [15:0]                  vna_point,
  output cplx_t                        vna_data,
  // detector stream
  output logic                         det_valid,
  output logic [$clog2(NUM_TONES)-1:0] det_tone,
  output cplx_t                        det_data
);
  localparam int CA = $clog2(COMB_DEPTH);
  localparam int TW = $clog2(NUM_TONES);

  // ---------------- configuration decode ----------------
  logic [2:0]  region;
  logic [23:0] offs;
  assign region = cfg_addr[26:24];
  assign offs   = cfg_addr[23:0];

  logic        mode_vna, mix_en, comb_en;
  logic [31:0] mix_freq, vna_fstart, vna_fstep;
  logic [CA:0] comb_len;
  logic [TW:0] num_tones;
  logic [15:0] vna_npts, vna_settle, vna_amp;
  logic [4:0]  vna_avg;
  logic        vna_start;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      mode_vna   <= 1'b0;
      mix_en     <= 1'b0;
      comb_en    <= 1'b0;
      mix_freq   <= '0;
      comb_len   <= (CA+1)'(COMB_DEPTH);
      num_tones  <= '0;
      vna_fstart <= '0;
      vna_fstep  <= '0;
      vna_npts   <= '0;
      vna_settle <= '0;
      vna_avg    <= '0;
      vna_amp    <= '0;
      vna_start  <= 1'b0;
    end else begin
      vna_start <= 1'b0;
      if (cfg_we && region == REG_CTRL) begin
        case (offs[3:0])
          LREG_MODE:       {comb_en, mix_en, mode_vna} <= cfg_wdata[2:0];
          LREG_MIX_FREQ:   mix_freq   <= cfg_wdata;
          LREG_COMB_LEN:   comb_len   <= cfg_wdata[CA:0];
          LREG_NUM_TONES:  num_tones  <= cfg_wdata[TW:0];
          LREG_VNA_FSTART: vna_fstart <= cfg_wdata;
          LREG_VNA_FSTEP:  vna_fstep  <= cfg_wdata;
          LREG_VNA_NPTS:   vna_npts   <= cfg_wdata[15:0];
          LREG_VNA_SETTLE: vna_settle <= cfg_wdata[15:0];
          LREG_VNA_AVG:    vna_avg    <= cfg_wdata[4:0];
          LREG_VNA_AMP:    vna_amp    <= cfg_wdata[15:0];
          LREG_VNA_START:  vna_start  <= 1'b1;
          default: ;
        endcase
      end
    end
  end

  // ---------------- TX sources ----------------
  logic  comb_valid;
  cplx_t comb_data, vna_tx, tx_sel, rx_mixed;

  comb_generator #(.DEPTH(COMB_DEPTH)) u_comb (
    .clk, .rst_n,
    .wr_en(cfg_we && region == REG_COMB), .wr_addr(offs[CA-1:0]), .wr_data(cfg_wdata),
    .enable(comb_en), .len(comb_len), .tick,
    .out_valid(comb_valid), .out_data(comb_data));

  cplx_t vna_rx;
  vna u_vna (
    .clk, .rst_n, .tick, .start(vna_start),
    .f_start(vna_fstart), .f_step(vna_fstep), .npts(vna_npts), .settle(vna_settle),
    .avg_log2(vna_avg), .amp(vna_amp), .busy(vna_busy),
    .tx_out(vna_tx), .rx_in(vna_rx),
    .res_valid(vna_valid), .res_point(vna_point), .res_data(vna_data));

  // TX switch
  assign tx_sel = mode_vna ? vna_tx : comb_data;

  // ---------------- calibration mixer ----------------
  cal_mixer u_mix (
    .clk, .rst_n, .enable(mix_en), .freq_word(mix_freq), .tick,
    .tx_in(tx_sel), .tx_out(dac_data), .rx_in(adc_data), .rx_out(rx_mixed));

  // RX switch: the mixer output is valid one clock after the tick
  logic rx_valid;
  always_ff @(posedge clk) begin
    if (!rst_n) rx_valid <= 1'b0;
    else        rx_valid <= tick;
  end
  assign vna_rx = mode_vna ? rx_mixed : '0;

  // ---------------- channelization ----------------
  channelization_stage #(.NCH(NCH), .TAPS(TAPS), .NUM_TONES(NUM_TONES), .DECIM(DECIM)) u_chan (
    .clk, .rst_n,
    .in_valid(rx_valid && !mode_vna), .in_data(rx_mixed),
    .tab_we(cfg_we && region == REG_TONE), .tab_addr(offs[TW-1:0]),
    .tab_bin(cfg_wdata[$clog2(2*NCH)-1:0]), .num_tones,
    .ddc_we(cfg_we && (region == REG_DFREQ || region == REG_DPOFF)),
    .ddc_sel(region == REG_DPOFF), .ddc_tone(offs[TW-1:0]), .ddc_data(cfg_wdata),
    .out_valid(det_valid), .out_tone(det_tone), .out_data(det_data));

  logic unused;
  assign unused = comb_valid;
endmodule
