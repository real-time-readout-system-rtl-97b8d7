// daq_pkg: system-level types and the configuration address map.
//
// Storage beat. Everything written to DDR4 is a 128-bit beat: one detector
// sample (16-bit I and Q) with its detector number, a 48-bit timestamp
// (clock cycles) and flags. Triggered packages are runs of beats of one
// detector from a beat flagged `first` (which carries the trigger type) to a
// beat flagged `last`; beats of different detectors interleave because all
// detectors are processed in time-division multiplex. Raw acquisition
// stores every detector sample with `raw` set.
//
// Configuration address map (32-bit word addresses from the processor):
//   addr[31] = 1 : global registers, index addr[7:0] (GREG_*)
//   addr[31] = 0 : readout line addr[30:27]; region addr[26:24] (REG_*);
//                  offset addr[23:0]
// Beat layout, timestamp unit and address map are this design's choices;
// the paper states only that packages carry pre-trigger samples, the
// detector index, a timestamp and the trigger type, and that the host
// configures the modules over AXI.
package daq_pkg;
  import dsp_pkg::*;

  localparam int DET_W = 12;   // up to 4096 detector numbers (2560 used)
  localparam int TS_W  = 48;

  typedef enum logic [1:0] {
    TRIG_DIFF = 2'd0,          // difference of two successive samples
    TRIG_MA   = 2'd1,          // moving-average filter
    TRIG_IIR  = 2'd2           // IIR (exponential) baseline filter
  } trig_algo_e;

  typedef struct packed {
    logic [25:0]      pad;
    logic             raw;
    logic             first;
    logic             last;
    trig_algo_e       algo;
    logic [DET_W-1:0] det;
    logic [TS_W-1:0]  ts;
    logic [4:0]       rsv;
    cplx_t            data;
  } beat_t;                    // 128 bits

  // regions inside a readout line
  localparam logic [2:0] REG_CTRL  = 3'd0;
  localparam logic [2:0] REG_COMB  = 3'd1;   // comb sample memory
  localparam logic [2:0] REG_TONE  = 3'd2;   // tone table: channel number
  localparam logic [2:0] REG_DFREQ = 3'd3;   // DDC frequency word per tone
  localparam logic [2:0] REG_DPOFF = 3'd4;   // DDC phase offset per tone

  // control registers of a readout line (region REG_CTRL, offset)
  localparam logic [3:0] LREG_MODE      = 4'd0;  // b0 VNA path, b1 mixer on, b2 comb on
  localparam logic [3:0] LREG_MIX_FREQ  = 4'd1;
  localparam logic [3:0] LREG_COMB_LEN  = 4'd2;
  localparam logic [3:0] LREG_NUM_TONES = 4'd3;
  localparam logic [3:0] LREG_VNA_FSTART= 4'd4;
  localparam logic [3:0] LREG_VNA_FSTEP = 4'd5;
  localparam logic [3:0] LREG_VNA_NPTS  = 4'd6;
  localparam logic [3:0] LREG_VNA_SETTLE= 4'd7;
  localparam logic [3:0] LREG_VNA_AVG   = 4'd8;  // log2 of integration length
  localparam logic [3:0] LREG_VNA_AMP   = 4'd9;
  localparam logic [3:0] LREG_VNA_START = 4'd10; // write: start a sweep

  // global registers
  localparam logic [7:0] GREG_TRIG_CTRL = 8'd0;  // b0 enable, b2:1 algo, b3 use Q, b4 invert
  localparam logic [7:0] GREG_TRIG_THR  = 8'd1;
  localparam logic [7:0] GREG_TRIG_IIRK = 8'd2;
  localparam logic [7:0] GREG_PKG_LEN   = 8'd3;
  localparam logic [7:0] GREG_SW_SEL    = 8'd4;  // 0 triggered packages, 1 raw data
  localparam logic [7:0] GREG_DMA_CTRL  = 8'd5;  // b0 start, b1 stop, b2 continuous
  localparam logic [7:0] GREG_DMA_BASE  = 8'd6;
  localparam logic [7:0] GREG_DMA_WORDS = 8'd7;  // snapshot length / ring size
  localparam logic [7:0] GREG_DMA_TIME  = 8'd8;  // snapshot time limit in clocks
endpackage
