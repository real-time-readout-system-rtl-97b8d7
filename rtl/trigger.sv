// trigger: online pulse trigger shared by all detectors of all lines.
//
// The input is the time-multiplexed stream of up to NUM_DET detectors (one
// sample per clock; at 500 MHz and 195.3125 kSps per detector this is the
// paper's 2560 detectors). One component of the complex sample (I or Q,
// after the DDC's phase rotation) is optionally inverted and fed to the
// selected algorithm, each keeping per-detector state in memories:
//   TRIG_DIFF : s = x[n] - x[n-1]                   (two successive samples)
//   TRIG_MA   : s = (x[n] - x[n-MA_LEN]) / MA_LEN    (step of a moving average)
//   TRIG_IIR  : s = x[n] - b[n-1], b += (x - b)/2^k  (exponential baseline)
// The detector fires when s > threshold, it is not already recording, and it
// has seen PRE_LEN samples since reset. Pre-trigger samples come from a
// per-detector delay line of PRE_LEN samples: from the firing sample on, the
// delayed samples x[n-PRE_LEN] ... of that detector are emitted for pkg_len
// (<= PKG_LEN = 1024) samples, so each package holds PRE_LEN pre-trigger
// samples. The first beat carries the trigger type and the timestamp of
// the firing sample, the last beat is flagged. Every detector is evaluated
// on every sample, also while it records, so there is no dead time; beats of
// different detectors interleave. Output one clock after input.
// The paper gives the three algorithm families, the 1024-sample package with
// pre-trigger samples and metadata, and the 2560-detector capacity; the
// exact filter formulas, MA_LEN, PRE_LEN and the delay-line method are this
// design's choices.
module trigger
  import dsp_pkg::*;
  import daq_pkg::*;
#(
  parameter int NUM_DET = 2560,
  parameter int PKG_LEN = 1024,
  parameter int PRE_LEN = 128,
  parameter int MA_LEN  = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  // configuration
  input  logic              enable,
  input  trig_algo_e        algo,
  input  logic              use_q,
  input  logic              invert,
  input  logic signed [31:0] threshold,
  input  logic [3:0]        iir_k,
  input  logic [$clog2(PKG_LEN):0] pkg_len,
  // detector stream
  input  logic              in_valid,
  input  logic [DET_W-1:0]  in_det,
  input  cplx_t             in_data,
  // package beats
  output logic              out_valid,
  output beat_t             out_beat,
  output logic [31:0]       fire_count
);
  localparam int PW  = $clog2(PRE_LEN);
  localparam int LW  = $clog2(PKG_LEN) + 1;
  localparam int MAW = $clog2(MA_LEN);
  localparam int AGE_MAX = PRE_LEN + MA_LEN;
  localparam int AGW = $clog2(AGE_MAX + 1);

  logic signed [15:0] hist  [NUM_DET][MA_LEN];   // x[n-1] .. x[n-MA_LEN]
  logic signed [31:0] base  [NUM_DET];           // IIR baseline, Q16
  cplx_t              ring  [NUM_DET][PRE_LEN];  // pre-trigger delay line
  logic [PW-1:0]      wp    [NUM_DET];
  logic [LW-1:0]      rem   [NUM_DET];           // beats left in the package
  logic [AGW-1:0]     age   [NUM_DET];
  logic [TS_W-1:0]    ts;

  logic signed [15:0] x;
  logic signed [31:0] s_diff, s_ma, s_iir, s, base_nxt;
  logic               armed, recording, fire;
  logic [DET_W-1:0]   d;

  always_comb begin
    d         = in_det;
    x         = use_q ? in_data.q : in_data.i;
    if (invert) x = -x;
    s_diff    = 32'(x) - 32'(hist[d][0]);
    s_ma      = (32'(x) - 32'(hist[d][MA_LEN-1])) >>> MAW;
    s_iir     = 32'(x) - (base[d] >>> 16);
    base_nxt  = (age[d] == '0) ? (32'(x) <<< 16)
                               : base[d] + (((32'(x) <<< 16) - base[d]) >>> iir_k);
    case (algo)
      TRIG_DIFF: s = s_diff;
      TRIG_MA:   s = s_ma;
      default:   s = s_iir;
    endcase
    armed     = (32'(age[d]) >= AGE_MAX);
    recording = (rem[d] != '0);
    fire      = enable && armed && !recording && (s > threshold) && (pkg_len != 0);
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      hist[d][0] <= x;
      for (int k = 1; k < MA_LEN; k++) hist[d][k] <= hist[d][k-1];
      base[d] <= base_nxt;
      ring[d][wp[d]] <= in_data;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ts         <= '0;
      out_valid  <= 1'b0;
      out_beat   <= '0;
      fire_count <= '0;
      for (int k = 0; k < NUM_DET; k++) begin
        wp[k]  <= '0;
        rem[k] <= '0;
        age[k] <= '0;
      end
    end else begin
      ts        <= ts + 1'b1;
      out_valid <= 1'b0;
      if (in_valid) begin
        wp[d] <= wp[d] + 1'b1;
        if (!armed) age[d] <= age[d] + 1'b1;
        if (fire || recording) begin
          out_valid      <= 1'b1;
          out_beat       <= '0;
          out_beat.det   <= d;
          out_beat.data  <= ring[d][wp[d]];
          out_beat.ts    <= ts;
          out_beat.first <= fire;
          out_beat.algo  <= fire ? algo : TRIG_DIFF;
          out_beat.last  <= fire ? (pkg_len == 1) : (rem[d] == 1);
          rem[d]         <= fire ? LW'(pkg_len - 1'b1) : rem[d] - 1'b1;
        end
        if (fire) fire_count <= fire_count + 1'b1;
      end
    end
  end
endmodule
