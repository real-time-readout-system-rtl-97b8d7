// stream_combiner: merges the detector streams of all readout lines into the
// single time-multiplexed stream processed by the one trigger module.
//
// Every line delivers its NUM_TONES decimated samples in a burst once per
// output period (2560 clocks at the default rates), and all lines burst at
// the same time. Each line therefore writes into its own FIFO (depth
// FIFO_DEPTH, one burst), and a round-robin arbiter forwards one sample per
// clock, numbering it det = line*NUM_TONES + tone. With 16 lines of 128
// tones, 2048 samples leave per 2560-clock period, inside the trigger's
// capacity of 2560 detectors. A sample arriving at a full FIFO is dropped and
// sets the sticky `overflow` flag. Output one clock after the arbiter
// decision. The paper states only that the streams of all 16 lines are
// combined; FIFOs, arbitration and numbering are this design's choices.
module stream_combiner
  import dsp_pkg::*;
#(
  parameter int NUM_LINES  = 16,
  parameter int NUM_TONES  = 128,
  parameter int FIFO_DEPTH = 128,
  parameter int DET_W      = 12
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [NUM_LINES-1:0]         in_valid,
  input  logic [$clog2(NUM_TONES)-1:0] in_tone [NUM_LINES],
  input  cplx_t                        in_data [NUM_LINES],
  output logic                         out_valid,
  output logic [DET_W-1:0]             out_det,
  output cplx_t                        out_data,
  output logic                         overflow
);
  localparam int TW = $clog2(NUM_TONES);
  localparam int AW = $clog2(FIFO_DEPTH);
  localparam int LW = (NUM_LINES > 1) ? $clog2(NUM_LINES) : 1;

  typedef struct packed {
    logic [TW-1:0] tone;
    cplx_t         data;
  } entry_t;

  entry_t          fifo  [NUM_LINES][FIFO_DEPTH];
  logic [AW:0]     wptr  [NUM_LINES];
  logic [AW:0]     rptr  [NUM_LINES];
  logic [NUM_LINES-1:0] nonempty, full;
  logic [LW-1:0]   rr, pick;
  logic            any;
  logic [LW:0]     cand;

  always_comb begin
    for (int l = 0; l < NUM_LINES; l++) begin
      nonempty[l] = (wptr[l] != rptr[l]);
      full[l]     = (wptr[l][AW-1:0] == rptr[l][AW-1:0]) && (wptr[l][AW] != rptr[l][AW]);
    end
    // round robin: first non-empty line at or after rr
    any  = 1'b0;
    pick = '0;
    for (int k = 0; k < NUM_LINES; k++) begin
      cand = {1'b0, rr} + (LW+1)'(k);
      if (cand >= (LW+1)'(NUM_LINES)) cand = cand - (LW+1)'(NUM_LINES);
      if (!any && nonempty[cand[LW-1:0]]) begin
        any  = 1'b1;
        pick = cand[LW-1:0];
      end
    end
  end

  always_ff @(posedge clk) begin
    for (int l = 0; l < NUM_LINES; l++)
      if (in_valid[l] && !full[l]) fifo[l][wptr[l][AW-1:0]] <= '{tone: in_tone[l], data: in_data[l]};
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int l = 0; l < NUM_LINES; l++) begin
        wptr[l] <= '0;
        rptr[l] <= '0;
      end
      rr        <= '0;
      out_valid <= 1'b0;
      out_det   <= '0;
      out_data  <= '0;
      overflow  <= 1'b0;
    end else begin
      for (int l = 0; l < NUM_LINES; l++) begin
        if (in_valid[l]) begin
          if (!full[l]) wptr[l] <= wptr[l] + 1'b1;
          else          overflow <= 1'b1;
        end
      end
      out_valid <= any;
      if (any) begin
        out_det  <= DET_W'(int'(pick) * NUM_TONES + int'(fifo[pick][rptr[pick][AW-1:0]].tone));
        out_data <= fifo[pick][rptr[pick][AW-1:0]].data;
        rptr[pick] <= rptr[pick] + 1'b1;
        rr <= (int'(pick) == NUM_LINES - 1) ? '0 : pick + 1'b1;
      end
    end
  end
endmodule
