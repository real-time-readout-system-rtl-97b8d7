// axis_switch: selects which stream goes to storage.
//
// Input 0 carries triggered packages, input 1 the raw detector samples at
// the output of the channelization stage (all lines, tagged as raw beats
// with the time of arrival). `sel` chooses one; the other is discarded. The
// selection only changes between beats, and a package that is being
// forwarded when sel changes is finished first (the switch follows
// first/last of the package beats of each detector with a per-switch count
// of open packages). Output registered, one clock latency. The paper shows
// an AXI-Stream switch in front of the DMA and says raw data can be stored
// in addition to triggered packages; the package-boundary rule is this
// design's choice.
module axis_switch
  import dsp_pkg::*;
  import daq_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  sel,
  input  logic  trig_valid,
  input  beat_t trig_beat,
  input  logic  raw_valid,
  input  logic [DET_W-1:0] raw_det,
  input  cplx_t raw_data,
  output logic  out_valid,
  output beat_t out_beat
);
  logic [TS_W-1:0] ts;
  logic            cur;        // selection in effect
  logic [DET_W:0]  open_pkgs;  // packages started but not finished

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ts        <= '0;
      cur       <= 1'b0;
      open_pkgs <= '0;
      out_valid <= 1'b0;
      out_beat  <= '0;
    end else begin
      ts        <= ts + 1'b1;
      out_valid <= 1'b0;
      if (!cur) begin
        if (trig_valid) begin
          out_valid <= 1'b1;
          out_beat  <= trig_beat;
          open_pkgs <= open_pkgs + (trig_beat.first && !trig_beat.last)
                                 - (!trig_beat.first && trig_beat.last);
        end
        if (sel && open_pkgs == 0 && !(trig_valid && trig_beat.first)) cur <= 1'b1;
      end else begin
        if (raw_valid) begin
          out_valid     <= 1'b1;
          out_beat      <= '0;
          out_beat.raw  <= 1'b1;
          out_beat.det  <= raw_det;
          out_beat.ts   <= ts;
          out_beat.data <= raw_data;
        end
        if (!sel) cur <= 1'b0;
      end
    end
  end
endmodule
