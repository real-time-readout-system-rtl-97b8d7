// dma_writer: writes the selected beat stream into DDR4 memory.
//
// Two acquisition modes. Snapshot: after `start`, beats are written to
// consecutive word addresses from `base` until `words` beats are stored or,
// if `time_limit` is non-zero, that many clocks have passed. Continuous:
// beats are written into a ring of `words` words at `base` until `stop`;
// `wrapped` counts completed passes so the host knows how much to read.
// The memory port is a simple write port with a ready signal; a beat that
// meets ready low is dropped and counted in `dropped` (the host sizes the
// acquisition so that this does not happen). One beat per clock at most.
// The paper describes the snapshot and continuous modes and storage in DDR4;
// the port, ring behaviour and counters are this design's choices.
module dma_writer
  import daq_pkg::*;
#(
  parameter int ADDR_W = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic              stop,
  input  logic              continuous,
  input  logic [ADDR_W-1:0] base,
  input  logic [31:0]       words,
  input  logic [31:0]       time_limit,
  input  logic              in_valid,
  input  beat_t             in_beat,
  // memory write port
  output logic              mem_we,
  output logic [ADDR_W-1:0] mem_addr,
  output logic [127:0]      mem_wdata,
  input  logic              mem_ready,
  // status
  output logic              busy,
  output logic [31:0]       count,
  output logic [31:0]       wrapped,
  output logic [31:0]       dropped
);
  logic        cont;
  logic [31:0] offs, elapsed;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      cont      <= 1'b0;
      offs      <= '0;
      elapsed   <= '0;
      count     <= '0;
      wrapped   <= '0;
      dropped   <= '0;
      mem_we    <= 1'b0;
      mem_addr  <= '0;
      mem_wdata <= '0;
    end else begin
      mem_we <= 1'b0;
      if (!busy) begin
        if (start && words != 0) begin
          busy    <= 1'b1;
          cont    <= continuous;
          offs    <= '0;
          elapsed <= '0;
          count   <= '0;
          wrapped <= '0;
          dropped <= '0;
        end
      end else begin
        elapsed <= elapsed + 1;
        if (in_valid) begin
          if (mem_ready) begin
            mem_we    <= 1'b1;
            mem_addr  <= base + ADDR_W'(offs);
            mem_wdata <= in_beat;
            count     <= count + 1;
            if (offs + 1 == words) begin
              offs <= '0;
              if (cont) wrapped <= wrapped + 1;
              else      busy    <= 1'b0;
            end else offs <= offs + 1;
          end else dropped <= dropped + 1;
        end
        if (stop) busy <= 1'b0;
        if (!cont && time_limit != 0 && elapsed + 1 >= time_limit) busy <= 1'b0;
      end
    end
  end
endmodule
