// vna: built-in vector network analyser for finding the resonators.
//
// A sweep sends a single tone of amplitude `amp` through the TX path and
// measures the returned signal at npts frequencies f_start + k*f_step
// (32-bit phase increments per 250 MSps sample). At each point the module
// first waits `settle` samples for the line and filters to settle, then
// multiplies 2^avg_log2 received samples by the conjugate of the transmitted
// tone and sums them; the sum divided by 2^avg_log2 is the complex
// transmission S21 (scaled by amp/32767) and is reported with the point
// number. `busy` is high from `start` until the last point is out.
// The paper gives the purpose (resonator search without an external VNA);
// the stepped-tone method, the settle/integrate sequence and the widths are
// this design's choices.
module vna
  import dsp_pkg::*;
#(
  parameter int LUT_W = 10
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        tick,        // 250 MSps sample strobe
  input  logic        start,
  input  logic [31:0] f_start,
  input  logic [31:0] f_step,
  input  logic [15:0] npts,
  input  logic [15:0] settle,
  input  logic [4:0]  avg_log2,
  input  logic [15:0] amp,
  output logic        busy,
  output cplx_t       tx_out,
  input  cplx_t       rx_in,
  output logic        res_valid,
  output logic [15:0] res_point,
  output cplx_t       res_data
);
  typedef enum logic [1:0] {S_IDLE, S_SETTLE, S_INTEG} state_e;
  state_e state;

  logic [31:0] freq, phase;
  logic [15:0] point;
  logic [31:0] cnt;
  logic signed [63:0] sum_i, sum_q;
  logic signed [15:0] c, s;
  logic signed [63:0] p_i, p_q;

  sincos_lut #(.ADDR_W(LUT_W)) u_lut (.phase(phase[31 -: LUT_W]), .cos_o(c), .sin_o(s));

  always_comb begin
    // rx * (c - j s)
    p_i = longint'(rx_in.i) * c + longint'(rx_in.q) * s;
    p_q = longint'(rx_in.q) * c - longint'(rx_in.i) * s;
  end

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      freq      <= '0;
      phase     <= '0;
      point     <= '0;
      cnt       <= '0;
      sum_i     <= 0;
      sum_q     <= 0;
      tx_out    <= '0;
      res_valid <= 1'b0;
      res_point <= '0;
      res_data  <= '0;
    end else begin
      res_valid <= 1'b0;
      case (state)
        S_IDLE: begin
          tx_out <= '0;
          if (start && npts != 0) begin
            state <= S_SETTLE;
            freq  <= f_start;
            phase <= '0;
            point <= '0;
            cnt   <= '0;
          end
        end
        S_SETTLE, S_INTEG: if (tick) begin
          phase    <= phase + freq;
          tx_out.i <= 16'((longint'($signed({1'b0, amp})) * c) >>> 15);
          tx_out.q <= 16'((longint'($signed({1'b0, amp})) * s) >>> 15);
          if (state == S_SETTLE) begin
            if (cnt + 1 >= 32'(settle)) begin
              state <= S_INTEG;
              cnt   <= '0;
              sum_i <= 0;
              sum_q <= 0;
            end else cnt <= cnt + 1;
          end else begin
            sum_i <= sum_i + p_i;
            sum_q <= sum_q + p_q;
            if (cnt + 1 == (32'd1 << avg_log2)) begin
              res_valid  <= 1'b1;
              res_point  <= point;
              res_data.i <= sat16(((sum_i + p_i) >>> 15) >>> avg_log2);
              res_data.q <= sat16(((sum_q + p_q) >>> 15) >>> avg_log2);
              cnt        <= '0;
              if (point + 1'b1 == npts) state <= S_IDLE;
              else begin
                point <= point + 1'b1;
                freq  <= freq + f_step;
                state <= S_SETTLE;
              end
            end else cnt <= cnt + 1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
