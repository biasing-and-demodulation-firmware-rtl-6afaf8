// ts_mux: timestamp multiplexer with local ticks counters.
//
// The board accepts timestamps from external decoders (IRIG-B from a GPS
// receiver and the EBEX timing system; the decoders themselves are outside
// this RTL and deliver a decoded time word plus a one-cycle `new` strobe).
// For each external source a ticks counter, clocked by the board clock,
// restarts from zero whenever that source decodes a new timestamp, so
// {decoded time, ticks} resolves time between external timestamps. Format 2
// is the board's own time: a free-running 96-bit ticks counter, usable when
// no external timestamps exist. `sel_i` picks the format given to the
// demodulator. The ticks counters, their reset on each decoded timestamp and
// the selectable formats follow the source description; the 64+32-bit
// layout of a timestamp and the format numbering are this design's choices.
//
// Timing: ts_o is registered; the ticks count of a source reads 0 on the
// cycle after its new-timestamp strobe.
module ts_mux
  import dfmux_pkg::*;
(
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [TS_DECODED_W-1:0]   irig_ts_i,
  input  logic                      irig_new_i,
  input  logic [TS_DECODED_W-1:0]   ebex_ts_i,
  input  logic                      ebex_new_i,
  input  logic [1:0]                sel_i,
  output logic [TS_W-1:0]           ts_o
);
  logic [TS_DECODED_W-1:0] irig_q, ebex_q;
  logic [TS_TICKS_W-1:0]   irig_ticks_q, ebex_ticks_q;
  logic [TS_W-1:0]         local_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      irig_q       <= '0;
      ebex_q       <= '0;
      irig_ticks_q <= '0;
      ebex_ticks_q <= '0;
      local_q      <= '0;
      ts_o         <= '0;
    end else begin
      local_q <= local_q + 1'b1;
      if (irig_new_i) begin
        irig_q       <= irig_ts_i;
        irig_ticks_q <= '0;
      end else begin
        irig_ticks_q <= irig_ticks_q + 1'b1;
      end
      if (ebex_new_i) begin
        ebex_q       <= ebex_ts_i;
        ebex_ticks_q <= '0;
      end else begin
        ebex_ticks_q <= ebex_ticks_q + 1'b1;
      end
      case (sel_i)
        2'd0:    ts_o <= {irig_q, irig_ticks_q};
        2'd1:    ts_o <= {ebex_q, ebex_ticks_q};
        default: ts_o <= local_q;
      endcase
    end
  end
endmodule
