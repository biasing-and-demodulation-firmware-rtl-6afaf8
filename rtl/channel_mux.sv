// channel_mux: gathers the parallel CIC1 outputs of all demodulator channels
// and puts them, one per clock cycle, on the shared time-multiplexed bus.
//
// All channels decimate in step, so their CIC1 outputs are valid in the same
// cycle (`in_valid_i`). That cycle loads every output into a holding
// register; the following NCH cycles emit channel 0, 1, ..., NCH-1 with its
// channel number. The serialisation onto one bus follows the source
// description; the holding register and the one-sample-per-cycle order are
// this design's choices. The next set of inputs must not come before the
// previous set is out (NCH cycles; at default rates the gap is 1024).
module channel_mux
  import dfmux_pkg::*;
#(
  parameter int unsigned NCH = DMFD_CHANNELS
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic                                in_valid_i,
  input  logic [NCH-1:0][SAMPLE_W-1:0]        in_i,
  output logic                                out_valid_o,
  output chan_sample_t                        out_o
);
  logic [NCH-1:0][SAMPLE_W-1:0] hold_q;
  logic [CHAN_ID_W-1:0]         idx_q;
  logic                         busy_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      hold_q      <= '0;
      idx_q       <= '0;
      busy_q      <= 1'b0;
      out_valid_o <= 1'b0;
      out_o       <= '0;
    end else begin
      out_valid_o <= 1'b0;
      if (in_valid_i) begin
        hold_q <= in_i;
        idx_q  <= '0;
        busy_q <= 1'b1;
      end else if (busy_q) begin
        out_valid_o <= 1'b1;
        out_o.chan  <= idx_q;
        out_o.data  <= hold_q[idx_q];
        idx_q       <= idx_q + 1'b1;
        if (idx_q == CHAN_ID_W'(NCH-1)) busy_q <= 1'b0;
      end
    end
  end

  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n) in_valid_i |-> !busy_q)
    else $error("channel_mux: new CIC1 outputs before the previous set was sent");
endmodule
