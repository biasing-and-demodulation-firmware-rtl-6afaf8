// cic2_tdm: time-multiplexed CIC decimator (CIC2) serving every channel of
// the shared bus.
//
// Each incoming bus sample (`in_valid_i`, channel, 17-bit data) updates that
// channel's four integrators, kept in per-channel state arrays, in one clock
// cycle. Channels arrive in the order 0..NCH-1; the arrival of channel NCH-1
// ends a frame. In every RATE-th frame each channel's integrator output also
// passes its four combs (differential delay one) and is sent out, cut to the
// top 17 bits of the 33-bit internal word. Four stages, decimation 16, 33
// bits inside and 17 bits out follow the source description; DC gain is
// 16^4 = 2^16, which the 16 dropped bits cancel (unity gain).
//
// Timing: an output appears one cycle after its input, so the outputs of a
// decimating frame leave as a burst in channel order.
module cic2_tdm
  import dfmux_pkg::*;
#(
  parameter int unsigned NCH    = DMFD_CHANNELS,
  parameter int unsigned STAGES = 4,
  parameter int unsigned RATE   = 16,
  parameter int unsigned INT_W  = 33
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid_i,
  input  chan_sample_t in_i,
  output logic         out_valid_o,
  output chan_sample_t out_o
);
  initial assert (INT_W >= SAMPLE_W + STAGES * $clog2(RATE))
    else $error("cic2_tdm: INT_W too small for bit growth");

  logic signed [INT_W-1:0] integ_q [NCH][STAGES];
  logic signed [INT_W-1:0] delay_q [NCH][STAGES];
  logic [$clog2(RATE)-1:0] phase_q;

  logic signed [INT_W-1:0] integ_n [STAGES];
  logic signed [INT_W-1:0] comb    [STAGES+1];
  int unsigned             ch;

  always_comb begin
    ch = int'(in_i.chan) < NCH ? int'(in_i.chan) : 0;
    integ_n[0] = integ_q[ch][0] + INT_W'($signed(in_i.data));
    for (int s = 1; s < STAGES; s++) integ_n[s] = integ_q[ch][s] + integ_n[s-1];
    comb[0] = integ_n[STAGES-1];
    for (int s = 0; s < STAGES; s++) comb[s+1] = comb[s] - delay_q[ch][s];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int c = 0; c < NCH; c++)
        for (int s = 0; s < STAGES; s++) begin
          integ_q[c][s] <= '0;
          delay_q[c][s] <= '0;
        end
      phase_q     <= '0;
      out_valid_o <= 1'b0;
      out_o       <= '0;
    end else begin
      out_valid_o <= 1'b0;
      if (in_valid_i) begin
        for (int s = 0; s < STAGES; s++) integ_q[ch][s] <= integ_n[s];
        if (phase_q == '1) begin
          for (int s = 0; s < STAGES; s++) delay_q[ch][s] <= comb[s];
          out_valid_o <= 1'b1;
          out_o.chan  <= in_i.chan;
          out_o.data  <= comb[STAGES][INT_W-1 -: SAMPLE_W];
        end
        if (int'(in_i.chan) == NCH - 1) phase_q <= phase_q + 1'b1;
      end
    end
  end
endmodule
