// ref_synth: coarse reference synthesizer of one demodulator channel.
//
// A phase accumulator advances by `freq_i` once per 25 MSPS sample (`en_i`);
// its top four bits address the 16-entry sequence whose positive half cycle
// is 0,3,6,7,7,7,6,3 (in units of 1/8) and whose negative half cycle is the
// negated copy. The result is a 4-bit signed reference sample `coef_o` in
// the range -7..7, which the mixer multiplies with the input signal. The
// sequence and the phase-bus mechanism follow the source description.
//
// Phase bus: `phase_next_o` is the value the accumulator takes at the next
// sample (accumulator + frequency). One synthesizer's phase_next_o is put on
// a bus shared by all channels; a channel told to load (`load_i`, a one-cycle
// strobe remembered until the next sample) sets its accumulator to the bus
// value plus its programmable `phase_offset_i`. Two channels with equal
// frequencies then stay locked with that offset, e.g. a quarter turn
// (2^30) for an I/Q pair. The 32-bit accumulator width is this design's
// choice (the same as the bias DDS, so one frequency word serves both).
//
// Timing: the accumulator updates on the clock edge where en_i is high;
// coef_o follows the accumulator combinationally.
module ref_synth
  import dfmux_pkg::*;
(
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           en_i,
  input  logic [REF_PHASE_W-1:0]         freq_i,
  input  logic [REF_PHASE_W-1:0]         phase_offset_i,
  input  logic                           load_i,
  input  logic [REF_PHASE_W-1:0]         bus_phase_i,
  output logic [REF_PHASE_W-1:0]         phase_next_o,
  output logic [REF_PHASE_W-1:0]         phase_o,
  output logic signed [REF_COEF_W-1:0]   coef_o
);
  logic [REF_PHASE_W-1:0] acc_q;
  logic                   load_pending_q;

  assign phase_next_o = acc_q + freq_i;
  assign phase_o      = acc_q;
  assign coef_o       = ref_sequence(acc_q[REF_PHASE_W-1 -: 4]);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc_q          <= '0;
      load_pending_q <= 1'b0;
    end else if (en_i) begin
      acc_q          <= (load_i || load_pending_q) ? bus_phase_i + phase_offset_i
                                                   : acc_q + freq_i;
      load_pending_q <= 1'b0;
    end else if (load_i) begin
      load_pending_q <= 1'b1;
    end
  end
endmodule
