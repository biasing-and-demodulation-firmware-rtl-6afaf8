// demod_channel: one demodulator channel, i.e. reference synthesizer, mixer
// and first decimation filter (CIC1).
//
// At every 25 MSPS sample (`en_i`) the routed 14-bit input is multiplied by
// the channel's coarse reference sample (-7..7, units of 1/8) and the
// product is truncated back to the input's 14-bit scale by dropping the
// three fractional bits (arithmetic shift, i.e. truncation toward minus
// infinity). The mixed signal is registered and fed to a 3-stage,
// decimate-by-128, 35-bit CIC whose output is cut to 17 bits. The mixer's
// truncation stage is in the source description; its exact position (three
// bits, back to 14 bits) is this design's choice.
//
// Timing: the mixer adds one sample of latency; CIC1 emits one 17-bit sample
// every 128 input samples (every 1024 core cycles at the default rates).
module demod_channel
  import dfmux_pkg::*;
#(
  parameter int unsigned CIC1_RATE = 128
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          en_i,
  input  logic signed [ADC_W-1:0]       in_i,
  input  logic [REF_PHASE_W-1:0]        freq_i,
  input  logic [REF_PHASE_W-1:0]        phase_offset_i,
  input  logic                          load_i,
  input  logic [REF_PHASE_W-1:0]        bus_phase_i,
  output logic [REF_PHASE_W-1:0]        phase_next_o,
  output logic signed [SAMPLE_W-1:0]    out_o,
  output logic                          out_valid_o
);
  localparam int unsigned PROD_W = ADC_W + REF_COEF_W;

  logic signed [REF_COEF_W-1:0] coef;
  logic signed [PROD_W-1:0]     prod;
  logic signed [ADC_W-1:0]      mix_q;
  logic                         mix_en_q;
  logic [REF_PHASE_W-1:0]       unused_phase;

  ref_synth u_ref (
    .clk           (clk),
    .rst_n         (rst_n),
    .en_i          (en_i),
    .freq_i        (freq_i),
    .phase_offset_i(phase_offset_i),
    .load_i        (load_i),
    .bus_phase_i   (bus_phase_i),
    .phase_next_o  (phase_next_o),
    .phase_o       (unused_phase),
    .coef_o        (coef)
  );

  assign prod = in_i * coef;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      mix_q    <= '0;
      mix_en_q <= 1'b0;
    end else begin
      mix_en_q <= en_i;
      if (en_i) mix_q <= ADC_W'(prod >>> 3);
    end
  end

  cic_decim #(
    .IN_W  (ADC_W),
    .INT_W (ADC_W + 3 * $clog2(CIC1_RATE)),
    .OUT_W (SAMPLE_W),
    .STAGES(3),
    .RATE  (CIC1_RATE)
  ) u_cic1 (
    .clk        (clk),
    .rst_n      (rst_n),
    .en_i       (mix_en_q),
    .in_i       (mix_q),
    .out_o      (out_o),
    .out_valid_o(out_valid_o)
  );
endmodule
