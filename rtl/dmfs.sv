// dmfs: Digital Multi-Frequency Synthesizer, one comb of weighted sinusoids
// for one DAC (a carrier comb or a nuller comb).
//
// Sixteen sinusoids come from two time-shared DDS instances (dds_tdm), each
// serving 8 channels at the 200 MHz core clock. Each DDS sample is weighted
// by its channel's 20-bit 2's-complement amplitude, the 16 weighted
// sinusoids are summed, and the sum becomes a 16-bit DAC word that is
// converted from 2's complement to offset binary. All of this follows the
// source description.
//
// Design choices: each 12x20-bit product is truncated to its top 16 bits
// before the sum (the per-channel truncation that the published noise budget
// counts), the 20-bit sum is saturated to 16 bits, and the 25 MHz DAC domain
// is represented by a one-cycle `dac_valid_o` strobe every CLK_DIV cycles of
// the core clock (the converter clock is taken to be derived synchronously
// from the core clock). `dac_twos_o` carries the same sample in 2's
// complement for the demodulator loopback route.
//
// Timing: one DAC word per 8 core cycles; a slot counter started by reset
// paces both DDSes. Latency from a channel's phase to the DAC word is about
// two 8-cycle frames.
module dmfs
  import dfmux_pkg::*;
#(
  parameter int unsigned CHANNELS = DMFS_CHANNELS
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  input  logic [CHANNELS-1:0][DDS_PHASE_W-1:0]  freq_i,
  input  logic [CHANNELS-1:0][DDS_PHASE_W-1:0]  phase_i,
  input  logic [CHANNELS-1:0][AMP_W-1:0]        amp_i,
  output logic [DAC_W-1:0]                      dac_o,       // offset binary
  output logic signed [DAC_W-1:0]               dac_twos_o,  // same, 2's complement
  output logic                                  dac_valid_o
);
  localparam int unsigned PER_DDS = DDS_CHANNELS;
  localparam int unsigned NDDS    = CHANNELS / PER_DDS;
  localparam int unsigned SW      = $clog2(PER_DDS);
  localparam int unsigned PROD_W  = DDS_OUT_W + AMP_W;
  localparam int unsigned SUM_W   = DAC_W + $clog2(CHANNELS);

  initial assert (CHANNELS % PER_DDS == 0) else $error("CHANNELS must be a multiple of 8");

  logic [SW-1:0] slot_q;
  always_ff @(posedge clk) begin
    if (!rst_n) slot_q <= '0;
    else        slot_q <= slot_q + 1'b1;
  end

  logic signed [NDDS-1:0][DDS_OUT_W-1:0] dds_sample;
  logic [NDDS-1:0][SW-1:0]               dds_slot;

  for (genvar d = 0; d < NDDS; d++) begin : g_dds
    dds_tdm #(.CHANNELS(PER_DDS)) u_dds (
      .clk     (clk),
      .rst_n   (rst_n),
      .slot_i  (slot_q),
      .freq_i  (freq_i[d*PER_DDS +: PER_DDS]),
      .phase_i (phase_i[d*PER_DDS +: PER_DDS]),
      .sample_o(dds_sample[d]),
      .slot_o  (dds_slot[d])
    );
  end

  // weighting and per-channel truncation to DAC precision
  logic signed [SUM_W-1:0] frame_sum;
  always_comb begin
    logic signed [PROD_W-1:0] prod;
    frame_sum = '0;
    for (int d = 0; d < NDDS; d++) begin
      prod = $signed(dds_sample[d]) * $signed(amp_i[d*PER_DDS + int'(dds_slot[d])]);
      frame_sum = frame_sum + SUM_W'($signed(prod[PROD_W-1 -: DAC_W]));
    end
  end

  // accumulation over the 8 slots of a frame, saturation, offset binary
  logic signed [SUM_W-1:0] acc_q;
  logic                    primed_q;
  logic signed [SUM_W-1:0] total;
  localparam logic signed [SUM_W-1:0] MAXV = SUM_W'((1 << (DAC_W-1)) - 1);
  localparam logic signed [SUM_W-1:0] MINV = -SUM_W'(1 << (DAC_W-1));

  assign total = acc_q + frame_sum;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc_q       <= '0;
      primed_q    <= 1'b0;
      dac_o       <= DAC_W'(1 << (DAC_W-1));
      dac_twos_o  <= '0;
      dac_valid_o <= 1'b0;
    end else begin
      dac_valid_o <= 1'b0;
      if (dds_slot[0] == SW'(PER_DDS-1)) begin
        acc_q    <= '0;
        primed_q <= 1'b1;
        if (primed_q) begin
          logic signed [DAC_W-1:0] sat;
          if (total > MAXV)      sat = MAXV[DAC_W-1:0];
          else if (total < MINV) sat = MINV[DAC_W-1:0];
          else                   sat = total[DAC_W-1:0];
          dac_twos_o  <= sat;
          dac_o       <= {~sat[DAC_W-1], sat[DAC_W-2:0]};
          dac_valid_o <= 1'b1;
        end
      end else begin
        acc_q <= total;
      end
    end
  end
endmodule
