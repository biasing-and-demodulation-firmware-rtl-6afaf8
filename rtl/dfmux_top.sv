// dfmux_top: signal-path firmware of a digital frequency-domain multiplexer
// (DFMUX) board reading out four TES bolometer modules.
//
// For each of the four readout modules two Digital Multi-Frequency
// Synthesizers (dmfs) build a carrier comb, which biases up to 16
// bolometers through their LC resonators, and a nuller comb, which cancels
// the carriers at the SQUID input. One Digital Multi-Frequency Demodulator
// (dmfd) takes the four ADC streams (or looped-back synthesizer outputs),
// demodulates 17 channels per module and decimates them to rates between
// 12.21 kHz and 190.7 Hz. A timestamp multiplexer (ts_mux) supplies the
// timestamps appended to each output frame; the processor drains the
// resulting 32-bit words from the data FIFO.
//
// Everything runs on one 200 MHz core clock. A counter started by reset
// marks every eighth cycle as a 25 MSPS converter sample (`sample_en_o`);
// DAC words change on `dac_valid_o`, ADC words are sampled on sample_en_o.
// The converters, analogue front end, timestamp decoders and processor are
// outside this RTL; their signals are ports. All configuration (frequencies,
// phases, amplitudes, routing, stage selection) is presented as ports, to be
// driven by a processor-bus register bank whose map is not part of this
// design. The parameters default to the published configuration; smaller
// values (fewer channels, lower decimation, a smaller FIFO) shorten
// simulations.
module dfmux_top
  import dfmux_pkg::*;
#(
  parameter int unsigned DCH        = DMFD_CH_PER_MODULE,
  parameter int unsigned CIC1_RATE  = 128,
  parameter int unsigned CIC2_RATE  = 16,
  parameter int unsigned FIFO_DEPTH = 16384
) (
  input  logic                                              clk,
  input  logic                                              rst_n,
  output logic                                              sample_en_o,
  // converters
  input  logic [NUM_MODULES-1:0][ADC_W-1:0]                 adc_i,
  output logic [NUM_MODULES-1:0][DAC_W-1:0]                 carrier_dac_o,
  output logic [NUM_MODULES-1:0][DAC_W-1:0]                 nuller_dac_o,
  output logic                                              dac_valid_o,
  // synthesizer programming
  input  logic [NUM_MODULES-1:0][DMFS_CHANNELS-1:0][DDS_PHASE_W-1:0] carrier_freq_i,
  input  logic [NUM_MODULES-1:0][DMFS_CHANNELS-1:0][DDS_PHASE_W-1:0] carrier_phase_i,
  input  logic [NUM_MODULES-1:0][DMFS_CHANNELS-1:0][AMP_W-1:0]       carrier_amp_i,
  input  logic [NUM_MODULES-1:0][DMFS_CHANNELS-1:0][DDS_PHASE_W-1:0] nuller_freq_i,
  input  logic [NUM_MODULES-1:0][DMFS_CHANNELS-1:0][DDS_PHASE_W-1:0] nuller_phase_i,
  input  logic [NUM_MODULES-1:0][DMFS_CHANNELS-1:0][AMP_W-1:0]       nuller_amp_i,
  // demodulator programming
  input  route_t [NUM_MODULES-1:0]                          route_i,
  input  ref_cfg_t [NUM_MODULES*DCH-1:0]                    ref_cfg_i,
  input  logic [CHAN_ID_W-1:0]                              phase_bus_src_i,
  input  stage_sel_e                                        stage_sel_i,
  input  logic [1:0]                                        ts_format_i,
  // external timestamp decoders
  input  logic [TS_DECODED_W-1:0]                           irig_ts_i,
  input  logic                                              irig_new_i,
  input  logic [TS_DECODED_W-1:0]                           ebex_ts_i,
  input  logic                                              ebex_new_i,
  // processor side of the data FIFO
  input  logic                                              rd_en_i,
  output logic [FIFO_W-1:0]                                 rd_data_o,
  output logic                                              empty_o,
  output logic [$clog2(FIFO_DEPTH):0]                       level_o,
  output logic [31:0]                                       overflow_count_o,
  output logic [6:0]                                        stage_valid_o
);
  logic [$clog2(CLK_DIV)-1:0] div_q;
  always_ff @(posedge clk) begin
    if (!rst_n) div_q <= '0;
    else        div_q <= div_q + 1'b1;
  end
  assign sample_en_o = (div_q == '1);

  logic [NUM_MODULES-1:0][DAC_W-1:0] carrier_twos, nuller_twos;
  logic [NUM_MODULES-1:0]            cv, nv;

  for (genvar m = 0; m < NUM_MODULES; m++) begin : g_mod
    dmfs u_carrier (
      .clk        (clk),
      .rst_n      (rst_n),
      .freq_i     (carrier_freq_i[m]),
      .phase_i    (carrier_phase_i[m]),
      .amp_i      (carrier_amp_i[m]),
      .dac_o      (carrier_dac_o[m]),
      .dac_twos_o (carrier_twos[m]),
      .dac_valid_o(cv[m])
    );
    dmfs u_nuller (
      .clk        (clk),
      .rst_n      (rst_n),
      .freq_i     (nuller_freq_i[m]),
      .phase_i    (nuller_phase_i[m]),
      .amp_i      (nuller_amp_i[m]),
      .dac_o      (nuller_dac_o[m]),
      .dac_twos_o (nuller_twos[m]),
      .dac_valid_o(nv[m])
    );
  end
  assign dac_valid_o = cv[0];

  logic [TS_W-1:0] ts;
  ts_mux u_ts (
    .clk       (clk),
    .rst_n     (rst_n),
    .irig_ts_i (irig_ts_i),
    .irig_new_i(irig_new_i),
    .ebex_ts_i (ebex_ts_i),
    .ebex_new_i(ebex_new_i),
    .sel_i     (ts_format_i),
    .ts_o      (ts)
  );

  dmfd #(
    .DCH       (DCH),
    .CIC1_RATE (CIC1_RATE),
    .CIC2_RATE (CIC2_RATE),
    .FIFO_DEPTH(FIFO_DEPTH)
  ) u_dmfd (
    .clk             (clk),
    .rst_n           (rst_n),
    .en_i            (sample_en_o),
    .route_i         (route_i),
    .adc_i           (adc_i),
    .carrier_i       (carrier_twos),
    .nuller_i        (nuller_twos),
    .ref_cfg_i       (ref_cfg_i),
    .phase_bus_src_i (phase_bus_src_i),
    .stage_sel_i     (stage_sel_i),
    .ts_format_i     (ts_format_i),
    .ts_i            (ts),
    .rd_en_i         (rd_en_i),
    .rd_data_o       (rd_data_o),
    .empty_o         (empty_o),
    .level_o         (level_o),
    .overflow_count_o(overflow_count_o),
    .stage_valid_o   (stage_valid_o)
  );
endmodule
