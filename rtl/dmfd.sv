// dmfd: Digital Multi-Frequency Demodulator serving all four readout modules.
//
// Signal path (all numbers at default parameters):
//   input_crossbar  - picks, for each module, an ADC or a looped-back
//                     synthesizer output, at 25 MSPS;
//   demod_channel   - 17 channels per module (68 in all); each mixes its
//                     module's input with its own coarse reference and
//                     decimates by 128 in a parallel CIC1 (195.3 kHz out);
//   channel_mux     - puts the 68 CIC1 outputs on one time-shared bus;
//   cic2_tdm        - decimates by 16 (12.21 kHz);
//   fir_decim_tdm   - FIR1 (43 taps, also correcting the CIC droop) and
//                     FIR2..FIR6 (108 taps), each decimating by 2
//                     (6103 Hz down to 190.7 Hz);
//   stream_packer   - selects CIC2 or one FIR, tags samples with channel
//                     numbers and appends a captured timestamp per frame;
//   data_fifo       - holds the words until the processor reads them.
// The reference phases share a phase bus: the channel `phase_bus_src_i`
// drives it, and any channel whose `load` strobe is set loads it plus its
// programmed offset (used to build an I/Q pair from channel 17 of a module).
//
// Channel c of module m has the bus number m*DCH + c. The structure follows
// the source description; interface conventions are this design's own.
// Timing: `en_i` marks each 25 MSPS sample (one core cycle in CLK_DIV).
module dmfd
  import dfmux_pkg::*;
#(
  parameter int unsigned DCH        = DMFD_CH_PER_MODULE,
  parameter int unsigned CIC1_RATE  = 128,
  parameter int unsigned CIC2_RATE  = 16,
  parameter int unsigned FIR1_TAPS  = 43,
  parameter int unsigned FIR_TAPS   = 108,
  parameter int unsigned FIFO_DEPTH = 16384
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic                                 en_i,
  // inputs and routing
  input  route_t [NUM_MODULES-1:0]             route_i,
  input  logic [NUM_MODULES-1:0][ADC_W-1:0]    adc_i,
  input  logic [NUM_MODULES-1:0][DAC_W-1:0]    carrier_i,
  input  logic [NUM_MODULES-1:0][DAC_W-1:0]    nuller_i,
  // reference programming
  input  ref_cfg_t [NUM_MODULES*DCH-1:0]       ref_cfg_i,
  input  logic [CHAN_ID_W-1:0]                 phase_bus_src_i,
  // output selection and timestamps
  input  stage_sel_e                           stage_sel_i,
  input  logic [1:0]                           ts_format_i,
  input  logic [TS_W-1:0]                      ts_i,
  // processor side of the FIFO
  input  logic                                 rd_en_i,
  output logic [FIFO_W-1:0]                    rd_data_o,
  output logic                                 empty_o,
  output logic [$clog2(FIFO_DEPTH):0]          level_o,
  output logic [31:0]                          overflow_count_o,
  // activity of the filter stages (CIC2, FIR1..FIR6), for monitoring
  output logic [6:0]                           stage_valid_o
);
  localparam int unsigned NCH = NUM_MODULES * DCH;

  logic [NUM_MODULES-1:0][ADC_W-1:0] routed;
  logic                              en_q;

  input_crossbar u_xbar (
    .clk      (clk),
    .rst_n    (rst_n),
    .en_i     (en_i),
    .route_i  (route_i),
    .adc_i    (adc_i),
    .carrier_i(carrier_i),
    .nuller_i (nuller_i),
    .out_o    (routed)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) en_q <= 1'b0;
    else        en_q <= en_i;
  end

  // phase bus
  logic [NCH-1:0][REF_PHASE_W-1:0] phase_next;
  logic [REF_PHASE_W-1:0]          bus_phase;
  assign bus_phase = (int'(phase_bus_src_i) < NCH) ? phase_next[phase_bus_src_i] : '0;

  logic [NCH-1:0][SAMPLE_W-1:0] cic1_out;
  logic [NCH-1:0]               cic1_valid;

  for (genvar c = 0; c < NCH; c++) begin : g_ch
    demod_channel #(.CIC1_RATE(CIC1_RATE)) u_ch (
      .clk           (clk),
      .rst_n         (rst_n),
      .en_i          (en_q),
      .in_i          (routed[c / DCH]),
      .freq_i        (ref_cfg_i[c].freq),
      .phase_offset_i(ref_cfg_i[c].phase_offset),
      .load_i        (ref_cfg_i[c].load),
      .bus_phase_i   (bus_phase),
      .phase_next_o  (phase_next[c]),
      .out_o         (cic1_out[c]),
      .out_valid_o   (cic1_valid[c])
    );
  end

  logic         bus_valid;
  chan_sample_t bus;

  channel_mux #(.NCH(NCH)) u_mux (
    .clk        (clk),
    .rst_n      (rst_n),
    .in_valid_i (cic1_valid[0]),
    .in_i       (cic1_out),
    .out_valid_o(bus_valid),
    .out_o      (bus)
  );

  logic [6:0]         sv;
  chan_sample_t [6:0] ss;
  logic [5:0]         fir_busy;

  cic2_tdm #(.NCH(NCH), .RATE(CIC2_RATE), .INT_W(SAMPLE_W + 4 * $clog2(CIC2_RATE))) u_cic2 (
    .clk        (clk),
    .rst_n      (rst_n),
    .in_valid_i (bus_valid),
    .in_i       (bus),
    .out_valid_o(sv[0]),
    .out_o      (ss[0])
  );

  for (genvar f = 1; f <= 6; f++) begin : g_fir
    fir_decim_tdm #(
      .NCH  (NCH),
      .NTAPS(f == 1 ? FIR1_TAPS : FIR_TAPS),
      .BETA (f == 1 ? 8.0 : 10.0),
      .COMP_R1(f == 1 ? CIC1_RATE : 0),
      .COMP_R2(f == 1 ? CIC2_RATE : 1)
    ) u_fir (
      .clk        (clk),
      .rst_n      (rst_n),
      .in_valid_i (sv[f-1]),
      .in_i       (ss[f-1]),
      .out_valid_o(sv[f]),
      .out_o      (ss[f]),
      .busy_o     (fir_busy[f-1])
    );
  end

  assign stage_valid_o = sv;

  logic              wr_en;
  logic [FIFO_W-1:0] wr_data;
  logic              full_unused;

  stream_packer #(.NCH(NCH)) u_pack (
    .clk          (clk),
    .rst_n        (rst_n),
    .sel_i        (stage_sel_i),
    .ts_format_i  (ts_format_i),
    .ts_i         (ts_i),
    .stage_valid_i(sv),
    .stage_i      (ss),
    .wr_en_o      (wr_en),
    .wr_data_o    (wr_data)
  );

  data_fifo #(.DEPTH(FIFO_DEPTH)) u_fifo (
    .clk             (clk),
    .rst_n           (rst_n),
    .wr_en_i         (wr_en),
    .wr_data_i       (wr_data),
    .rd_en_i         (rd_en_i),
    .rd_data_o       (rd_data_o),
    .empty_o         (empty_o),
    .full_o          (full_unused),
    .level_o         (level_o),
    .overflow_count_o(overflow_count_o)
  );
endmodule
