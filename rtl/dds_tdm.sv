// dds_tdm: time-shared direct digital synthesizer of the bias path.
//
// One instance produces DDS_CHANNELS (8) independent sinusoids. It runs at the
// 200 MHz core clock and serves channel `slot_i` in each cycle, so every
// channel advances once per 8 cycles, i.e. at the 25 MSPS converter rate.
// Each channel has a 32-bit phase accumulator, incremented by its frequency
// word, and a 32-bit programmable phase offset. The sum of the two is
// truncated to 14 bits and addresses a sine table of 12-bit 2's-complement
// samples; those numbers (32-bit accumulator and offset, 14-bit address,
// 12-bit output, 8 channels per DDS at 200 MHz) follow the source
// description. The original used a vendor DDS core; the table organisation
// (a quarter-wave table of 4096 entries sampled at half-LSB phase offsets
// and unfolded by quadrant) is this design's own choice.
//
// Timing: the slot presented on slot_i appears on sample_o / slot_o three
// cycles later. The phase used for a sample is the accumulator value before
// that sample's increment, so channel c's n-th sample after reset uses phase
// offset + n*freq. Accumulators reset to zero.
module dds_tdm
  import dfmux_pkg::*;
#(
  parameter int unsigned CHANNELS = DDS_CHANNELS
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic [$clog2(CHANNELS)-1:0]        slot_i,
  input  logic [CHANNELS-1:0][DDS_PHASE_W-1:0] freq_i,
  input  logic [CHANNELS-1:0][DDS_PHASE_W-1:0] phase_i,
  output logic signed [DDS_OUT_W-1:0]        sample_o,
  output logic [$clog2(CHANNELS)-1:0]        slot_o
);
  localparam int unsigned QADDR_W = DDS_ADDR_W - 2;
  localparam int unsigned SW      = $clog2(CHANNELS);

  logic signed [DDS_OUT_W-1:0] rom [1 << QADDR_W];
  initial begin
    for (int unsigned i = 0; i < (1 << QADDR_W); i++) rom[i] = sine_quarter(i);
  end

  logic [CHANNELS-1:0][DDS_PHASE_W-1:0] acc_q;
  logic [DDS_PHASE_W-1:0]  ph0_q;
  logic [SW-1:0]           slot0_q, slot1_q;
  logic signed [DDS_OUT_W-1:0] mag1_q;
  logic                    neg1_q;
  logic [DDS_ADDR_W-1:0]   addr0;
  logic [QADDR_W-1:0]      qaddr;

  // stage 0: phase accumulation and offset
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc_q   <= '0;
      ph0_q   <= '0;
      slot0_q <= '0;
    end else begin
      acc_q[slot_i] <= acc_q[slot_i] + freq_i[slot_i];
      ph0_q         <= acc_q[slot_i] + phase_i[slot_i];
      slot0_q       <= slot_i;
    end
  end

  // stage 1: quarter-wave table look-up
  always_comb begin
    addr0 = ph0_q[DDS_PHASE_W-1 -: DDS_ADDR_W];
    qaddr = addr0[DDS_ADDR_W-2] ? ~addr0[QADDR_W-1:0] : addr0[QADDR_W-1:0];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      mag1_q  <= '0;
      neg1_q  <= 1'b0;
      slot1_q <= '0;
    end else begin
      mag1_q  <= rom[qaddr];
      neg1_q  <= addr0[DDS_ADDR_W-1];
      slot1_q <= slot0_q;
    end
  end

  // stage 2: sign of the lower half cycle
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sample_o <= '0;
      slot_o   <= '0;
    end else begin
      sample_o <= neg1_q ? -mag1_q : mag1_q;
      slot_o   <= slot1_q;
    end
  end
endmodule
