// fir_decim_tdm: time-multiplexed decimate-by-2 FIR filter serving every
// channel of the shared bus (one of FIR1..FIR6).
//
// Each channel has an NTAPS-long delay line in one shared sample memory
// (NCH*NTAPS words of 17 bits) written at a common position that advances
// once per frame (a frame is one sample of each channel, in the order
// 0..NCH-1). After every second frame a single multiply-accumulate engine
// walks the channels in order and, for each, sums NTAPS products of the
// newest samples with the coefficient table, one product per clock cycle.
// The accumulator (48 bits) cannot overflow; the result is scaled back by
// 2^17 (the coefficient scale) and saturated to 17 bits. NTAPS (43 for FIR1,
// 108 for FIR2-6), the decimation by two, unit pass-band gain and the
// 17-bit output follow the source description.
//
// The coefficients are not published. They are computed here at
// initialisation with a Kaiser window (parameter BETA) and normalised to
// unit DC gain. FIR2-6 (COMP_R1 = 0) are windowed sincs with the cut-off at
// a quarter of the input rate. FIR1 must also undo the pass-band droop of the
// two CIC stages before it, as the source description requires; with COMP_R1
// and COMP_R2 set to the CIC1 and CIC2 decimations its ideal response is
// 1/(CIC1 * CIC2 response) up to a quarter of the input rate and zero above,
// and tap k is the windowed inverse transform of that response,
// 2 * integral over [0, 1/4] of D(f) cos(2 pi f (k - (NTAPS-1)/2)) df,
// evaluated with a COMP_POINTS-point midpoint rule. Filter design method,
// shared engine, memory organisation and saturation are this design's
// choices.
// The sample memory needs no clearing: until NTAPS frames have arrived after
// reset, taps older than the first frame are read as zero.
//
// Timing: outputs follow the end of every second input frame, channel by
// channel, NTAPS+2 cycles apart. The engine needs NCH*(NTAPS+2) cycles, so
// input frames must be at least that far apart (16384 cycles at default
// rates for FIR1 against 3060 needed).
module fir_decim_tdm
  import dfmux_pkg::*;
#(
  parameter int unsigned NCH   = DMFD_CHANNELS,
  parameter int unsigned NTAPS = 108,
  parameter real         BETA  = 10.0,
  parameter int unsigned COMP_R1 = 0,   // CIC1 decimation to correct for, 0 = none
  parameter int unsigned COMP_R2 = 1    // CIC2 decimation to correct for
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid_i,
  input  chan_sample_t in_i,
  output logic         out_valid_o,
  output chan_sample_t out_o,
  output logic         busy_o
);
  localparam int unsigned TW   = $clog2(NTAPS);
  localparam int unsigned AW   = $clog2(NCH * NTAPS);
  localparam int unsigned ACC_W = 48;

  logic signed [FIR_COEF_W-1:0] coef [NTAPS];
  initial begin
    longint taps [NTAPS];
    longint sum;
    sum = 0;
    for (int unsigned k = 0; k < NTAPS; k++) begin
      taps[k] = fir_tap_fixed(k, NTAPS, BETA, COMP_R1, COMP_R2);
      sum     = sum + taps[k];
    end
    for (int unsigned k = 0; k < NTAPS; k++) coef[k] = fir_normalise(taps[k], sum);
  end

  logic signed [SAMPLE_W-1:0] mem [NCH * NTAPS];

  logic [TW-1:0]        wp_q;       // delay-line position of the current frame
  logic [TW:0]          fill_q;     // frames written since reset (saturates at NTAPS)
  logic [TW:0]          efill_q;    // valid history length for the engine
  logic                 odd_q;      // second frame of a pair
  logic [TW-1:0]        newest_q;   // position of the newest sample for the engine
  logic                 run_q;
  logic [CHAN_ID_W-1:0] ech_q;      // engine channel
  logic [TW-1:0]        ek_q;       // engine tap

  // write side
  always_ff @(posedge clk) begin
    if (in_valid_i) mem[AW'(int'(in_i.chan) * NTAPS + int'(wp_q))] <= in_i.data;
  end

  // engine address generation (stage 0)
  logic [TW-1:0] tap_pos;
  always_comb begin
    tap_pos = (newest_q >= ek_q) ? newest_q - ek_q : TW'(NTAPS - int'(ek_q) + int'(newest_q));
  end

  // stage 1: memory and coefficient read
  logic signed [SAMPLE_W-1:0]   x1_q;
  logic signed [FIR_COEF_W-1:0] c1_q;
  logic                         v1_q, first1_q, last1_q;
  logic [CHAN_ID_W-1:0]         ch1_q;
  // stage 2: accumulate
  logic signed [ACC_W-1:0]      acc_q;

  localparam logic signed [ACC_W-1:0] MAXV = ACC_W'((1 << (SAMPLE_W-1)) - 1);
  localparam logic signed [ACC_W-1:0] MINV = -ACC_W'(1 << (SAMPLE_W-1));

  logic signed [ACC_W-1:0] acc_n, scaled;
  always_comb begin
    acc_n  = (first1_q ? '0 : acc_q) + ACC_W'(x1_q * c1_q);
    scaled = acc_n >>> FIR_COEF_FRAC;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wp_q        <= '0;
      fill_q      <= '0;
      efill_q     <= '0;
      odd_q       <= 1'b0;
      newest_q    <= '0;
      run_q       <= 1'b0;
      ech_q       <= '0;
      ek_q        <= '0;
      v1_q        <= 1'b0;
      first1_q    <= 1'b0;
      last1_q     <= 1'b0;
      ch1_q       <= '0;
      x1_q        <= '0;
      c1_q        <= '0;
      acc_q       <= '0;
      out_valid_o <= 1'b0;
      out_o       <= '0;
    end else begin
      // frame bookkeeping
      if (in_valid_i && int'(in_i.chan) == NCH - 1) begin
        wp_q  <= (int'(wp_q) == NTAPS - 1) ? '0 : wp_q + 1'b1;
        odd_q <= ~odd_q;
        if (int'(fill_q) < NTAPS) fill_q <= fill_q + 1'b1;
        if (odd_q) begin
          newest_q <= wp_q;
          efill_q  <= fill_q + 1'b1;
          run_q    <= 1'b1;
          ech_q    <= '0;
          ek_q     <= '0;
        end
      end else if (run_q) begin
        if (int'(ek_q) == NTAPS - 1) begin
          ek_q  <= '0;
          ech_q <= ech_q + 1'b1;
          if (int'(ech_q) == NCH - 1) run_q <= 1'b0;
        end else begin
          ek_q <= ek_q + 1'b1;
        end
      end

      // stage 1
      v1_q     <= run_q;
      first1_q <= run_q && ek_q == '0;
      last1_q  <= run_q && int'(ek_q) == NTAPS - 1;
      ch1_q    <= ech_q;
      // taps older than the first frame after reset read as zero
      x1_q     <= ({1'b0, ek_q} < efill_q) ? mem[AW'(int'(ech_q) * NTAPS + int'(tap_pos))] : '0;
      c1_q     <= coef[ek_q];

      // stage 2
      out_valid_o <= 1'b0;
      if (v1_q) begin
        acc_q <= acc_n;
        if (last1_q) begin
          out_valid_o <= 1'b1;
          out_o.chan  <= ch1_q;
          if (scaled > MAXV)      out_o.data <= MAXV[SAMPLE_W-1:0];
          else if (scaled < MINV) out_o.data <= MINV[SAMPLE_W-1:0];
          else                    out_o.data <= scaled[SAMPLE_W-1:0];
        end
      end
    end
  end

  assign busy_o = run_q | v1_q;

  a_frame_spacing: assert property (@(posedge clk) disable iff (!rst_n) in_valid_i |-> !run_q)
    else $error("fir_decim_tdm: input frame arrived while the engine was still busy");
endmodule
