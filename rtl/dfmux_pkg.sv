// dfmux_pkg: constants, types and table-building functions shared by the
// frequency-domain multiplexer (DFMUX) signal path.
//
// The numbers below are the ones of the readout system described in the
// design documentation: four readout modules, 16 bias channels per module,
// 17 demodulator channels per module, 25 MSPS converters, 200 MHz internal
// clock. Widths that the source description leaves open (FIR coefficient
// width, demodulator phase-accumulator width, channel-identifier encoding of
// timestamp words) are this design's own choices and are marked as such.
//
// The package also holds the constant functions that compute the look-up
// tables at elaboration/initialisation time: the quarter-wave sine table of
// the bias synthesizer, the 16-entry coarse reference sequence of the
// demodulator and the coefficients of the decimating FIRs (Kaiser-windowed
// sinc for FIR2..6; for FIR1 a windowed design that also inverts the CIC
// pass-band droop). Real arithmetic stays inside these functions; the
// coefficient tables themselves are built from integers.
package dfmux_pkg;

  // ---------------- system organisation ----------------
  localparam int unsigned NUM_MODULES   = 4;   // readout modules per board
  localparam int unsigned CLK_DIV       = 8;   // 200 MHz core clock / 25 MSPS
  localparam int unsigned ADC_W         = 14;  // ADC sample width
  localparam int unsigned DAC_W         = 16;  // DAC sample width

  // ---------------- bias synthesizer (DMFS) ----------------
  localparam int unsigned DMFS_CHANNELS = 16;  // sinusoids per comb
  localparam int unsigned DDS_CHANNELS  = 8;   // sinusoids per time-shared DDS
  localparam int unsigned DDS_PHASE_W   = 32;  // phase accumulator / offset
  localparam int unsigned DDS_ADDR_W    = 14;  // truncated phase (table address)
  localparam int unsigned DDS_OUT_W     = 12;  // 2's-complement DDS sample
  localparam int unsigned AMP_W         = 20;  // per-channel amplitude weight

  // ---------------- demodulator (DMFD) ----------------
  localparam int unsigned DMFD_CH_PER_MODULE = 17;
  localparam int unsigned DMFD_CHANNELS = NUM_MODULES * DMFD_CH_PER_MODULE; // 68
  localparam int unsigned REF_PHASE_W   = 32;  // assumed, same as the DMFS DDS
  localparam int unsigned REF_COEF_W    = 4;   // reference sample, units of 1/8
  localparam int unsigned SAMPLE_W      = 17;  // width between filter stages
  localparam int unsigned CIC1_STAGES   = 3;   // per-channel CIC after the mixer
  localparam int unsigned CIC2_STAGES   = 4;   // shared CIC on the channel bus
  localparam int unsigned COMP_POINTS   = 128; // integration points of the FIR1 design
  localparam int unsigned FIR_COEF_W    = 18;  // assumed (one DSP48 multiplier port)
  localparam int unsigned FIR_COEF_FRAC = 17;  // coefficient scale 2^17 = unity
  localparam int unsigned OUT_DATA_W    = 24;  // streamed sample width
  localparam int unsigned CHAN_ID_W     = 8;   // channel identifier width
  localparam int unsigned FIFO_W        = OUT_DATA_W + CHAN_ID_W; // 32

  // ---------------- timestamps ----------------
  localparam int unsigned TS_W          = 96;  // captured timestamp width
  localparam int unsigned TS_SOURCES    = 3;   // IRIG-B, EBEX, internal
  localparam int unsigned TS_DECODED_W  = 64;  // decoder part of a timestamp (assumed)
  localparam int unsigned TS_TICKS_W    = 32;  // ticks part of a timestamp (assumed)
  // Channel identifiers of timestamp words: data channels use 0..67, each
  // timestamp format f uses TS_ID_BASE + 4*f + {0,1,2,3} (assumed encoding).
  localparam int unsigned TS_ID_BASE    = 240;

  // Output stage selection of the demodulator (CIC2 or one of the FIRs).
  typedef enum logic [2:0] {
    SEL_CIC2 = 3'd0,
    SEL_FIR1 = 3'd1,
    SEL_FIR2 = 3'd2,
    SEL_FIR3 = 3'd3,
    SEL_FIR4 = 3'd4,
    SEL_FIR5 = 3'd5,
    SEL_FIR6 = 3'd6
  } stage_sel_e;

  // Sources of a demodulator input in the routing crossbar.
  typedef enum logic [1:0] {
    SRC_ADC     = 2'd0,
    SRC_CARRIER = 2'd1,
    SRC_NULLER  = 2'd2
  } route_src_e;

  typedef struct packed {
    route_src_e  src;   // which family of signals
    logic [1:0]  index; // which of the four modules
  } route_t;

  // One demodulator channel's programming.
  typedef struct packed {
    logic [REF_PHASE_W-1:0] freq;         // phase increment per 25 MSPS sample
    logic [REF_PHASE_W-1:0] phase_offset; // added to the bus phase on a load
    logic                   load;         // one-cycle strobe: load phase from bus
  } ref_cfg_t;

  // One sample travelling on the time-multiplexed channel bus.
  typedef struct packed {
    logic [CHAN_ID_W-1:0] chan;
    logic [SAMPLE_W-1:0]  data;
  } chan_sample_t;

  // ---------------- table functions ----------------

  // Quarter-wave sine table entry of the bias DDS. The full-wave sample at
  // 14-bit phase p is sin(2*pi*(p+0.5)/2^14) scaled to 2^(W-1)-1; the half
  // LSB offset makes the table symmetric, so 2^(ADDR_W-2) entries suffice.
  function automatic logic signed [DDS_OUT_W-1:0] sine_quarter(input int unsigned i);
    real ph, v;
    ph = 2.0 * 3.14159265358979323846 * (real'(i) + 0.5) / real'(1 << DDS_ADDR_W);
    v  = $sin(ph) * real'((1 << (DDS_OUT_W-1)) - 1);
    return DDS_OUT_W'($rtoi(v + 0.5));
  endfunction

  // Coarse reference sequence of the demodulator, in units of 1/8: the
  // positive half cycle is 0,3,6,7,7,7,6,3 and the negative half mirrors it.
  function automatic logic signed [REF_COEF_W-1:0] ref_sequence(input logic [3:0] idx);
    logic signed [REF_COEF_W-1:0] half;
    case (idx[2:0])
      3'd0: half = 4'sd0;
      3'd1: half = 4'sd3;
      3'd2: half = 4'sd6;
      3'd3: half = 4'sd7;
      3'd4: half = 4'sd7;
      3'd5: half = 4'sd7;
      3'd6: half = 4'sd6;
      default: half = 4'sd3;
    endcase
    return idx[3] ? -half : half;
  endfunction

  // Zeroth-order modified Bessel function, used by the Kaiser window.
  function automatic real bessel_i0(input real x);
    real sum, term;
    sum  = 1.0;
    term = 1.0;
    for (int k = 1; k < 25; k++) begin
      term = term * (x / (2.0 * real'(k))) * (x / (2.0 * real'(k)));
      sum  = sum + term;
    end
    return sum;
  endfunction

  // Kaiser window of length ntaps at position n.
  function automatic real kaiser_window(input int unsigned n, input int unsigned ntaps,
                                        input real beta);
    real m, r;
    m = (real'(ntaps) - 1.0) / 2.0;
    r = (m == 0.0) ? 0.0 : (real'(n) - m) / m;
    return bessel_i0(beta * $sqrt(1.0 - r * r)) / bessel_i0(beta);
  endfunction

  // Tap n of an NTAPS-long Kaiser-windowed-sinc low-pass filter with cutoff
  // at a quarter of the input rate (the half-band point of a decimate-by-2
  // stage), before normalisation to unit DC gain.
  function automatic real fir_tap_real(input int unsigned n, input int unsigned ntaps,
                                       input real beta);
    real t, sinc;
    t = real'(n) - (real'(ntaps) - 1.0) / 2.0;
    if (t == 0.0) sinc = 0.5;
    else sinc = $sin(3.14159265358979323846 * 0.5 * t) / (3.14159265358979323846 * t);
    return sinc * kaiser_window(n, ntaps, beta);
  endfunction

  // Magnitude response of an n-stage CIC decimating by r, at frequency f
  // given as a fraction of the CIC's input rate: |sin(pi f r)/(r sin(pi f))|^n.
  function automatic real cic_gain(input real f, input int unsigned r, input int unsigned n);
    real g, x;
    if (f == 0.0) return 1.0;
    x = $sin(3.14159265358979323846 * f * real'(r)) /
        (real'(r) * $sin(3.14159265358979323846 * f));
    g = 1.0;
    for (int unsigned i = 0; i < n; i++) g = g * x;
    return g;
  endfunction

  // Droop correction wanted from FIR1 at frequency f (fraction of the FIR1
  // input rate): the inverse of the CIC1 and CIC2 responses in front of it.
  // CIC2 runs at r2 times the FIR1 input rate, CIC1 at r1*r2 times.
  function automatic real cic_correction(input real f, input int unsigned r1,
                                         input int unsigned r2);
    return 1.0 / (cic_gain(f / real'(r2), r2, CIC2_STAGES) *
                  cic_gain(f / (real'(r1) * real'(r2)), r1, CIC1_STAGES));
  endfunction

  // Tap n of FIR1, which also corrects the droop of the CICs before it:
  // Kaiser-windowed inverse transform of cic_correction over [0, 1/4] of the
  // input rate (zero above), 2*integral D(f) cos(2 pi f (n - m)) df, by a
  // COMP_POINTS-point midpoint rule. Before normalisation.
  function automatic real fir_comp_tap_real(input int unsigned n, input int unsigned ntaps,
                                            input real beta, input int unsigned r1,
                                            input int unsigned r2);
    real t, f, df, acc;
    t   = real'(n) - (real'(ntaps) - 1.0) / 2.0;
    df  = 0.25 / real'(COMP_POINTS);
    acc = 0.0;
    for (int unsigned j = 0; j < COMP_POINTS; j++) begin
      f   = (real'(j) + 0.5) * df;
      acc = acc + 2.0 * df * cic_correction(f, r1, r2) *
                  $cos(2.0 * 3.14159265358979323846 * f * t);
    end
    return acc * kaiser_window(n, ntaps, beta);
  endfunction

  // Tap n before normalisation in fixed point (scale 2^40): the windowed
  // sinc when r1 is 0, the CIC-correcting design otherwise.
  function automatic longint fir_tap_fixed(input int unsigned n, input int unsigned ntaps,
                                           input real beta, input int unsigned r1,
                                           input int unsigned r2);
    real v;
    v = (r1 == 0) ? fir_tap_real(n, ntaps, beta) : fir_comp_tap_real(n, ntaps, beta, r1, r2);
    // a real-to-integer cast rounds to nearest, ties away from zero
    return longint'(v * 1099511627776.0);
  endfunction

  // Normalises a fixed-point tap by the sum of all taps (unit DC gain) and
  // rounds it to the coefficient format, scale 2^FIR_COEF_FRAC, half away
  // from zero.
  function automatic logic signed [FIR_COEF_W-1:0] fir_normalise(input longint tap,
                                                                 input longint sum);
    longint num, q;
    num = (tap < 0 ? -tap : tap) <<< FIR_COEF_FRAC;
    q   = (num + sum / 2) / sum;
    return FIR_COEF_W'(tap < 0 ? -q : q);
  endfunction

endpackage
