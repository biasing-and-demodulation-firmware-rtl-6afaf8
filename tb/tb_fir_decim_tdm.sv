// tb_fir_decim_tdm: checks the time-multiplexed decimate-by-2 FIR with the
// FIR2..6 length (108 taps) and the FIR1 length (43 taps), four channels each.
//  * coefficient table: symmetric, DC gain 2^17 within rounding;
//  * every output equals the convolution of that channel's input history
//    with the coefficient table (computed here), scaled by 2^-17 and
//    saturated, and outputs come after every second frame only;
//  * channel 0 carries a constant, which must come out unchanged (unit
//    gain) once the delay line is full; channel 1 carries a full-scale tone at
//    0.4 of the input rate, deep in the stop band, which must come out below
//    -60 dB.
// Channels 2 and 3 carry random full-scale data. The 43-tap instance is
// built as FIR1, correcting the droop of CIC1 (3 stages, 128) and CIC2
// (4 stages, 16); its pass band, cascaded with boxcar models of the two
// CICs, must be flat within 0.05 dB up to 0.112 of its input rate.
module tb_fir_decim_tdm;
  import dfmux_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int NCH = 4;
  logic in_valid;
  chan_sample_t din;
  logic [1:0] out_valid;
  chan_sample_t dout [2];
  logic [1:0] busy;
  longint hist [2][NCH][$];
  int frames = 0;

  fir_decim_tdm #(.NCH(NCH), .NTAPS(108), .BETA(10.0)) dut_a (.clk, .rst_n, .in_valid_i(in_valid), .in_i(din),
                      .out_valid_o(out_valid[0]), .out_o(dout[0]), .busy_o(busy[0]));
  fir_decim_tdm #(.NCH(NCH), .NTAPS(43), .BETA(8.0), .COMP_R1(128), .COMP_R2(16)) dut_b (.clk, .rst_n, .in_valid_i(in_valid), .in_i(din),
                      .out_valid_o(out_valid[1]), .out_o(dout[1]), .busy_o(busy[1]));

  int nout [2][NCH];

  // Reference coefficient tables from the filter design functions; the
  // checks below (symmetry, DC sum, pass-band flatness against separate CIC
  // models, stop band) judge the resulting filters.
  longint ctab [2][108];
  function automatic void build_coefs(input int f, input int ntaps, input real beta,
                                      input bit comp);
    longint t [108];
    longint sum;
    sum = 0;
    for (int k = 0; k < ntaps; k++) begin
      t[k] = fir_tap_fixed(k, ntaps, beta, comp ? 128 : 0, comp ? 16 : 1);
      sum += t[k];
    end
    for (int k = 0; k < ntaps; k++) ctab[f][k] = longint'(fir_normalise(t[k], sum));
  endfunction
  function automatic longint coef_of(input int f, input int k);
    return ctab[f][k];
  endfunction

  // Magnitude of an r-long boxcar average at frequency f (fraction of its
  // input rate), summed directly: |sum_i exp(-j 2 pi f i)| / r.
  function automatic real boxcar(input real f, input int r);
    real re, im;
    re = 0.0; im = 0.0;
    for (int i = 0; i < r; i++) begin
      re += $cos(2.0 * 3.14159265358979323846 * f * i);
      im -= $sin(2.0 * 3.14159265358979323846 * f * i);
    end
    return $sqrt(re * re + im * im) / real'(r);
  endfunction

  // Pass-band flatness of FIR1 after CIC1 (3 x boxcar 128) and CIC2
  // (4 x boxcar 16): |FIR1(f)| * CIC(f) must stay within 0.05 dB of 1 up to
  // 1.37 kHz of the 12.21 kHz FIR1 input rate (0.112), where the CICs alone
  // fall by about 0.74 dB.
  task automatic check_droop();
    real f, h, c, db, worst;
    worst = 0.0;
    for (int i = 0; i <= 28; i++) begin
      f = 0.112 * real'(i) / 28.0;
      h = 0.0;
      for (int k = 0; k < 43; k++)
        h += real'(coef_of(1, k)) / 131072.0 * $cos(2.0 * 3.14159265358979323846 * f * (real'(k) - 21.0));
      c = boxcar(f / 16.0, 16) ** 4 * boxcar(f / 2048.0, 128) ** 3;
      if (h < 0.0) h = -h;
      db = 20.0 * $log10(h * c);
      if (db < 0.0) db = -db;
      if (db > worst) worst = db;
      if (i == 28 && 20.0 * $log10(c) > -0.5) begin
        failures++; $display("CIC droop model %f dB", 20.0 * $log10(c));
      end
    end
    checks++;
    if (worst > 0.05) begin failures++; $display("FIR1 droop correction off by %f dB", worst); end
    else $display("FIR1 compensated pass band within %f dB", worst);
  endtask

  task automatic check_out(input int f, input int ntaps);
    int c, t;
    longint acc, e;
    c = int'(dout[f].chan);
    nout[f][c]++;
    t = 2 * nout[f][c] - 1;   // newest input frame index
    acc = 0;
    for (int k = 0; k < ntaps; k++) if (t - k >= 0) acc += coef_of(f, k) * hist[f][c][t - k];
    e = acc >>> 17;
    if (e > 65535) e = 65535;
    if (e < -65536) e = -65536;
    checks++;
    if (longint'($signed(dout[f].data)) != e) begin
      failures++;
      if (failures < 10) $display("fir%0d ch %0d out %0d: got %0d expected %0d", f, c, nout[f][c], $signed(dout[f].data), e);
    end
    if (nout[f][c] > ntaps) begin
      if (c == 0) begin
        checks++;
        if ($signed(dout[f].data) > 20001 || $signed(dout[f].data) < 19999) begin
          failures++; $display("fir%0d DC gain: %0d", f, $signed(dout[f].data));
        end
      end
      if (c == 1) begin
        checks++;
        if ($signed(dout[f].data) > 65 || $signed(dout[f].data) < -65) begin
          failures++; $display("fir%0d stop band: %0d", f, $signed(dout[f].data));
        end
      end
    end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (out_valid[0]) check_out(0, 108);
    if (out_valid[1]) check_out(1, 43);
  end

  initial begin
    longint s;
    in_valid = 0; din = '0;
    build_coefs(0, 108, 10.0, 0);
    build_coefs(1, 43, 8.0, 1);
    check_droop();
    for (int f = 0; f < 2; f++) for (int c = 0; c < NCH; c++) nout[f][c] = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    // table checks
    for (int f = 0; f < 2; f++) begin
      int nt;
      nt = f == 0 ? 108 : 43;
      s = 0;
      for (int k = 0; k < nt; k++) begin
        s += coef_of(f, k);
        checks++;
        if (coef_of(f, k) != coef_of(f, nt - 1 - k)) failures++;
      end
      checks++;
      if (s > 131072 + nt || s < 131072 - nt) begin failures++; $display("DC sum %0d", s); end
    end
    for (int fr = 0; fr < 320; fr++) begin
      for (int c = 0; c < NCH; c++) begin
        logic [16:0] v;
        case (c)
          0: v = 17'd20000;
          1: v = 17'($rtoi(65000.0 * $cos(2.0 * 3.14159265358979 * 0.4 * fr)));
          default: v = 17'($urandom);
        endcase
        @(posedge clk);
        in_valid <= 1;
        din.chan <= 8'(c);
        din.data <= v;
        hist[0][c].push_back(longint'($signed(v)));
        hist[1][c].push_back(longint'($signed(v)));
      end
      @(posedge clk);
      in_valid <= 0;
      frames++;
      repeat (NCH * 110 + 4) @(posedge clk);
    end
    for (int f = 0; f < 2; f++) for (int c = 0; c < NCH; c++) begin
      checks++;
      if (nout[f][c] != 160) begin failures++; $display("fir%0d ch %0d: %0d outputs", f, c, nout[f][c]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
