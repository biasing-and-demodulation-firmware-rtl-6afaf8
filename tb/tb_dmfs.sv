// tb_dmfs: checks a 16-channel synthesizer against a model built here from
// $sin: each channel's n-th sample is round(2047*sin(2*pi*(p+0.5)/2^14))
// with p the top 14 bits of offset + n*frequency; it is weighted by the
// channel's amplitude, cut to its top 16 bits, and the 16 results are
// summed, saturated and converted to offset binary. The first DAC word is
// matched to a sample index once, then 300 consecutive words must match
// within the model's rounding (one table LSB per channel) and arrive every
// 8 cycles. A second run with all amplitudes at full scale checks
// saturation.
module tb_dmfs;
  import dfmux_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic [15:0][31:0] freq, phase;
  logic [15:0][19:0] amp;
  logic [15:0] dac, twos;
  logic valid;

  dmfs dut (.clk, .rst_n, .freq_i(freq), .phase_i(phase), .amp_i(amp), .dac_o(dac), .dac_twos_o(twos),
            .dac_valid_o(valid));

  function automatic int sine(input logic [31:0] ph);
    real v;
    v = $sin(2.0 * 3.14159265358979 * (real'(ph[31:18]) + 0.5) / 16384.0) * 2047.0;
    return v >= 0 ? $rtoi(v + 0.5) : -$rtoi(-v + 0.5);
  endfunction

  function automatic int model(input int n, output int tol);
    longint sum, p;
    int s;
    sum = 0;
    tol = 0;
    for (int c = 0; c < 16; c++) begin
      s = sine(phase[c] + 32'(n) * freq[c]);
      p = longint'(s) * longint'($signed(amp[c]));
      sum += p >>> 16;
      tol += ($signed(amp[c]) >>> 16) + 2;
    end
    if (sum > 32767) sum = 32767;
    if (sum < -32768) sum = -32768;
    return int'(sum);
  endfunction

  task automatic run(input int nwords);
    int n0, tol, got, last_t, t;
    n0 = -1;
    rst_n = 0;
    repeat (4) @(negedge clk);
    rst_n = 1;
    // find the sample index of the first DAC word
    @(posedge clk iff valid);
    #0;
    got = int'($signed(twos));
    for (int n = 0; n < 4; n++) if (model(n, tol) - got <= tol && got - model(n, tol) <= tol) begin n0 = n; break; end
    checks++;
    if (n0 < 0) begin failures++; $display("first word %0d matches no sample index", got); n0 = 0; end
    last_t = $time;
    for (int w = 1; w < nwords; w++) begin
      int e;
      @(posedge clk iff valid);
      t = $time;
      checks++;
      if (t - last_t != 16) begin failures++; $display("word spacing %0d", t - last_t); end
      last_t = t;
      e = model(n0 + w, tol);
      got = int'($signed(twos));
      checks++;
      if (got - e > tol || e - got > tol || dac != (twos ^ 16'h8000)) begin
        failures++;
        if (failures < 10) $display("word %0d: got %0d expected %0d (tol %0d)", w, got, e, tol);
      end
    end
  endtask

  initial begin
    for (int c = 0; c < 16; c++) begin
      freq[c]  = 32'h0080_0000 * (c + 1) + 32'h777 * c;
      phase[c] = 32'h1000_0000 * c;
      amp[c]   = 20'($signed(20'sd9000) * ((c % 2) ? -1 : 1) * (c + 1) / 4);
    end
    run(300);
    for (int c = 0; c < 16; c++) begin freq[c] = 0; phase[c] = 32'h4000_0000; amp[c] = 20'h7FFFF; end
    run(20);
    checks++;
    if (dac != 16'hFFFF) begin failures++; $display("saturation: %h", dac); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
