// tb_demod_channel: one demodulator channel (reference, mixer, CIC1) against
// a model written here: the reference sample for input n is the sequence
// entry 0,3,6,7,7,7,6,3,-0,-3,... selected by the top 4 bits of n*freq; the
// mixer output is floor(x*ref/8); CIC1 output m is the three-boxcar
// response at sample 128*m-4, divided by 2^18. Input: a full-scale-ish tone
// at the reference frequency plus noise, with one sample strobe in eight
// cycles. 12 outputs are checked, as is the output spacing (1024 cycles).
// Finally the demodulated DC level of the tone must be near
// 6000 * 8 * a1/2 * cos(phase), where a1 ~ 0.96 is the fundamental amplitude
// of the reference sequence and 8 the net gain of CIC1 (about 21000-22600).
module tb_demod_channel;
  import dfmux_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int R = 128, HL = 3 * (R - 1) + 1;
  localparam logic [31:0] F = 32'h0291_5F3A;   // about 1.005 MHz at 25 MSPS
  int seqv [16] = '{0, 3, 6, 7, 7, 7, 6, 3, 0, -3, -6, -7, -7, -7, -6, -3};

  logic en;
  logic signed [13:0] x;
  logic [31:0] pn;
  logic signed [16:0] y;
  logic yv;
  longint h [HL];
  longint mixq [$];

  demod_channel dut (.clk, .rst_n, .en_i(en), .in_i(x), .freq_i(F), .phase_offset_i(32'd0), .load_i(1'b0),
                     .bus_phase_i(32'd0), .phase_next_o(pn), .out_o(y), .out_valid_o(yv));

  initial begin
    longint b [HL];
    for (int i = 0; i < HL; i++) h[i] = (i < R) ? 1 : 0;
    for (int s = 1; s < 3; s++) begin
      for (int i = 0; i < HL; i++) begin
        b[i] = 0;
        for (int j = 0; j < R; j++) if (i - j >= 0) b[i] += h[i - j];
      end
      h = b;
    end
  end

  int nout = 0, last_t = 0, lastval = 0;
  always @(posedge clk) if (rst_n && yv) begin
    longint acc;
    int t;
    nout++;
    t = nout * R - 4;
    acc = 0;
    for (int k = 0; k < HL; k++) if (t - k >= 0) acc += h[k] * mixq[t - k];
    checks++;
    if (longint'(y) != (acc >>> 18)) begin
      failures++;
      if (failures < 10) $display("out %0d: got %0d expected %0d", nout, y, acc >>> 18);
    end
    if (nout > 1) begin
      checks++;
      if ($time - last_t != 2 * 1024) begin failures++; $display("spacing %0d", $time - last_t); end
    end
    last_t = $time;
    lastval = int'(y);
  end

  initial begin
    logic [31:0] ph;
    en = 0; x = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    ph = 0;
    for (int n = 0; n < 13 * R; n++) begin
      real v;
      int xi, r;
      v = 6000.0 * $sin(2.0 * 3.14159265358979 * real'(n) * real'(F) / 4294967296.0 + 0.2);
      xi = $rtoi(v) + int'($urandom % 64) - 32;
      r = seqv[ph[31:28]];
      mixq.push_back((longint'(xi) * r) >>> 3);
      ph += F;
      x = 14'(xi);
      en = 1;
      @(negedge clk);
      en = 0;
      repeat (7) @(negedge clk);
    end
    repeat (20) @(negedge clk);
    checks++;
    if (nout != 13) begin failures++; $display("%0d outputs", nout); end
    checks++;
    if (lastval < 19000 || lastval > 24000) begin failures++; $display("demodulated level %0d", lastval); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
