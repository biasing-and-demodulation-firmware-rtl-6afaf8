// tb_cic2_tdm: checks the time-multiplexed CIC2 (4 stages, decimation 16,
// 33 bits, 17 bits out) for 68 interleaved channels against a per-channel
// direct-form model: four cascaded 16-sample boxcars convolved with that
// channel's random input history, divided by 2^16. Channel numbers, output
// order and the output rate (one burst per 16 input frames) are checked.
module tb_cic2_tdm;
  import dfmux_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int NCH = 68, R = 16, N = 4, HL = N * (R - 1) + 1;
  logic in_valid;
  chan_sample_t din, dout;
  logic out_valid;
  longint h [HL];
  longint hist [NCH][$];

  cic2_tdm dut (.clk, .rst_n, .in_valid_i(in_valid), .in_i(din), .out_valid_o(out_valid), .out_o(dout));

  initial begin
    longint b [HL];
    for (int i = 0; i < HL; i++) h[i] = (i < R) ? 1 : 0;
    for (int s = 1; s < N; s++) begin
      for (int i = 0; i < HL; i++) begin
        b[i] = 0;
        for (int j = 0; j < R; j++) if (i - j >= 0) b[i] += h[i - j];
      end
      h = b;
    end
  end

  int nout [NCH];
  int bursts = 0, frames = 0, expect_ch = 0;
  always @(posedge clk) if (rst_n && out_valid) begin
    int c, t;
    longint acc;
    c = int'(dout.chan);
    checks++;
    if (c != expect_ch) begin failures++; $display("order: got %0d expected %0d", c, expect_ch); end
    expect_ch = (expect_ch + 1) % NCH;
    nout[c]++;
    t = nout[c] * R - 1;
    acc = 0;
    for (int k = 0; k < HL; k++) if (t - k >= 0) acc += h[k] * hist[c][t - k];
    checks++;
    if (longint'($signed(dout.data)) != (acc >>> 16)) begin
      failures++;
      if (failures < 10) $display("ch %0d out %0d: got %0d expected %0d", c, nout[c], $signed(dout.data), acc >>> 16);
    end
    if (c == NCH - 1) begin
      bursts++;
      checks++;
      if (frames != bursts * R) begin failures++; $display("burst %0d after %0d frames", bursts, frames); end
    end
  end

  initial begin
    in_valid = 0; din = '0;
    for (int c = 0; c < NCH; c++) nout[c] = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int f = 0; f < R * 6; f++) begin
      for (int c = 0; c < NCH; c++) begin
        logic [16:0] v;
        v = (c % 3 == 0) ? 17'h0FFFF : 17'($urandom);
        @(posedge clk);
        in_valid <= 1;
        din.chan <= 8'(c);
        din.data <= v;
        hist[c].push_back(longint'($signed(v)));
      end
      @(posedge clk);
      in_valid <= 0;
      frames++;
      repeat ($urandom % 4) @(posedge clk);
    end
    repeat (4) @(posedge clk);
    checks++;
    if (bursts != 6) begin failures++; $display("bursts %0d", bursts); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
