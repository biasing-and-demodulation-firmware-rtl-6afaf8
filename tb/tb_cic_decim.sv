// tb_cic_decim: checks CIC1 (3 stages, decimation 128, 35 bits, 17 bits
// out) against its direct-form equivalent: the impulse response of three
// cascaded 128-sample boxcars, convolved with the input in 64-bit integer
// arithmetic and cut by the 18 dropped bits. The block's integrators are
// registered, so output m corresponds to the ideal filter evaluated three
// samples before the m-th block of 128 inputs ends. Random full-scale
// input, input enabled on two cycles in three, 24 outputs; the output rate
// (one per 128 inputs) is checked too.
module tb_cic_decim;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int R = 128, N = 3, HL = N * (R - 1) + 1;
  logic en;
  logic signed [13:0] x;
  logic signed [16:0] y;
  logic yv;
  longint h [HL];
  longint xs [$];

  cic_decim dut (.clk, .rst_n, .en_i(en), .in_i(x), .out_o(y), .out_valid_o(yv));

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

  int nout = 0, nin = 0, last_nin = 0;
  always @(posedge clk) if (rst_n) begin
    if (yv) begin
      longint acc;
      int t;
      nout++;
      t = nout * R - 4;
      acc = 0;
      for (int k = 0; k < HL; k++) if (t - k >= 0) acc += h[k] * xs[t - k];
      checks++;
      if (longint'(y) != (acc >>> 18)) begin
        failures++;
        if (failures < 10) $display("out %0d: got %0d expected %0d", nout, y, acc >>> 18);
      end
      checks++;
      if (nin - last_nin != R) begin
        failures++;
        $display("output after %0d inputs", nin - last_nin);
      end
      last_nin = nin;
    end
    if (en) begin xs.push_back(longint'(x)); nin++; end
  end

  initial begin
    en = 0; x = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    while (nout < 24) begin
      @(posedge clk);
      en <= ($urandom % 3) != 0;
      x  <= 14'($urandom);
    end
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
