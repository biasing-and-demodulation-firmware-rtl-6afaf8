// tb_channel_mux: loads 68 random CIC1 outputs at once, ten times, and
// checks that they leave one per cycle in channel order 0..67 with the
// right data and channel number, and that each set takes exactly 68 cycles.
module tb_channel_mux;
  import dfmux_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int NCH = 68;
  logic in_valid;
  logic [NCH-1:0][16:0] din, held;
  logic out_valid;
  chan_sample_t out;

  channel_mux #(.NCH(NCH)) dut (.clk, .rst_n, .in_valid_i(in_valid), .in_i(din),
                                .out_valid_o(out_valid), .out_o(out));

  int expect_ch = 0, nvalid = 0;
  always @(posedge clk) if (rst_n && out_valid) begin
    checks++;
    nvalid++;
    if (int'(out.chan) != expect_ch || out.data != held[expect_ch]) begin
      failures++;
      if (failures < 10) $display("got ch %0d data %h, expected ch %0d data %h", out.chan, out.data, expect_ch, held[expect_ch]);
    end
    expect_ch = (expect_ch + 1) % NCH;
  end

  initial begin
    in_valid = 0; din = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int set = 0; set < 10; set++) begin
      @(posedge clk);
      for (int c = 0; c < NCH; c++) din[c] = 17'($urandom);
      held = din;
      in_valid <= 1;
      @(posedge clk);
      in_valid <= 0;
      din <= '0;
      repeat (NCH + 5 + set) @(posedge clk);
      checks++;
      if (nvalid != NCH * (set + 1)) begin
        failures++;
        $display("set %0d: %0d outputs", set, nvalid);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
