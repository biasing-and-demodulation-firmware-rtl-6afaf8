// tb_stream_packer: drives seven synthetic stage streams (CIC2 in bursts,
// FIRs one sample per few cycles, 8 channels) with stage-dependent data and
// checks, for every selectable stage and all three timestamp formats, that
// only the selected stage reaches the FIFO, each word is {channel, data
// sign-extended to 24 bits}, and each frame is followed by four words
// carrying the timestamp captured at channel 0, tagged 240+4*format+i.
module tb_stream_packer;
  import dfmux_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int NCH = 8;
  stage_sel_e sel;
  logic [1:0] fmt;
  logic [95:0] ts;
  logic [6:0] sv;
  chan_sample_t [6:0] ss;
  logic wr;
  logic [31:0] wd;

  stream_packer #(.NCH(NCH)) dut (.clk, .rst_n, .sel_i(sel), .ts_format_i(fmt), .ts_i(ts),
                                  .stage_valid_i(sv), .stage_i(ss), .wr_en_o(wr), .wr_data_o(wd));

  logic [31:0] expq [$];
  always @(posedge clk) if (rst_n && wr) begin
    checks++;
    if (expq.size() == 0) begin failures++; $display("unexpected word %h", wd); end
    else begin
      logic [31:0] e;
      e = expq.pop_front();
      if (wd != e) begin failures++; if (failures < 10) $display("got %h expected %h", wd, e); end
    end
  end

  function automatic logic [16:0] val(input int st, input int c, input int fr);
    return 17'(st * 4096 + c * 256 + fr) ^ ((c % 2) ? 17'h10000 : 17'h0);
  endfunction

  initial begin
    sv = '0; ss = '0; sel = SEL_CIC2; fmt = 0; ts = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int s = 0; s < 7; s++) for (int f = 0; f < 3; f++) begin
      logic [95:0] cap;
      sel = stage_sel_e'(s);
      fmt = 2'(f);
      @(negedge clk);
      for (int c = 0; c < NCH; c++) begin
        // all stages emit channel c; the selected one must be kept
        for (int st = 0; st < 7; st++) begin
          ss[st].chan = 8'(c);
          ss[st].data = val(st, c, f);
        end
        sv = '1;
        ts = {$urandom, $urandom, $urandom};
        if (c == 0) cap = ts;
        expq.push_back({8'(c), {7{val(s, c, f)[16]}}, val(s, c, f)});
        if (c == NCH - 1)
          for (int i = 0; i < 4; i++) expq.push_back({8'(240 + 4 * f + i), cap[24 * i +: 24]});
        @(negedge clk);
        sv = '0;
        ts = {$urandom, $urandom, $urandom};
        if (s != 0) repeat (3) @(negedge clk);   // FIR outputs are spread out
      end
      repeat (8) @(negedge clk);
      checks++;
      if (expq.size() != 0) begin failures++; $display("%0d words missing", expq.size()); expq = {}; end
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
