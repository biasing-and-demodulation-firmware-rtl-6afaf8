// tb_ts_mux: checks the timestamp multiplexer. Decoded IRIG-B and EBEX
// timestamps arrive at random times; for each format the output must be
// {last decoded time, cycles since it was decoded} (or the free-running
// count for the internal format), one cycle after the inputs.
module tb_ts_mux;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic [63:0] irig, ebex;
  logic irig_new, ebex_new;
  logic [1:0] sel;
  logic [95:0] ts;

  ts_mux dut (.clk, .rst_n, .irig_ts_i(irig), .irig_new_i(irig_new), .ebex_ts_i(ebex), .ebex_new_i(ebex_new),
              .sel_i(sel), .ts_o(ts));

  initial begin
    longint m_irig, m_ebex, t_irig, t_ebex, local_cnt;
    logic [95:0] e;
    irig = 0; ebex = 0; irig_new = 0; ebex_new = 0; sel = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    m_irig = 0; m_ebex = 0; t_irig = 0; t_ebex = 0; local_cnt = 0;
    for (int i = 0; i < 3000; i++) begin
      irig_new = ($urandom % 97) == 0;
      ebex_new = ($urandom % 53) == 0;
      irig = {$urandom, $urandom};
      ebex = {$urandom, $urandom};
      sel = 2'($urandom % 3);
      // ts_o is loaded from the counters as they were before this edge
      case (sel)
        0: e = {64'(m_irig), 32'(t_irig)};
        1: e = {64'(m_ebex), 32'(t_ebex)};
        default: e = 96'(local_cnt);
      endcase
      if (irig_new) begin m_irig = longint'(irig); t_irig = 0; end else t_irig++;
      if (ebex_new) begin m_ebex = longint'(ebex); t_ebex = 0; end else t_ebex++;
      local_cnt++;
      @(negedge clk);
      checks++;
      if (ts != e) begin failures++; if (failures < 10) $display("got %h expected %h", ts, e); end
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
