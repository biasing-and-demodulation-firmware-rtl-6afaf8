// tb_data_fifo: random pushes and pops on a 16-word FIFO checked against a
// queue model (order, empty, level), then a deliberate overflow: 40 writes
// into an empty FIFO with no reads must keep the first 16 and count 24
// dropped words.
module tb_data_fifo;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic wr, rd, empty, full;
  logic [31:0] wd, rdata, ovf;
  logic [4:0] level;
  logic [31:0] model [$];

  data_fifo #(.DEPTH(16)) dut (.clk, .rst_n, .wr_en_i(wr), .wr_data_i(wd), .rd_en_i(rd), .rd_data_o(rdata),
                               .empty_o(empty), .full_o(full), .level_o(level), .overflow_count_o(ovf));

  initial begin
    int dropped;
    wr = 0; rd = 0; wd = 0; dropped = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      checks++;
      if (empty != (model.size() == 0) || int'(level) != model.size()) begin
        failures++; if (failures < 10) $display("level %0d model %0d", level, model.size());
      end
      wr = ($urandom % 2) == 1;
      rd = ($urandom % 3) != 0 && i < 2000 || ($urandom % 5 == 0);
      wd = $urandom;
      if (rd && model.size() > 0) begin
        checks++;
        if (rdata != model[0]) begin failures++; if (failures < 10) $display("data %h expected %h", rdata, model[0]); end
      end
      @(posedge clk);
      begin
        bit was_full;
        was_full = model.size() == 16;
        if (rd && model.size() > 0) void'(model.pop_front());
        if (wr) begin if (!was_full) model.push_back(wd); else dropped++; end
      end
    end
    @(negedge clk);
    wr = 0;
    rd = 1;
    while (model.size() > 0) begin @(posedge clk); void'(model.pop_front()); @(negedge clk); end
    rd = 0;
    for (int i = 0; i < 40; i++) begin wr = 1; wd = i; @(posedge clk); @(negedge clk); end
    wr = 0;
    dropped += 24;
    checks++;
    if (ovf != 32'(dropped)) begin failures++; $display("overflow count %0d expected %0d", ovf, dropped); end
    checks++;
    if (!full || level != 16 || rdata != 0) begin failures++; $display("full %b level %0d head %0d", full, level, rdata); end
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
