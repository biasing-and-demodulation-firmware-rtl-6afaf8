// tb_ref_synth: checks the coarse demodulator reference. With a frequency
// word of 2^28 the sequence advances one entry per sample, so 32 samples
// must reproduce 0,3,6,7,7,7,6,3,0,-3,-6,-7,-7,-7,-6,-3 twice. A second
// instance is then locked to the first through the phase bus with a quarter
// turn of offset and must stay exactly 2^30 ahead for 200 samples, with a
// load strobe given between sample strobes.
module tb_ref_synth;
  import dfmux_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic en, load_b;
  logic [31:0] freq_a, freq_b, next_a, next_b, ph_a, ph_b;
  logic signed [3:0] coef_a, coef_b;
  int expected_seq [16] = '{0, 3, 6, 7, 7, 7, 6, 3, 0, -3, -6, -7, -7, -7, -6, -3};

  ref_synth u_a (.clk, .rst_n, .en_i(en), .freq_i(freq_a), .phase_offset_i(32'd0), .load_i(1'b0),
                 .bus_phase_i(32'd0), .phase_next_o(next_a), .phase_o(ph_a), .coef_o(coef_a));
  ref_synth u_b (.clk, .rst_n, .en_i(en), .freq_i(freq_b), .phase_offset_i(32'h4000_0000), .load_i(load_b),
                 .bus_phase_i(next_a), .phase_next_o(next_b), .phase_o(ph_b), .coef_o(coef_b));

  task automatic step();   // one sample: strobe, then three idle cycles
    en <= 1; @(posedge clk); en <= 0; repeat (3) @(posedge clk);
  endtask

  initial begin
    en = 0; load_b = 0;
    freq_a = 32'h1000_0000; freq_b = 32'h0123_4567;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int n = 0; n < 32; n++) begin
      checks++;
      if (int'(coef_a) != expected_seq[n % 16]) begin
        failures++;
        $display("sample %0d: coef %0d expected %0d", n, coef_a, expected_seq[n % 16]);
      end
      step();
    end
    // phase lock b to a with a quarter turn
    freq_a = 32'h0765_4321; freq_b = 32'h0765_4321;
    step();
    load_b <= 1; @(posedge clk); load_b <= 0; @(posedge clk);
    step();
    for (int n = 0; n < 200; n++) begin
      checks++;
      if (ph_b - ph_a != 32'h4000_0000) begin
        failures++;
        if (failures < 10) $display("lock: a %h b %h", ph_a, ph_b);
      end
      checks++;
      if (ph_a + freq_a != next_a) failures++;
      step();
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
