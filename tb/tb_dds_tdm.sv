// tb_dds_tdm: checks the time-shared bias DDS against a full-wave sine
// model computed here with $sin (not the quarter-wave table of the block).
// Eight channels with different frequency words and phase offsets run for
// 400 samples each; every output must match the model within one LSB and
// arrive on the outputs after the third rising edge counted from the one
// that took its slot.
module tb_dds_tdm;
  import dfmux_pkg::*;
  logic clk = 0, rst_n = 0;
  always #2.5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [2:0] slot;
  logic [7:0][31:0] freq, phase;
  logic signed [11:0] sample;
  logic [2:0] slot_o;
  int unsigned nsamp [8];

  dds_tdm dut (.clk, .rst_n, .slot_i(slot), .freq_i(freq), .phase_i(phase),
               .sample_o(sample), .slot_o(slot_o));

  function automatic int model(input logic [31:0] ph);
    real v;
    int  a;
    a = int'(ph[31:18]);
    v = $sin(2.0 * 3.14159265358979 * (real'(a) + 0.5) / 16384.0) * 2047.0;
    return v >= 0 ? $rtoi(v + 0.5) : -$rtoi(-v + 0.5);
  endfunction


  initial begin
    for (int c = 0; c < 8; c++) begin
      freq[c]  = 32'h0100_0000 * (c + 1) + 32'h1234 * c;
      phase[c] = 32'h2000_0000 * c;
      nsamp[c] = 0;
    end
    freq[7] = 32'hFFF0_0000;   // a near-Nyquist negative frequency
    slot = 0;
    repeat (4) @(negedge clk);
    rst_n = 1;
    // slot j%8 is presented at rising edge j; its sample is on the outputs
    // after rising edge j+2
    for (int j = 0; j < 3200 + 2; j++) begin
      @(posedge clk);
      @(negedge clk);
      if (j >= 2) begin
        int c, e;
        c = (j - 2) % 8;
        e = model(phase[c] + nsamp[c] * freq[c]);
        checks++;
        if (int'(slot_o) != c) begin
          failures++;
          if (failures < 10) $display("slot %0d, expected %0d", slot_o, c);
        end
        if ((int'(sample) - e) > 1 || (e - int'(sample)) > 1) begin
          failures++;
          if (failures < 10) $display("ch %0d n %0d: got %0d expected %0d", c, nsamp[c], sample, e);
        end
        nsamp[c]++;
      end
      slot = slot + 1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
