// tb_dfmux_full: the whole signal path at its published size (68
// demodulator channels, CIC1 decimation 128, CIC2 decimation 16, 43- and
// 108-tap FIRs, 16384-word FIFO), taken through one complete operation:
// a carrier tone is synthesized, looped back into the demodulator,
// demodulated by an I/Q pair built with the phase bus, decimated, tagged,
// timestamped, buffered and read out. An ADC tone is demodulated the same
// way. With CIC2 selected the test checks the frame format (68 channels in
// order plus four timestamp words), the frame period (16384 core cycles,
// i.e. 12.21 kHz at 200 MHz) and the I/Q magnitudes; then FIR1 is
// selected, the period (32768 cycles) is checked and, once FIR1 has
// filled, the magnitudes are checked again. Last, FIR6 is selected and its
// frame format and period (1048576 cycles, 190.7 Hz) are checked.
module tb_dfmux_full;
  import dfmux_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int DCH = 17, NCH = 4 * DCH, CIC1 = 128, CIC2 = 16, DEPTH = 16384;
  localparam int BASE_PERIOD = 8 * CIC1 * CIC2;       // cycles per CIC2 frame
  localparam logic [31:0] FC = 32'h0CCC_CCCD;          // 1.25 MHz at 25 MSPS
  localparam logic [31:0] FA = 32'h051E_B852;          // 0.5 MHz
  localparam logic [31:0] FN = 32'h0A3D_70A4;          // 1.0 MHz

  logic sample_en, dac_valid, rd_en, empty;
  logic [3:0][13:0] adc;
  logic [3:0][15:0] car_dac, nul_dac;
  logic [3:0][15:0][31:0] cf, cp, nf, np;
  logic [3:0][15:0][19:0] ca, na;
  route_t [3:0] route;
  ref_cfg_t [NCH-1:0] refc;
  logic [7:0] bus_src;
  stage_sel_e sel;
  logic [1:0] fmt;
  logic [63:0] irig, ebex;
  logic irig_new, ebex_new;
  logic [31:0] rd_data, ovf;
  logic [$clog2(DEPTH):0] level;
  logic [6:0] stage_valid;

  dfmux_top dut (
    .clk, .rst_n, .sample_en_o(sample_en), .adc_i(adc), .carrier_dac_o(car_dac), .nuller_dac_o(nul_dac),
    .dac_valid_o(dac_valid), .carrier_freq_i(cf), .carrier_phase_i(cp), .carrier_amp_i(ca),
    .nuller_freq_i(nf), .nuller_phase_i(np), .nuller_amp_i(na), .route_i(route), .ref_cfg_i(refc),
    .phase_bus_src_i(bus_src), .stage_sel_i(sel), .ts_format_i(fmt), .irig_ts_i(irig), .irig_new_i(irig_new),
    .ebex_ts_i(ebex), .ebex_new_i(ebex_new), .rd_en_i(rd_en), .rd_data_o(rd_data), .empty_o(empty),
    .level_o(level), .overflow_count_o(ovf), .stage_valid_o(stage_valid));

  // mechanism counters
  int n_loopback = 0, n_adc_route = 0, n_phase_lock = 0, n_stage_switch = 0;
  int n_ts_insert = 0;

  // ADC tone on input 1 at FA
  logic [31:0] adc_ph = 0;
  always @(posedge clk) if (sample_en) begin
    adc_ph <= adc_ph + FA;
    adc[1] <= 14'($rtoi(3000.0 * $sin(2.0 * 3.14159265358979 * real'(adc_ph) / 4294967296.0)));
  end
  assign adc[0] = 14'h1555, adc[2] = 14'h0AAA, adc[3] = 14'd0;

  // ---------------- FIFO reader and frame parser ----------------
  int frame_vals [NCH];
  logic [95:0] frame_ts;
  int exp_id = 0, frames = 0, bad_frames = 0;
  longint last_frame_t = -1, frame_dt = 0;
  bit frame_ok = 1;
  bit reading = 1;
  assign rd_en = reading && !empty;

  always @(posedge clk) if (rst_n && rd_en) begin
    int id;
    id = int'(rd_data[31:24]);
    if (exp_id < NCH) begin
      if (id != exp_id) frame_ok = 0;
      if (id < NCH) frame_vals[id] = int'($signed(rd_data[23:0]));
    end else begin
      if (id != 240 + 4 * int'(fmt_of_frame) + (exp_id - NCH)) frame_ok = 0;
      frame_ts[24 * (exp_id - NCH) +: 24] = rd_data[23:0];
    end
    if (id == 0) begin exp_id = 0; frame_ok = 1; end
    exp_id++;
    if (exp_id == NCH + 4) begin
      exp_id = 0;
      if (frame_ok) begin
        frames++;
        n_ts_insert++;
        frame_dt = (last_frame_t < 0) ? 0 : ($time - last_frame_t) / 2;
        last_frame_t = $time;
      end else begin
        bad_frames++;
      end
      frame_ok = 1;
    end
  end
  logic [1:0] fmt_of_frame;
  assign fmt_of_frame = fmt;

  task automatic wait_frames(input int n);
    int f0;
    f0 = frames;
    while (frames < f0 + n) @(posedge clk);
  endtask

  task automatic check_period(input int expected, input string what);
    checks++;
    if (frame_dt != expected) begin failures++; $display("%s: frame period %0d, expected %0d", what, frame_dt, expected); end
  endtask

  function automatic real mag(input int i, input int q);
    return $sqrt(real'(i) * real'(i) + real'(q) * real'(q));
  endfunction

  // expected I/Q magnitudes: amplitude * 0.963/2 (reference fundamental) * 8 (CIC1)
  real exp_car, exp_adc;

  task automatic check_levels(input string what);
    real m0, m2;
    m0 = mag(frame_vals[0], frame_vals[1]);
    m2 = mag(frame_vals[17], frame_vals[18]);
    checks++;
    if (m0 < 0.93 * exp_car || m0 > 1.07 * exp_car) begin
      failures++; $display("%s: carrier loopback magnitude %f expected %f", what, m0, exp_car);
    end else n_loopback++;
    checks++;
    if (m2 < 0.93 * exp_adc || m2 > 1.07 * exp_adc) begin
      failures++; $display("%s: ADC tone magnitude %f expected %f", what, m2, exp_adc);
    end else n_adc_route++;
    checks++;
    for (int c = 51; c < NCH; c++) if (frame_vals[c] != 0) begin
      failures++; $display("%s: idle channel %0d = %0d", what, c, frame_vals[c]);
    end
    if (frame_vals[16] != 0) begin failures++; $display("%s: zero-frequency channel %0d", what, frame_vals[16]); end
  endtask

  initial begin
    real a_car;
    cf = '0; cp = '0; ca = '0; nf = '0; np = '0; na = '0;
    cf[0][0] = FC; ca[0][0] = 20'd200000;
    nf[0][0] = FN; na[0][0] = 20'd150000;
    route[0] = '{src: SRC_CARRIER, index: 2'd0};
    route[1] = '{src: SRC_ADC, index: 2'd1};
    route[2] = '{src: SRC_NULLER, index: 2'd0};
    route[3] = '{src: SRC_ADC, index: 2'd3};
    refc = '0;
    refc[0].freq = FC; refc[1].freq = FC; refc[1].phase_offset = 32'h4000_0000;
    refc[17].freq = FA; refc[18].freq = FA; refc[18].phase_offset = 32'h4000_0000;
    refc[34].freq = FN; refc[16].freq = 32'd0;
    for (int c = 51; c < NCH; c++) refc[c].freq = FC + 32'(c);
    bus_src = 0; sel = SEL_CIC2; fmt = 2'd2;
    irig = '0; ebex = '0; irig_new = 0; ebex_new = 0;
    // carrier loopback amplitude at the 14-bit input: 2047*200000/2^16/4
    a_car = 2047.0 * 200000.0 / 65536.0 / 4.0;
    exp_car = a_car * 0.9634 / 2.0 * 8.0;
    exp_adc = 3000.0 * 0.9634 / 2.0 * 8.0;
    repeat (5) @(posedge clk);
    rst_n <= 1;
    repeat (20) @(posedge clk);
    // phase-bus locks: channel 1 to channel 0, channel 3 to channel 2
    bus_src <= 8'd0; refc[1].load <= 1; @(posedge clk); refc[1].load <= 0;
    repeat (10) @(posedge clk);
    checks++;
    if (dut.u_dmfd.g_ch[1].u_ch.u_ref.acc_q - dut.u_dmfd.g_ch[0].u_ch.u_ref.acc_q != 32'h4000_0000) begin
      failures++; $display("phase lock 0/1 failed");
    end else n_phase_lock++;
    bus_src <= 8'd17; refc[18].load <= 1; @(posedge clk); refc[18].load <= 0;
    repeat (10) @(posedge clk);
    checks++;
    if (dut.u_dmfd.g_ch[18].u_ch.u_ref.acc_q - dut.u_dmfd.g_ch[17].u_ch.u_ref.acc_q != 32'h4000_0000) begin
      failures++; $display("phase lock 17/18 failed");
    end else n_phase_lock++;

    // ---- CIC2 output ----
    wait_frames(6);
    check_period(BASE_PERIOD, "CIC2");
    check_levels("CIC2");
    // internal timestamps advance by one frame period of core cycles
    begin
      logic [95:0] t0;
      t0 = frame_ts;
      wait_frames(1);
      checks++;
      if (frame_ts - t0 != 96'(BASE_PERIOD)) begin failures++; $display("internal timestamp step %0d", frame_ts - t0); end
    end

    // ---- FIR1 output ----
    sel <= SEL_FIR1; n_stage_switch++;
    wait_frames(2);
    wait_frames(1);
    check_period(BASE_PERIOD * 2, "FIR1");
    repeat (46 * BASE_PERIOD) @(posedge clk);   // > 43 FIR1 input samples
    wait_frames(1);
    check_levels("FIR1");

    // ---- FIR6 output, the slowest stream (190.7 Hz per channel) ----
    sel <= SEL_FIR6; n_stage_switch++;
    wait_frames(2);
    wait_frames(1);
    check_period(BASE_PERIOD * 64, "FIR6");

    checks++;
    if (n_loopback == 0 || n_adc_route == 0 || n_phase_lock == 0 || n_stage_switch == 0 ||
        n_ts_insert == 0) failures++;
    $display("mechanisms: loopback=%0d adc_route=%0d phase_lock=%0d stage_switch=%0d ts_insert=%0d",
             n_loopback, n_adc_route, n_phase_lock, n_stage_switch, n_ts_insert);
    $display("frames=%0d malformed=%0d", frames, bad_frames);
    checks++;
    if (bad_frames != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (6_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
