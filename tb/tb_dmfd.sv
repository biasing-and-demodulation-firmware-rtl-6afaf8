// tb_dmfd: the demodulator alone at reduced size (2 channels per module,
// CIC1 decimation 16, CIC2 decimation 8, 256-word FIFO). Input 0 takes an
// ADC tone, input 1 a tone presented on the carrier loopback port, both
// generated here. Channel pairs (0,1) and (2,3) are locked in quadrature
// through the phase bus. The test reads the FIFO and checks the frame
// format (8 channels then four timestamp words of the internal format), the
// frame period for CIC2 and FIR1 (1024 and 2048 cycles), and the I/Q
// magnitudes of both tones against amplitude * 0.963/2 * 8.
module tb_dmfd;
  import dfmux_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int DCH = 2, NCH = 8, PERIOD = 8 * 16 * 8;
  localparam logic [31:0] F0 = 32'h0CCC_CCCD, F1 = 32'h051E_B852;

  logic en, rd_en, empty;
  logic [3:0] div = 0;
  route_t [3:0] route;
  logic [3:0][13:0] adc;
  logic [3:0][15:0] car, nul;
  ref_cfg_t [NCH-1:0] refc;
  logic [7:0] bus_src;
  stage_sel_e sel;
  logic [31:0] rd_data, ovf;
  logic [8:0] level;
  logic [6:0] sv;

  dmfd #(.DCH(DCH), .CIC1_RATE(16), .CIC2_RATE(8), .FIFO_DEPTH(256)) dut (
    .clk, .rst_n, .en_i(en), .route_i(route), .adc_i(adc), .carrier_i(car), .nuller_i(nul),
    .ref_cfg_i(refc), .phase_bus_src_i(bus_src), .stage_sel_i(sel), .ts_format_i(2'd2), .ts_i(96'(div)),
    .rd_en_i(rd_en), .rd_data_o(rd_data), .empty_o(empty), .level_o(level), .overflow_count_o(ovf),
    .stage_valid_o(sv));

  logic [31:0] p0 = 0, p1 = 0;
  always @(posedge clk) begin
    div <= (div == 7) ? 0 : div + 1;
    if (en) begin
      p0 <= p0 + F0; p1 <= p1 + F1;
      adc[0] <= 14'($rtoi(4000.0 * $sin(2.0 * 3.14159265358979 * real'(p0) / 4294967296.0)));
      car[1] <= 16'($rtoi(8000.0 * $sin(2.0 * 3.14159265358979 * real'(p1) / 4294967296.0)));
    end
  end
  assign en = rst_n && div == 7;
  assign adc[3:1] = '0, car[0] = '0, car[3:2] = '0, nul = '0;

  int vals [NCH];
  int exp_id = 0, frames = 0;
  longint last_t = -1, dt = 0;
  bit ok = 1;
  assign rd_en = !empty;
  always @(posedge clk) if (rst_n && rd_en) begin
    int id;
    id = int'(rd_data[31:24]);
    if (id == 0) begin exp_id = 0; ok = 1; end
    if (exp_id < NCH) begin
      if (id != exp_id) ok = 0; else vals[id] = int'($signed(rd_data[23:0]));
    end else if (id != 248 + exp_id - NCH) ok = 0;
    exp_id++;
    if (exp_id == NCH + 4) begin
      exp_id = 0;
      checks++;
      if (!ok) begin failures++; $display("malformed frame"); end
      frames++;
      dt = last_t < 0 ? 0 : ($time - last_t) / 2;
      last_t = $time;
    end
  end

  task automatic wait_frames(input int n);
    int f0;
    f0 = frames;
    while (frames < f0 + n) @(posedge clk);
  endtask

  task automatic check_mag(input int i, input int q, input real e, input string what);
    real m;
    m = $sqrt(real'(i) * real'(i) + real'(q) * real'(q));
    checks++;
    if (m < 0.93 * e || m > 1.07 * e) begin failures++; $display("%s magnitude %f expected %f", what, m, e); end
  endtask

  initial begin
    route[0] = '{src: SRC_ADC, index: 2'd0};
    route[1] = '{src: SRC_CARRIER, index: 2'd1};
    route[2] = '{src: SRC_ADC, index: 2'd2};
    route[3] = '{src: SRC_NULLER, index: 2'd3};
    refc = '0;
    refc[0].freq = F0; refc[1].freq = F0; refc[1].phase_offset = 32'h4000_0000;
    refc[2].freq = F1; refc[3].freq = F1; refc[3].phase_offset = 32'h4000_0000;
    refc[4].freq = F0; refc[6].freq = F1;
    bus_src = 0; sel = SEL_CIC2;
    repeat (4) @(posedge clk);
    rst_n <= 1;
    repeat (20) @(posedge clk);
    refc[1].load <= 1; @(posedge clk); refc[1].load <= 0; repeat (10) @(posedge clk);
    bus_src <= 2; refc[3].load <= 1; @(posedge clk); refc[3].load <= 0;
    wait_frames(5);
    checks++;
    if (dt != PERIOD) begin failures++; $display("CIC2 period %0d", dt); end
    check_mag(vals[0], vals[1], 4000.0 * 0.9634 / 2.0 * 8.0, "ADC tone");
    check_mag(vals[2], vals[3], 2000.0 * 0.9634 / 2.0 * 8.0, "loopback tone");
    checks++;
    if (vals[4] != 0 || vals[5] != 0 || vals[6] != 0 || vals[7] != 0) begin failures++; $display("idle inputs not zero"); end
    sel <= SEL_FIR1;
    wait_frames(3);
    checks++;
    if (dt != 2 * PERIOD) begin failures++; $display("FIR1 period %0d", dt); end
    wait_frames(46);
    check_mag(vals[0], vals[1], 4000.0 * 0.9634 / 2.0 * 8.0, "ADC tone (FIR1)");
    check_mag(vals[2], vals[3], 2000.0 * 0.9634 / 2.0 * 8.0, "loopback tone (FIR1)");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
