// tb_input_crossbar: random sources and random routes; each of the four
// outputs must hold the chosen ADC word, or the top 14 bits of the chosen
// carrier/nuller word, after each sample strobe, and hold still between
// strobes.
module tb_input_crossbar;
  import dfmux_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic en;
  route_t [3:0] route;
  logic [3:0][13:0] adc, out, e, last;
  logic [3:0][15:0] car, nul;

  input_crossbar dut (.clk, .rst_n, .en_i(en), .route_i(route), .adc_i(adc), .carrier_i(car),
                      .nuller_i(nul), .out_o(out));

  initial begin
    en = 0; route = '0; adc = '0; car = '0; nul = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    last = '0;
    for (int i = 0; i < 2000; i++) begin
      en = ($urandom % 4) == 0;
      for (int m = 0; m < 4; m++) begin
        route[m].src   = route_src_e'($urandom % 3);
        route[m].index = 2'($urandom);
        adc[m] = 14'($urandom);
        car[m] = 16'($urandom);
        nul[m] = 16'($urandom);
      end
      for (int m = 0; m < 4; m++)
        case (route[m].src)
          SRC_CARRIER: e[m] = car[route[m].index][15:2];
          SRC_NULLER:  e[m] = nul[route[m].index][15:2];
          default:     e[m] = adc[route[m].index];
        endcase
      if (en) last = e;
      @(negedge clk);
      checks++;
      if (out != last) begin failures++; if (failures < 10) $display("got %h expected %h", out, last); end
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
