// input_crossbar: routing of the four demodulator inputs.
//
// Each of the four demodulator inputs can take any of twelve signals: the
// four ADCs, or the four carrier or four nuller synthesizer outputs looped
// back digitally (bypassing D/A and A/D conversion, for debugging and
// network-analysis use). The choice per input is a route_t (family and
// module index). Loopback samples are the synthesizers' 16-bit 2's-complement
// words cut to their top 14 bits, the ADC width. The sources and the
// rerouting follow the source description; the loopback scaling and the
// register on each output are this design's choices.
//
// Timing: outputs are registered on each 25 MSPS sample strobe `en_i`.
module input_crossbar
  import dfmux_pkg::*;
(
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic                                en_i,
  input  route_t [NUM_MODULES-1:0]            route_i,
  input  logic [NUM_MODULES-1:0][ADC_W-1:0]   adc_i,
  input  logic [NUM_MODULES-1:0][DAC_W-1:0]   carrier_i,
  input  logic [NUM_MODULES-1:0][DAC_W-1:0]   nuller_i,
  output logic [NUM_MODULES-1:0][ADC_W-1:0]   out_o
);
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_o <= '0;
    end else if (en_i) begin
      for (int m = 0; m < NUM_MODULES; m++) begin
        unique case (route_i[m].src)
          SRC_CARRIER: out_o[m] <= carrier_i[route_i[m].index][DAC_W-1 -: ADC_W];
          SRC_NULLER:  out_o[m] <= nuller_i[route_i[m].index][DAC_W-1 -: ADC_W];
          default:     out_o[m] <= adc_i[route_i[m].index];
        endcase
      end
    end
  end
endmodule
