// cic_decim: Cascaded Integrator-Comb decimator for one channel (CIC1).
//
// STAGES integrators run at the input rate (one update per `en_i`), a
// decimator keeps every RATE-th integrator output, and STAGES combs with a
// differential delay of one run at the output rate. The internal width
// INT_W must be at least IN_W + STAGES*log2(RATE) so that the modular
// arithmetic of the integrators cancels exactly; the output keeps the top
// OUT_W bits (truncation, no rounding). Defaults are the first demodulator
// stage of the source description: 3 stages, decimation 128, 35 bits inside,
// 17 bits out. With a 14-bit input the DC gain 128^3 = 2^21 and the drop of
// 18 bits leave a net gain of 8.
//
// Timing: out_valid_o pulses for one cycle on the clock after every RATE-th
// enabled input; out_o holds until the next output. The decimation phase
// starts at reset, so all channels reset together decimate in step.
module cic_decim #(
  parameter int unsigned IN_W   = 14,
  parameter int unsigned INT_W  = 35,
  parameter int unsigned OUT_W  = 17,
  parameter int unsigned STAGES = 3,
  parameter int unsigned RATE   = 128
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en_i,
  input  logic signed [IN_W-1:0]  in_i,
  output logic signed [OUT_W-1:0] out_o,
  output logic                    out_valid_o
);
  initial assert (INT_W >= IN_W + STAGES * $clog2(RATE))
    else $error("cic_decim: INT_W too small for bit growth");

  logic signed [INT_W-1:0] integ_q [STAGES];
  logic signed [INT_W-1:0] delay_q [STAGES];
  logic [$clog2(RATE)-1:0] phase_q;
  logic signed [INT_W-1:0] comb [STAGES+1];

  always_comb begin
    comb[0] = integ_q[STAGES-1];
    for (int s = 0; s < STAGES; s++) comb[s+1] = comb[s] - delay_q[s];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int s = 0; s < STAGES; s++) begin
        integ_q[s] <= '0;
        delay_q[s] <= '0;
      end
      phase_q     <= '0;
      out_o       <= '0;
      out_valid_o <= 1'b0;
    end else begin
      out_valid_o <= 1'b0;
      if (en_i) begin
        integ_q[0] <= integ_q[0] + INT_W'(in_i);
        for (int s = 1; s < STAGES; s++) integ_q[s] <= integ_q[s] + integ_q[s-1];
        phase_q <= phase_q + 1'b1;
        if (phase_q == '1) begin
          for (int s = 0; s < STAGES; s++) delay_q[s] <= comb[s];
          out_o       <= comb[STAGES][INT_W-1 -: OUT_W];
          out_valid_o <= 1'b1;
        end
      end
    end
  end
endmodule
