// data_fifo: the demodulator's output FIFO, read by the processor.
//
// A single-clock first-in first-out buffer of 32-bit words (DEPTH = 16384,
// a 512-kbit memory). When the FIFO is full, a write is dropped and counted
// in `overflow_count_o`: as in the source description, samples are lost
// whenever software does not drain the FIFO fast enough, and the channel
// identifier in every word lets software resynchronise. `rd_en_i` pops the
// word shown on `rd_data_o` (first-word fall-through), valid while
// `empty_o` is low. Depth and the drop-on-full policy are this design's
// choices (the source quotes only about 30 block RAMs of 16 kbit, i.e.
// roughly 16k words of 32 bits).
module data_fifo
  import dfmux_pkg::*;
#(
  parameter int unsigned DEPTH = 16384,
  parameter int unsigned W     = FIFO_W
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       wr_en_i,
  input  logic [W-1:0]               wr_data_i,
  input  logic                       rd_en_i,
  output logic [W-1:0]               rd_data_o,
  output logic                       empty_o,
  output logic                       full_o,
  output logic [$clog2(DEPTH):0]     level_o,
  output logic [31:0]                overflow_count_o
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [W-1:0]  mem [DEPTH];
  logic [AW:0]   wptr_q, rptr_q;
  logic          do_wr, do_rd;

  assign level_o  = wptr_q - rptr_q;
  assign empty_o  = (wptr_q == rptr_q);
  assign full_o   = (level_o == (AW+1)'(DEPTH));
  assign do_rd    = rd_en_i && !empty_o;
  assign do_wr    = wr_en_i && !full_o;
  assign rd_data_o = mem[rptr_q[AW-1:0]];

  always_ff @(posedge clk) begin
    if (do_wr) mem[wptr_q[AW-1:0]] <= wr_data_i;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wptr_q           <= '0;
      rptr_q           <= '0;
      overflow_count_o <= '0;
    end else begin
      if (do_wr) wptr_q <= wptr_q + 1'b1;
      if (do_rd) rptr_q <= rptr_q + 1'b1;
      if (wr_en_i && full_o) overflow_count_o <= overflow_count_o + 1;
    end
  end
endmodule
