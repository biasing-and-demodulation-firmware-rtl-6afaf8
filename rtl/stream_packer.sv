// stream_packer: output-stage selection, channel tagging and timestamp
// insertion of the demodulator.
//
// A software-controlled multiplexer (`sel_i`) picks one of the seven sample
// streams (CIC2, FIR1..FIR6). Each selected sample is sign-extended to a
// 24-bit 2's-complement number and tagged with its 8-bit channel identifier
// in the top byte, giving a 32-bit word for the data FIFO. When channel 0 of
// the selected stream is emitted, the 96-bit timestamp of the selected
// format (`ts_i`) is captured into the timestamp register; after the last
// channel (NCH-1) has been written, the captured timestamp is written as four
// 24-bit pieces (least significant first) tagged with the four identifiers of
// its format, TS_ID_BASE + 4*format + 0..3. Stage choice, 24+8-bit words,
// capture at the first channel and four tagged words after the last follow
// the source description; identifier values, piece order and the byte
// position of the tag are this design's choices.
//
// Timing: a selected sample is written one cycle after it arrives; the four
// timestamp words follow the last channel in the next four cycles. Samples of
// the selected stage are at least two cycles apart except in a CIC2 burst,
// which ends with the last channel, so the two never collide.
module stream_packer
  import dfmux_pkg::*;
#(
  parameter int unsigned NCH = DMFD_CHANNELS
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  stage_sel_e               sel_i,
  input  logic [1:0]               ts_format_i,
  input  logic [TS_W-1:0]          ts_i,
  input  logic [6:0]               stage_valid_i,   // CIC2, FIR1..FIR6
  input  chan_sample_t [6:0]       stage_i,
  output logic                     wr_en_o,
  output logic [FIFO_W-1:0]        wr_data_o
);
  logic [TS_W-1:0]  ts_q;
  logic [1:0]       fmt_q;
  logic [2:0]       ts_left_q;   // timestamp words still to write
  logic [1:0]       ts_idx_q;

  logic         v;
  chan_sample_t s;
  always_comb begin
    v = stage_valid_i[sel_i];
    s = stage_i[sel_i];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ts_q      <= '0;
      fmt_q     <= '0;
      ts_left_q <= '0;
      ts_idx_q  <= '0;
      wr_en_o   <= 1'b0;
      wr_data_o <= '0;
    end else begin
      wr_en_o <= 1'b0;
      if (v) begin
        wr_en_o   <= 1'b1;
        wr_data_o <= {s.chan, OUT_DATA_W'($signed(s.data))};
        if (s.chan == '0) begin
          ts_q  <= ts_i;
          fmt_q <= ts_format_i;
        end
        if (int'(s.chan) == NCH - 1) begin
          ts_left_q <= 3'd4;
          ts_idx_q  <= '0;
        end
      end else if (ts_left_q != '0) begin
        wr_en_o   <= 1'b1;
        wr_data_o <= {CHAN_ID_W'(TS_ID_BASE + 4 * int'(fmt_q) + int'(ts_idx_q)),
                      ts_q[24 * ts_idx_q +: 24]};
        ts_idx_q  <= ts_idx_q + 1'b1;
        ts_left_q <= ts_left_q - 1'b1;
      end
    end
  end

  a_no_collision: assert property (@(posedge clk) disable iff (!rst_n)
                                   v |-> ts_left_q == '0)
    else $error("stream_packer: sample arrived while timestamp words were pending");
endmodule
