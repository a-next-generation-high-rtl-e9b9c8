// sram_buffer -- controller of the card's local SRAM, used as a ring of regions.
//
// Data words from the record writer are stored at a write pointer that runs
// round the whole SRAM. The read side works in regions of one bus-master
// transfer (xfer_words DWORDs, at most half the SRAM): as soon as a full
// region is stored, it is read out as one burst towards the PCI interface while
// new data keeps going into the next region. This is the double buffering that
// lets acquisition run on while the host fetches data.
//
// Arbitration: the SRAM is single-ported, one access per clock. A write always
// wins; reads use the clocks in between, which the data rate leaves in plenty.
// If a write finds the SRAM full (the host fell behind by a whole SRAM), the
// word is dropped and overflow is set (sticky until clear).
// Interface: the SRAM port is synchronous: sram_addr/sram_we/sram_wdata/sram_re
// are sampled at the next clock edge and read data is on sram_rdata one clock
// after sram_re. Read data goes through an OFIFO_DEPTH-entry output FIFO to a
// valid/ready stream (out_*). Issued reads are limited so that this FIFO never
// overflows. clear empties everything (used when a new observation is set up).
// That data is buffered in SRAM and new data goes to a different region while
// the old one is transferred is as the instrument is described; the ring, the
// priority and the FIFO are this design's choices.
module sram_buffer
  import chisdas_pkg::*;
#(
  parameter int unsigned SRAM_AW     = 17,
  parameter int unsigned OFIFO_DEPTH = 4
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clear,
  input  logic               wr_valid,
  input  logic [31:0]        wr_data,
  input  logic [XFER_W-1:0]  xfer_words,
  // SRAM port
  output logic [SRAM_AW-1:0] sram_addr,
  output logic               sram_we,
  output logic               sram_re,
  output logic [31:0]        sram_wdata,
  input  logic [31:0]        sram_rdata,
  // stream to the PCI interface
  output logic               out_valid,
  output logic [31:0]        out_data,
  input  logic               out_ready,
  output logic               overflow,
  output logic [SRAM_AW:0]   level
);

  localparam logic [SRAM_AW:0] DEPTH = {1'b1, {SRAM_AW{1'b0}}};
  localparam int unsigned      FW    = $clog2(OFIFO_DEPTH);
  localparam int unsigned      BW    = (XFER_W > SRAM_AW + 1) ? XFER_W : SRAM_AW + 1;

  logic [SRAM_AW-1:0] wp, rp;
  logic [BW-1:0]      burst_left, xfer_eff;
  logic               rd_pend;
  logic               wr_ok, rd_issue;

  logic [31:0]   fifo [OFIFO_DEPTH];
  logic [FW-1:0] f_head, f_tail;
  logic [FW:0]   f_cnt;
  logic          f_push, f_pop;

  always_comb begin
    xfer_eff = BW'(xfer_words);
    if (xfer_eff > BW'(DEPTH >> 1)) xfer_eff = BW'(DEPTH >> 1);
    if (xfer_eff == '0) xfer_eff = BW'(1);
  end

  assign wr_ok    = wr_valid && (level != DEPTH);
  assign rd_issue = !wr_valid && (burst_left != '0) && (level != '0)
                 && (32'(f_cnt) + 32'(rd_pend) < OFIFO_DEPTH);

  assign sram_we    = wr_ok;
  assign sram_re    = rd_issue;
  assign sram_addr  = wr_valid ? wp : rp;
  assign sram_wdata = wr_data;

  assign f_push    = rd_pend;
  assign out_valid = (f_cnt != '0);
  assign out_data  = fifo[f_head];
  assign f_pop     = out_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp         <= '0;
      rp         <= '0;
      level      <= '0;
      burst_left <= '0;
      rd_pend    <= 1'b0;
      overflow   <= 1'b0;
      f_head     <= '0;
      f_tail     <= '0;
      f_cnt      <= '0;
    end else if (clear) begin
      wp         <= '0;
      rp         <= '0;
      level      <= '0;
      burst_left <= '0;
      rd_pend    <= 1'b0;
      overflow   <= 1'b0;
      f_head     <= '0;
      f_tail     <= '0;
      f_cnt      <= '0;
    end else begin
      if (wr_valid && !wr_ok) overflow <= 1'b1;
      if (wr_ok) begin
        wp    <= wp + 1'b1;
        level <= level + 1'b1;
      end else if (rd_issue) begin
        rp    <= rp + 1'b1;
        level <= level - 1'b1;
      end
      if (rd_issue)
        burst_left <= burst_left - 1'b1;
      else if (burst_left == '0 && BW'(level) >= xfer_eff)
        burst_left <= xfer_eff;
      rd_pend <= rd_issue;
      if (f_push) begin
        fifo[f_tail] <= sram_rdata;
        f_tail       <= (32'(f_tail) == OFIFO_DEPTH - 1) ? '0 : f_tail + 1'b1;
      end
      if (f_pop) f_head <= (32'(f_head) == OFIFO_DEPTH - 1) ? '0 : f_head + 1'b1;
      f_cnt <= f_cnt + (FW+1)'(f_push) - (FW+1)'(f_pop);
    end
  end

  // valid/ready stream rule: once offered, a word stays until taken
  a_stream_hold: assert property (@(posedge clk) disable iff (!rst_n || clear)
    out_valid && !out_ready |=> out_valid && $stable(out_data));
  a_fifo_bound: assert property (@(posedge clk) disable iff (!rst_n)
    32'(f_cnt) <= OFIFO_DEPTH);

endmodule
