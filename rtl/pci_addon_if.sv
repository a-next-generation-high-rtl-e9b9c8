// pci_addon_if -- add-on side of the PCI interface chip.
//
// The host talks to the card through the FIFOs of its PCI interface chip.
// Inbound (host to card) it writes instruction words; outbound (card to host)
// the chip empties its FIFO into PC memory by bus-master transfer.
// Inbound: when the inbound FIFO is not empty, in_rd is strobed for one clock;
// the word is on in_data one clock later and is handed on with a one-clock
// instr_valid pulse. The next read is issued no earlier than the clock after
// that, when in_empty reflects the read. Outbound: words of the data stream
// (s_valid/s_data) are written with out_wr whenever the outbound FIFO is not
// full (s_ready = !out_full). The words of each transfer are counted; after
// xfer_words of them xfer_done pulses once, e.g. for an add-on interrupt.
// clear restarts the transfer count. A generic empty/read and full/write FIFO
// handshake stands in for the chip's exact pin timing, which is this design's
// choice, as is the end-of-transfer pulse.
module pci_addon_if
  import chisdas_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  // inbound FIFO of the PCI chip
  input  logic              in_empty,
  output logic              in_rd,
  input  logic [31:0]       in_data,
  output logic              instr_valid,
  output logic [31:0]       instr_word,
  // outbound FIFO of the PCI chip
  input  logic              out_full,
  output logic              out_wr,
  output logic [31:0]       out_data,
  // data stream from the SRAM
  input  logic              s_valid,
  input  logic [31:0]       s_data,
  output logic              s_ready,
  input  logic [XFER_W-1:0] xfer_words,
  output logic              xfer_done
);

  typedef enum logic [1:0] {RD_IDLE, RD_DATA, RD_SETTLE} rd_state_e;
  rd_state_e          rd_state;
  logic [XFER_W-1:0]  xfer_cnt;

  assign in_rd    = (rd_state == RD_IDLE) && !in_empty;
  assign s_ready  = !out_full;
  assign out_wr   = s_valid && !out_full;
  assign out_data = s_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_state    <= RD_IDLE;
      instr_valid <= 1'b0;
      instr_word  <= '0;
      xfer_cnt    <= '0;
      xfer_done   <= 1'b0;
    end else begin
      instr_valid <= 1'b0;
      xfer_done   <= 1'b0;
      unique case (rd_state)
        RD_IDLE:   if (in_rd) rd_state <= RD_DATA;
        RD_DATA: begin
          instr_valid <= 1'b1;
          instr_word  <= in_data;
          rd_state    <= RD_SETTLE;
        end
        default:   rd_state <= RD_IDLE;
      endcase
      if (clear) begin
        xfer_cnt <= '0;
      end else if (out_wr) begin
        if (xfer_cnt + 1'b1 >= xfer_words) begin
          xfer_cnt  <= '0;
          xfer_done <= 1'b1;
        end else begin
          xfer_cnt <= xfer_cnt + 1'b1;
        end
      end
    end
  end

  a_no_write_when_full: assert property (@(posedge clk) disable iff (!rst_n) out_full |-> !out_wr);

endmodule
