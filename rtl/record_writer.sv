// record_writer -- turns bins and record boundaries into the stored word stream.
//
// The data stream is a sequence of records. Each record starts with five
// housekeeping DWORDs (security word, instruction word, master counter low,
// {record counter, master counter high}, bin counter, see chisdas_pkg) and
// continues with the bins, one DWORD per active channel per bin (channel 0
// first). The header lets the host check that no data went missing.
//
// How it works: rec_open latches the counter values of the new record; the
// header becomes pending one clock later. snap_valid (one clock after bin_end)
// makes the channel snapshot pending. Both therefore become pending in the same
// clock at a record boundary, and counts are always emitted before a header, so
// the last bin of a record precedes the next record's header. One word leaves
// per clock on wr_valid/wr_data; the memory side always accepts it. If a new
// bin or record arrives while the previous one is still pending, overrun is set
// (sticky until clear) and the old one is replaced.
// Timing: a bin's words leave 2..NCH+1 clocks after bin_end, a header right after
// them; the clock must give at least NCH+5 clocks per bin (40 clocks at 1 us and
// 40 MHz is ample). The header content and order follow the instrument's
// description; the packing of the 40- and 24-bit counters is this design's.
module record_writer
  import chisdas_pkg::*;
#(
  parameter int unsigned NCH_MAX = 4
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          clear,
  input  logic [1:0]                    nch_m1,
  input  logic [31:0]                   instr_word,
  input  logic                          rec_open,
  input  hk_t                           hk,
  input  logic                          snap_valid,
  input  logic [NCH_MAX-1:0][31:0]      snap,
  output logic                          wr_valid,
  output logic [31:0]                   wr_data,
  output logic                          overrun
);

  hk_t        hk_q;
  logic       rec_open_d;
  logic       cnt_pend, hdr_pend;
  logic [1:0] cidx;
  logic [2:0] hidx;
  logic [31:0] hdr_word;
  logic [1:0] last_ch;

  // channels beyond what this build has are not written
  assign last_ch = (32'(nch_m1) > NCH_MAX - 1) ? 2'(NCH_MAX - 1) : nch_m1;

  always_comb begin
    unique case (hidx)
      3'd0:    hdr_word = SECURITY_WORD;
      3'd1:    hdr_word = instr_word;
      3'd2:    hdr_word = hk_q.master[31:0];
      3'd3:    hdr_word = {hk_q.record, hk_q.master[MASTER_W-1:32]};
      default: hdr_word = hk_q.bin;
    endcase
  end

  always_comb begin
    wr_valid = cnt_pend || hdr_pend;
    wr_data  = cnt_pend ? snap[cidx] : hdr_word;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hk_q       <= '0;
      rec_open_d <= 1'b0;
      cnt_pend   <= 1'b0;
      hdr_pend   <= 1'b0;
      cidx       <= '0;
      hidx       <= '0;
      overrun    <= 1'b0;
    end else if (clear) begin
      rec_open_d <= 1'b0;
      cnt_pend   <= 1'b0;
      hdr_pend   <= 1'b0;
      cidx       <= '0;
      hidx       <= '0;
      overrun    <= 1'b0;
    end else begin
      rec_open_d <= rec_open;
      if (rec_open) hk_q <= hk;
      // emit one word
      if (cnt_pend) begin
        if (cidx == last_ch) begin
          cnt_pend <= 1'b0;
          cidx     <= '0;
        end else begin
          cidx <= cidx + 1'b1;
        end
      end else if (hdr_pend) begin
        if (hidx == 3'(HK_WORDS - 1)) begin
          hdr_pend <= 1'b0;
          hidx     <= '0;
        end else begin
          hidx <= hidx + 1'b1;
        end
      end
      // new work
      if (snap_valid) begin
        if (cnt_pend) overrun <= 1'b1;
        cnt_pend <= 1'b1;
        cidx     <= '0;
      end
      if (rec_open_d) begin
        if (hdr_pend) overrun <= 1'b1;
        hdr_pend <= 1'b1;
        hidx     <= '0;
      end
    end
  end

endmodule
