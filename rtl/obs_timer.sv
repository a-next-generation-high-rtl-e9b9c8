// obs_timer -- time base of an observation, derived from the GPS frequency standard.
//
// All timing of the binned data comes from edges of the 1 or 10 MHz GPS
// frequency standard (fstd_rise). A prescaler divides them by 10 or 1
// (fs_10mhz) into a 1 us tick; the bin timer counts res_us ticks per bin. Three
// counters describe where the observation stands, and their widths are those the
// instrument records in its housekeeping data:
//   master (40 bit)  frequency-standard clocks since the start of the observation
//   record (24 bit)  record number since the start
//   bin    (32 bit)  bins completed within the current record, 0..RECORD_BINS-1
// A record is RECORD_BINS (8192) bins.
//
// Interface and timing: a start pulse (the 1PPS at the start second) clears
// all counters and restarts the prescaler, so bins are aligned to that second;
// one clock later rec_open pulses for record 0 with hk = 0. While run is high,
// every fstd_rise advances master; the RES_US-th us tick after a bin opened
// closes it with a one-clock bin_end pulse. When the last bin of a record
// closes, bin_end and rec_open pulse together and hk already shows the new
// record (bin = 0). hk, bin_end and rec_open change on the same clock edge.
// us_tick runs whenever the frequency standard runs, also outside observations,
// because the IRIG-B decoder needs it. Aligning the bins to the start second and
// the prescaler are this design's choices.
module obs_timer
  import chisdas_pkg::*;
#(
  parameter int unsigned RECORD_BINS = 8192
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             fstd_rise,
  input  logic             fs_10mhz,
  input  logic             start,
  input  logic             run,
  input  logic [RES_W-1:0] res_us,
  output logic             us_tick,
  output logic             bin_end,
  output logic             rec_open,
  output hk_t              hk
);

  logic [3:0]       pre_cnt;
  logic [RES_W-1:0] us_in_bin;
  logic             tick_now;

  assign tick_now = fstd_rise && (fs_10mhz ? (pre_cnt == 4'd9) : 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pre_cnt   <= '0;
      us_tick   <= 1'b0;
      us_in_bin <= '0;
      bin_end   <= 1'b0;
      rec_open  <= 1'b0;
      hk        <= '0;
    end else begin
      us_tick  <= 1'b0;
      bin_end  <= 1'b0;
      rec_open <= 1'b0;
      if (start) begin
        pre_cnt   <= '0;
        us_in_bin <= '0;
        hk        <= '0;
        rec_open  <= 1'b1;
      end else begin
        if (fstd_rise) pre_cnt <= tick_now ? '0 : pre_cnt + 1'b1;
        us_tick <= tick_now;
        if (run) begin
          if (fstd_rise) hk.master <= hk.master + 1'b1;
          if (tick_now) begin
            if (us_in_bin + 1'b1 >= res_us) begin
              us_in_bin <= '0;
              bin_end   <= 1'b1;
              if (32'(hk.bin) == RECORD_BINS - 1) begin
                hk.bin    <= '0;
                hk.record <= hk.record + 1'b1;
                rec_open  <= 1'b1;
              end else begin
                hk.bin <= hk.bin + 1'b1;
              end
            end else begin
              us_in_bin <= us_in_bin + 1'b1;
            end
          end
        end
      end
    end
  end

endmodule
