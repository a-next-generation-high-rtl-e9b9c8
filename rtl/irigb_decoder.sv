// irigb_decoder -- recovers UT from the IRIG-B time code of the GPS receiver.
//
// IRIG-B sends one 100-bit frame per second on a 1 kHz carrier, one bit cell
// every 10 ms. A cell starts with a high-amplitude part whose length carries the
// symbol: 2 ms = 0, 5 ms = 1, 8 ms = position marker. Markers stand at cells 9,
// 19, ... 99, and two markers in a row (cell 99, then the reference marker of
// the next frame) mark the start of a frame, whose leading edge is the second the
// frame encodes. BCD fields: seconds in cells 1-4 and 6-8, minutes 10-13 and
// 15-17, hours 20-23 and 25-26, day of year 30-33, 35-38 and 40-41.
// These details come from the IRIG-B standard; the instrument is only said to
// decode the code to find the UT of each 1PPS pulse.
//
// How it works: the level is sampled on the 1 us tick. A pulse starts at the
// first high sample; low gaps shorter than GAP_MS (1.2 ms) are bridged, so both a
// clean envelope and one comparator pulse per carrier cycle decode alike. The
// pulse width (first to last high sample) is classified with thresholds at 3.5,
// 6.5 and 9.5 ms. After the reference marker every cell is checked against the
// marker positions; a wrong symbol drops frame lock and pulses frame_err.
// When cell 99 arrives intact, the fields are decoded and range-checked, and
// time_valid rises with sod_next = second of day of the *next* 1PPS (frame time
// + 1 s). time_valid falls at the next 1PPS edge, which consumes the value.
//
// Timing: a symbol is classified GAP_MS after its last high sample, so the frame
// is complete about 0.8 ms after cell 99 ends, i.e. 0.8 ms before the next 1PPS.
// US_PER_MS scales all durations (1000 in use; a smaller value only speeds up
// simulation).
module irigb_decoder
  import chisdas_pkg::*;
#(
  parameter int unsigned US_PER_MS = 1000
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             us_tick,
  input  logic             irig_lvl,
  input  logic             pps_rise,
  output logic             time_valid,
  output logic [SOD_W-1:0] sod_next,
  output utc_t             utc,
  output logic             frame_err
);

  localparam int unsigned GAP_T  = (US_PER_MS * 12) / 10;
  localparam int unsigned ONE_T  = (US_PER_MS * 35) / 10;  // below: 0
  localparam int unsigned MARK_T = (US_PER_MS * 65) / 10;  // below: 1
  localparam int unsigned BAD_T  = (US_PER_MS * 95) / 10;  // below: marker
  localparam int unsigned W      = $clog2(BAD_T + 2) + 1;
  localparam logic [W-1:0] WMAX  = '1;

  typedef enum logic [1:0] {SYM_ZERO, SYM_ONE, SYM_MARK, SYM_BAD} sym_e;

  logic         in_pulse;
  logic [W-1:0] w_cnt, w_fall, gap_cnt;
  logic         sym_v;
  sym_e         sym;

  // ---- pulse-width measurement ------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_pulse <= 1'b0;
      w_cnt    <= '0;
      w_fall   <= '0;
      gap_cnt  <= '0;
      sym_v    <= 1'b0;
      sym      <= SYM_BAD;
    end else begin
      sym_v <= 1'b0;
      if (us_tick) begin
        if (!in_pulse) begin
          if (irig_lvl) begin
            in_pulse <= 1'b1;
            w_cnt    <= W'(1);
            w_fall   <= W'(1);
            gap_cnt  <= '0;
          end
        end else begin
          if (w_cnt != WMAX) w_cnt <= w_cnt + 1'b1;
          if (irig_lvl) begin
            if (w_cnt != WMAX) w_fall <= w_cnt + 1'b1;
            gap_cnt <= '0;
          end else if (32'(gap_cnt) + 1 >= GAP_T) begin
            in_pulse <= 1'b0;
            sym_v    <= 1'b1;
            if (32'(w_fall) < ONE_T)       sym <= SYM_ZERO;
            else if (32'(w_fall) < MARK_T) sym <= SYM_ONE;
            else if (32'(w_fall) < BAD_T)  sym <= SYM_MARK;
            else                           sym <= SYM_BAD;
          end else begin
            gap_cnt <= gap_cnt + 1'b1;
          end
        end
      end
    end
  end

  // ---- frame alignment -----------------------------------------------------
  logic [41:0] bits;   // cells 0..41 hold all decoded fields
  logic [6:0]  idx;
  logic        synced, prev_mark;
  logic        mark_pos;

  always_comb begin
    mark_pos = 1'b0;
    for (int k = 9; k < 100; k += 10) if (idx == 7'(k)) mark_pos = 1'b1;
  end

  // ---- field decode (combinational from the stored cells) ----------------
  logic [3:0] s_u, m_u, h_u, d_u, d_t;
  logic [2:0] s_t, m_t;
  logic [1:0] h_t, d_h;
  utc_t       dec;
  logic       dec_ok;
  logic [SOD_W-1:0] dec_sod;

  always_comb begin
    s_u = bits[4:1];   s_t = bits[8:6];
    m_u = bits[13:10]; m_t = bits[17:15];
    h_u = bits[23:20]; h_t = bits[26:25];
    d_u = bits[33:30]; d_t = bits[38:35]; d_h = bits[41:40];
    dec.second = 6'(s_u) + 6'(s_t) * 6'd10;
    dec.minute = 6'(m_u) + 6'(m_t) * 6'd10;
    dec.hour   = 5'(h_u) + 5'(h_t) * 5'd10;
    dec.day    = 9'(d_u) + 9'(d_t) * 9'd10 + 9'(d_h) * 9'd100;
    dec_ok = (s_u <= 4'd9) && (m_u <= 4'd9) && (h_u <= 4'd9) && (d_u <= 4'd9) && (d_t <= 4'd9)
          && (dec.second < 6'd60) && (dec.minute < 6'd60) && (dec.hour < 5'd24)
          && (dec.day != 9'd0) && (dec.day <= 9'd366);
    dec_sod = sod_of(dec);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bits       <= '0;
      idx        <= '0;
      synced     <= 1'b0;
      prev_mark  <= 1'b0;
      frame_err  <= 1'b0;
      time_valid <= 1'b0;
      sod_next   <= '0;
      utc        <= '0;
    end else begin
      frame_err <= 1'b0;
      if (pps_rise) time_valid <= 1'b0;
      if (sym_v) begin
        prev_mark <= (sym == SYM_MARK);
        if (sym == SYM_MARK && prev_mark) begin
          // reference marker of a new frame: it is cell 0
          synced <= 1'b1;
          idx    <= 7'd1;
        end else if (synced) begin
          if (sym == SYM_BAD || (sym == SYM_MARK) != mark_pos || idx > 7'd99) begin
            synced    <= 1'b0;
            frame_err <= 1'b1;
          end else if (idx == 7'd99) begin
            idx <= 7'd100;
            if (dec_ok) begin
              time_valid <= 1'b1;
              utc        <= dec;
              sod_next   <= (32'(dec_sod) == SECONDS_PER_DAY - 1) ? '0 : dec_sod + 1'b1;
            end else begin
              frame_err <= 1'b1;
            end
          end else begin
            if (idx < 7'd42) bits[6'(idx)] <= (sym == SYM_ONE);
            idx <= idx + 1'b1;
          end
        end
      end
    end
  end

endmodule
