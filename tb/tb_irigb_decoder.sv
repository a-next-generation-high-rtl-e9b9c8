// tb_irigb_decoder -- plays IRIG-B frames into the decoder and checks the time.
// Time is scaled to 20 ticks per millisecond. Expected values are computed here
// from the frame contents: at the 1PPS that starts a frame, the decoder must
// hold the second of day of that 1PPS, i.e. the previous frame's time + 1 s.
// Covered: acquiring lock (first frame lost), clean and chopped (one pulse per
// carrier cycle) signals, a frame with a wrong marker (frame_err, no time),
// relock, and the wrap at midnight. time_valid must drop after each 1PPS.
module tb_irigb_decoder;
  import chisdas_pkg::*;
  localparam int UPM = 20;
  logic clk = 0, rst_n = 0;
  logic us_tick, irig, pps, pps_d, pps_rise;
  logic time_valid, frame_err;
  logic [SOD_W-1:0] sod_next;
  utc_t utc;
  int checks = 0, failures = 0, err_pulses = 0;
  int tdiv = 0;

  always #5 clk = ~clk;
  always @(posedge clk) begin
    tdiv <= (tdiv == 3) ? 0 : tdiv + 1;
    pps_d <= pps;
  end
  assign us_tick  = (tdiv == 3);
  assign pps_rise = pps & ~pps_d;

  irigb_gen #(.US_PER_MS(UPM)) gen (.clk, .tick(us_tick), .irig, .pps);
  irigb_decoder #(.US_PER_MS(UPM)) dut (.clk, .rst_n, .us_tick, .irig_lvl(irig), .pps_rise,
                                        .time_valid, .sod_next, .utc, .frame_err);

  always @(posedge clk) if (frame_err) err_pulses++;

  // frame list
  int f_day[7] = '{123, 123, 123, 123, 123, 200, 201};
  int f_hr [7] = '{12, 12, 12, 12, 12, 23, 0};
  int f_mn [7] = '{34, 34, 34, 34, 35, 59, 0};
  int f_sc [7] = '{56, 57, 58, 59, 0, 59, 0};
  bit f_chop[7] = '{0, 0, 1, 0, 0, 0, 0};
  int f_bad[7] = '{-1, -1, -1, 19, -1, -1, -1};
  // expectation at the 1PPS that starts frame k (from frame k-1)
  bit exp_v[8] = '{0, 0, 1, 1, 0, 1, 1, 1};

  int frame_no = -1;

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // checker: at each pps_rise, compare with the previous frame
  always @(posedge clk) begin
    if (rst_n && pps_rise) begin
      int k, exp_sod;
      frame_no++;
      k = frame_no;
      if (k >= 1 && k <= 7) begin
        checks++;
        if (time_valid !== exp_v[k]) begin
          failures++;
          $display("PPS %0d: time_valid %0d expected %0d", k, time_valid, exp_v[k]);
        end
        if (exp_v[k]) begin
          exp_sod = (f_hr[k-1] * 3600 + f_mn[k-1] * 60 + f_sc[k-1] + 1) % 86400;
          checks++;
          if (int'(sod_next) != exp_sod || int'(utc.day) != f_day[k-1] || int'(utc.hour) != f_hr[k-1]
              || int'(utc.minute) != f_mn[k-1] || int'(utc.second) != f_sc[k-1]) begin
            failures++;
            $display("PPS %0d: sod_next %0d exp %0d utc %0d %0d:%0d:%0d", k, sod_next, exp_sod,
                     utc.day, utc.hour, utc.minute, utc.second);
          end
        end
      end
    end
  end

  initial begin
    repeat (4) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 7; f++) begin
      gen.send_frame(f_day[f], f_hr[f], f_mn[f], f_sc[f], f_chop[f], f_bad[f]);
      if (f == 3) begin
        checks++;
        if (err_pulses == 0) begin
          failures++;
          $display("corrupted frame gave no frame_err");
        end
      end
    end
    // final 1PPS for the last frame, then time_valid must drop
    gen.pps = 1'b1;
    repeat (20) @(posedge clk);
    gen.pps = 1'b0;
    checks++;
    if (time_valid !== 1'b0) begin
      failures++;
      $display("time_valid did not drop after 1PPS");
    end
    checks++;
    if (frame_no != 7) begin
      failures++;
      $display("saw %0d PPS", frame_no + 1);
    end
    $display("frame errors seen: %0d", err_pulses);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
