// tb_scb_frontend -- the analog front end and the card's input logic together.
//
// Analog-like waveforms go through the behavioural model of the signal
// conditioning box (comparators and monostables) into the card's input
// interface, its time base and its IRIG-B decoder:
//   - IRIG-B as a 1 kHz sine whose peak is 2.5 V in the high part of each cell
//     and 0.75 V in the rest; the +1.5 V comparator and a 0.3 ms monostable
//     turn it into one pulse per high carrier cycle, which the decoder must
//     read. Frames for 10:20:30, :31, :32; the 1PPS marks each frame start.
//   - the 10 MHz frequency standard as a sine through the 0 V comparator;
//     every cycle must give one edge.
//   - photon-counter pulses, negative triangles to -0.7 V, some of them with
//     a second dip (ringing) inside the monostable time and some with a small
//     dip that stays above -0.35 V; each real pulse must count exactly once.
// Time is scaled: 1 us of the card is 400 ns here (40 clocks of 10 ns), so
// the IRIG-B millisecond is 4 us.
module tb_scb_frontend;
  import chisdas_pkg::*;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int NCH = 2;
  localparam int UPM = 10;
  localparam real MS = 4000.0;     // ns per scaled millisecond
  localparam real PI = 3.14159265358979;

  logic clk = 0, rst_n = 0;
  real sr400_v [NCH];
  real irig_v = 0.0, fstd_v = 0.0;
  logic pps_cmos = 0;
  logic [NCH-1:0] photon_ttl, photon_rise;
  logic irig_ttl, fstd_ttl, pps_ttl, irig_lvl, fstd_rise, pps_rise;
  logic us_tick, bin_end, rec_open, time_valid, frame_err;
  hk_t hk;
  logic [SOD_W-1:0] sod_next;
  utc_t utc;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  scb_model #(.NCH(NCH), .PHOT_MONO(20ns), .IRIG_MONO(1200ns), .FSTD_MONO(12ns)) scb (
    .sr400_v, .irig_v, .fstd_v, .pps_cmos, .photon_ttl, .irig_ttl, .fstd_ttl, .pps_ttl);
  daughter_card_if #(.NCH_MAX(NCH)) dci (.clk, .rst_n, .photon_in(photon_ttl), .irig_in(irig_ttl),
    .fstd_in(fstd_ttl), .pps_in(pps_ttl), .photon_rise, .irig_lvl, .fstd_rise, .pps_rise);
  obs_timer #(.RECORD_BINS(8192)) tim (.clk, .rst_n, .fstd_rise, .fs_10mhz(1'b1), .start(1'b0),
    .run(1'b0), .res_us(10'd1), .us_tick, .bin_end, .rec_open, .hk);
  irigb_decoder #(.US_PER_MS(UPM)) dec (.clk, .rst_n, .us_tick, .irig_lvl, .pps_rise,
    .time_valid, .sod_next, .utc, .frame_err);
  // only its frame-building functions are used
  logic gen_irig, gen_pps;
  irigb_gen #(.US_PER_MS(UPM)) gen (.clk, .tick(1'b0), .irig(gen_irig), .pps(gen_pps));

  int fs_cycles = 0, fs_edges = 0, ph_sent[NCH], ph_seen[NCH];
  bit fs_on = 1;
  // edges are counted only out of reset: before the first reset clock the
  // edge-detect flops hold whatever they powered up with
  always @(posedge clk) if (rst_n) begin
    if (fstd_rise) fs_edges++;
    for (int c = 0; c < NCH; c++) if (photon_rise[c]) ph_seen[c]++;
  end

  // 10 MHz standard, 40 ns period, sampled every 5 ns
  initial begin
    real t;
    t = 0.0;
    wait (rst_n);
    while (fs_on) begin
      real v;
      v = 1.0 * $sin(2.0 * PI * t / 40.0);
      if (fstd_v <= 0.0 && v > 0.0) fs_cycles++;   // an upward zero crossing
      fstd_v = v;
      #5;
      t += 5.0;
    end
    fstd_v = -1.0;
  end

  // IRIG-B, amplitude-modulated 1 kHz carrier
  task automatic play_frame(int hr, int mn, int sc);
    for (int c = 0; c < 100; c++) begin
      int s, hi;
      s = gen.cell_sym(100, hr, mn, sc, c);
      hi = (s == 2) ? 8 : (s == 1) ? 5 : 2;
      if (c == 0) pps_cmos = 1'b1;
      for (int k = 0; k < 10; k++) begin
        real amp;
        amp = (k < hi) ? 2.5 : 0.75;
        if (c == 0 && k == 1) pps_cmos = 1'b0;
        for (int st = 0; st < 200; st++) begin
          irig_v = amp * $sin(2.0 * PI * real'(st) / 200.0);
          #20;
        end
      end
    end
  endtask

  // one photon-counter pulse: 10 ns triangle to -0.7 V, optional ringing
  task automatic sr_pulse(int c, int kind);
    for (int i = 0; i <= 10; i++) begin
      sr400_v[c] = -0.7 * (1.0 - ((i < 5) ? real'(5 - i) : real'(i - 5)) / 5.0);
      #1;
    end
    sr400_v[c] = 0.0;
    if (kind == 1) begin          // ringing: second dip below threshold 6 ns later
      #6;
      for (int i = 0; i <= 4; i++) begin sr400_v[c] = -0.5; #1; end
      sr400_v[c] = 0.0;
    end else if (kind == 2) begin // small dip that must not count
      #30;
      for (int i = 0; i <= 6; i++) begin sr400_v[c] = -0.2; #1; end
      sr400_v[c] = 0.0;
    end
  endtask

  initial begin
    repeat (1_500_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < NCH; c++) begin sr400_v[c] = 0.0; ph_sent[c] = 0; ph_seen[c] = 0; end
    repeat (5) @(posedge clk);
    rst_n = 1;
    fork
      begin
        play_frame(10, 20, 30);
        play_frame(10, 20, 31);
        checks++;
        if (!time_valid || int'(sod_next) != 10 * 3600 + 20 * 60 + 32) begin
          failures++;
          $display("after frame :31 valid %0d sod_next %0d", time_valid, sod_next);
        end
        play_frame(10, 20, 32);
        checks++;
        if (!time_valid || int'(sod_next) != 10 * 3600 + 20 * 60 + 33 || utc.second != 6'd32) begin
          failures++;
          $display("after frame :32 valid %0d sod_next %0d", time_valid, sod_next);
        end
      end
      begin
        for (int n = 0; n < 3000; n++) begin
          int c, kind;
          c = $urandom_range(0, NCH - 1);
          kind = $urandom_range(0, 2);
          sr_pulse(c, kind);
          ph_sent[c]++;
          #($urandom_range(60, 400));
        end
      end
    join
    fs_on = 0;
    repeat (20) @(posedge clk);
    checks++;
    if (fs_edges != fs_cycles) begin
      failures++;
      $display("frequency standard: %0d cycles, %0d edges", fs_cycles, fs_edges);
    end
    for (int c = 0; c < NCH; c++) begin
      checks++;
      if (ph_seen[c] != ph_sent[c]) begin
        failures++;
        $display("channel %0d: %0d pulses sent, %0d counted", c, ph_sent[c], ph_seen[c]);
      end
    end
    checks++;
    if (frame_err) failures++;
    $display("fs cycles %0d, photons %0d/%0d", fs_cycles, ph_sent[0], ph_sent[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
