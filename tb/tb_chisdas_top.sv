// tb_chisdas_top -- end-to-end test of the acquisition logic.
//
// A GPS model drives a frequency standard, IRIG-B frames (seconds counting up
// from 12:00:00 on day 100) and the 1PPS; the host model writes instructions
// into the inbound FIFO of the PCI chip and drains the outbound FIFO, which
// also applies random back-pressure; an SRAM model holds the data. Photon
// pulses are placed in the middle of each bin, k(n,c) = (3n + 5c + run) mod 6
// pulses in bin n on channel c, so the expected content of every bin is known
// without looking at the design. Every word that reaches the host is compared
// with the expected record stream (header words, then nch counts per bin).
//
// Runs: (1) 10 MHz standard, 2 us bins, 4 channels, start at the second
// 12:00:02; (2) stop, switch to a 1 MHz standard, 3 us bins, 2 channels, start
// at 12:00:03; (3) 1 us bins with the host not reading, until the SRAM
// overflows; then a corrupted IRIG-B frame. Mechanisms counted (each must
// happen): timed start, record headers, completed transfers, writes during a
// transfer, both frequency-standard modes, 4- and 2-channel records, stop
// word, host back-pressure, overflow, IRIG-B frame error.
// Reduced sizes: 16-bin records, 256-word SRAM, IRIG-B time scaled by 1/100.
// One microsecond is 40 clocks.
module tb_chisdas_top;
  import chisdas_pkg::*;
  localparam int NCH  = 4;
  localparam int RB   = 16;
  localparam int AW   = 8;
  localparam int UPM  = 10;
  localparam int CPU  = 40;     // clocks per us
  localparam int XFER = 128;    // 512 << 0 clamped to half of the SRAM
  localparam int T0   = 12 * 3600;

  logic clk = 0, rst_n = 0;
  logic fs_10mhz = 1;
  logic [NCH-1:0] photon_in = '0;
  logic irig_in, fstd_in = 0, pps_in;
  logic in_empty, in_rd;
  logic [31:0] in_data = '0;
  logic out_full = 0, out_wr;
  logic [31:0] out_data;
  logic xfer_done;
  logic [AW-1:0] sram_addr;
  logic sram_we, sram_re;
  logic [31:0] sram_wdata, sram_rdata;
  status_t status;
  utc_t utc;
  logic [AW:0] sram_level;

  chisdas_top #(.NCH_MAX(NCH), .RECORD_BINS(RB), .SRAM_AW(AW), .US_PER_MS(UPM)) dut (.*);
  sram_model #(.AW(AW)) mem (.clk, .addr(sram_addr), .we(sram_we), .re(sram_re),
                             .wdata(sram_wdata), .rdata(sram_rdata));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // ---------------- GPS model ----------------
  int  tdiv = 0;
  bit  fs_fast = 1;
  logic tick;
  always @(negedge clk) begin
    tdiv <= (tdiv == CPU - 1) ? 0 : tdiv + 1;
    if (fs_fast) fstd_in <= ((tdiv % 4) < 2);
    else         fstd_in <= (tdiv < CPU / 2);
  end
  assign tick = (tdiv == 0);
  irigb_gen #(.US_PER_MS(UPM)) gen (.clk, .tick, .irig(irig_in), .pps(pps_in));

  int sec_idx = -1;
  longint pps_cyc[int];
  always @(posedge pps_in) begin
    sec_idx = sec_idx + 1;
    pps_cyc[sec_idx] = cyc;
  end

  // ---------------- host model: inbound FIFO ----------------
  logic [31:0] inq[$];
  assign in_empty = (inq.size() == 0);
  always @(posedge clk) if (in_rd) in_data <= inq.pop_front();

  function automatic logic [31:0] mk_instr(int sod, int res, int nch);
    instr_t i;
    i = '{start_sod: 17'(sod), res_us: 10'(res), xfer_code: 3'd0, nch_m1: 2'(nch - 1)};
    return 32'(i);
  endfunction

  // ---------------- expected stream ----------------
  // cur_*: the run whose data is arriving; nxt_*: taken over when the design
  // accepts the next instruction (it then clears its buffers)
  int run_no = 0, cur_res = 2, cur_nch = 4, cur_div = 10, cur_phot = 1;
  int nxt_run, nxt_res, nxt_nch, nxt_div, nxt_phot;
  logic [31:0] cur_instr, nxt_instr;
  int rx_idx = 0;
  bit hold_out = 0;
  localparam int NB_PHOT = 4 * RB;

  function automatic int kcount(int n, int c, int r);
    return (3 * n + 5 * c + r) % 6;
  endfunction

  function automatic logic [31:0] exp_word(int i);
    int L, r, j, n, c;
    longint m;
    L = HK_WORDS + RB * cur_nch;
    r = i / L;
    j = i % L;
    m = longint'(r) * RB * cur_res * cur_div;
    case (j)
      0: return SECURITY_WORD;
      1: return cur_instr;
      2: return m[31:0];
      3: return {24'(r), m[39:32]};
      4: return 32'd0;
      default: begin
        n = r * RB + (j - 5) / cur_nch;
        c = (j - 5) % cur_nch;
        return (n < NB_PHOT && cur_phot != 0) ? 32'(kcount(n, c, run_no)) : 32'd0;
      end
    endcase
  endfunction

  // ---------------- mechanism counters ----------------
  int n_start = 0, n_hdr = 0, n_xfer = 0, n_overlap = 0, n_fast = 0, n_slow = 0;
  int n_ch4 = 0, n_ch2 = 0, n_stop = 0, n_bp = 0, n_ovf = 0, n_ferr = 0;
  bit in_xfer = 0;
  int xfer_words_seen = 0;

  // outbound FIFO model: host drains, with random back-pressure
  always @(negedge clk) out_full <= hold_out || ($urandom_range(0, 4) == 0);

  always @(posedge clk) begin
    if (rst_n) begin
      if (dut.arm) begin
        run_no = nxt_run; cur_res = nxt_res; cur_nch = nxt_nch; cur_div = nxt_div;
        cur_phot = nxt_phot; cur_instr = nxt_instr;
        rx_idx = 0; xfer_words_seen = 0; in_xfer = 0;
      end
      if (out_wr) begin
        logic [31:0] e;
        e = exp_word(rx_idx);
        checks++;
        if (out_data !== e) begin
          failures++;
          if (failures < 12) $display("run %0d word %0d: %h expected %h", run_no, rx_idx, out_data, e);
        end
        if (rx_idx % (HK_WORDS + RB * cur_nch) == 0) begin
          n_hdr++;
          if (cur_div == 10) n_fast++; else n_slow++;
          if (cur_nch == 4) n_ch4++; else if (cur_nch == 2) n_ch2++;
        end
        rx_idx++;
        in_xfer = 1;
        xfer_words_seen++;
      end
      if (sram_we && in_xfer) n_overlap++;
      if (xfer_done) begin
        n_xfer++;
        checks++;
        if (xfer_words_seen != XFER) begin failures++; $display("transfer of %0d words", xfer_words_seen); end
        xfer_words_seen = 0;
        in_xfer = 0;
      end
      if (out_full && dut.s_valid) n_bp++;
      if ($rose(status.state == OBS_RUN)) n_start++;
    end
  end

  // ---------------- photons ----------------
  task automatic photons_for(int start_sec, int res);
    longint t0;
    wait (sec_idx == start_sec);
    t0 = pps_cyc[start_sec];
    for (int n = 0; n < NB_PHOT; n++) begin
      while (cyc < t0 + longint'(n) * res * CPU + 12) @(negedge clk);
      for (int p = 0; p < 5; p++) begin
        for (int c = 0; c < NCH; c++) photon_in[c] = (p < kcount(n, c, run_no));
        @(negedge clk); @(negedge clk);
        photon_in = '0;
        @(negedge clk); @(negedge clk);
      end
    end
  endtask

  task automatic start_run(int r, int res, int nch, int div, int phot, int sod);
    nxt_run = r; nxt_res = res; nxt_nch = nch; nxt_div = div; nxt_phot = phot;
    nxt_instr = mk_instr(sod, res, nch);
    inq.push_back(nxt_instr);
  endtask

  task automatic wait_cycles(longint n);
    repeat (n) @(negedge clk);
  endtask

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- sequence ----------------
  initial begin
    repeat (6_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fork
      for (int k = 0; k < 8; k++)
        gen.send_frame(100, 12, 0, k, k == 1, k == 5 ? 37 : -1);
    join_none
    repeat (5) @(negedge clk);
    rst_n = 1;

    // run 1: 10 MHz, 2 us bins, 4 channels, start at 12:00:02
    start_run(1, 2, 4, 10, 1, T0 + 2);
    wait_cycles(20);
    check(status.state == OBS_ARMED, "armed after instruction");
    wait (sec_idx == 1);
    wait_cycles(50);
    check(status.state == OBS_ARMED, "no start at 12:00:01");
    photons_for(2, 2);
    wait_cycles(RB * 2 * CPU / 2 + 200);
    check(rx_idx == 2 * XFER, $sformatf("run 1: %0d words received", rx_idx));
    check(!status.overflow && !status.overrun, "run 1 without data loss");

    // stop, then run 2: 1 MHz, 3 us bins, 2 channels, start at 12:00:03
    inq.push_back(32'd0);
    wait_cycles(10);
    check(status.state == OBS_IDLE, "stop word");
    if (status.state == OBS_IDLE) n_stop++;
    fs_10mhz = 0; fs_fast = 0;
    wait_cycles(200);
    start_run(2, 3, 2, 1, 1, T0 + 3);
    photons_for(3, 3);
    wait_cycles(5 * RB * 3 * CPU);
    check(rx_idx >= 2 * XFER, $sformatf("run 2: %0d words received", rx_idx));
    check(!status.overflow && !status.overrun, "run 2 without data loss");

    // run 3: 1 us bins, host stops reading: the SRAM must overflow
    hold_out = 1;
    start_run(3, 1, 4, 1, 0, T0 + 4);
    wait (sec_idx == 4);
    wait_cycles(((1 << AW) / 4 + 20) * CPU);
    check(status.overflow, "overflow flagged");
    if (status.overflow) n_ovf++;
    inq.push_back(32'd0);
    hold_out = 0;

    // corrupted frame 5: frame error flag
    wait (sec_idx == 6);
    wait_cycles(10);
    check(status.irig_err, "IRIG-B frame error flagged");
    if (status.irig_err) n_ferr++;
    // relock: frame 6 decodes; its time is shown before the next 1PPS
    wait (sec_idx == 7);
    wait_cycles(10);
    check(utc.second == 6'd6 && utc.minute == 0 && utc.hour == 12 && utc.day == 9'd100, "relock after bad frame");

    check(n_start == 3, $sformatf("%0d starts", n_start));
    check(n_hdr > 0, "record headers");
    check(n_xfer > 0, "transfers");
    check(n_overlap > 0, "SRAM writes during a transfer");
    check(n_fast > 0 && n_slow > 0, "both frequency standards");
    check(n_ch4 > 0 && n_ch2 > 0, "4- and 2-channel records");
    check(n_stop > 0, "stop");
    check(n_bp > 0, "host back-pressure");
    check(n_ovf > 0, "overflow");
    check(n_ferr > 0, "frame error");
    $display("starts %0d headers %0d transfers %0d overlap %0d fast %0d slow %0d ch4 %0d ch2 %0d stop %0d backpressure %0d overflow %0d frame_err %0d",
             n_start, n_hdr, n_xfer, n_overlap, n_fast, n_slow, n_ch4, n_ch2, n_stop, n_bp, n_ovf, n_ferr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
