// tb_chisdas_workloads -- the two observing set-ups reported for the instrument,
// run back to back on the design with every parameter at its default.
//
// Run 1 is the pulsar set-up: 2 channels (one infrared, one optical
// photometer), 20 us bins, 4096-word transfers. Run 2 is the dwarf-nova
// set-up: 1 channel, 100 us bins, 512-word transfers. The GPS
// frequency standard here is the 1 MHz one (fs_10mhz = 0), and the card clock
// is 8 MHz (8 clocks per microsecond). Each run is one full 8192-bin record
// plus the header of the next record, far shorter than the hours a real
// observation lasts. The record length is the same at every bin width, so a
// long observation differs only in the counter values, whose widths are
// checked by arithmetic, not by simulation.
//
// Sequence: IRIG-B frames for 12:00:00 .. 12:00:04. Run 1 is armed for
// 12:00:02. Once its record is received, the host sends a stop word and then
// the run 2 instruction for 12:00:04. The photon counts per bin are
// k(n,c,run) = (7n + 3c + run) mod 13, given as separate pulses inside each bin.
// The testbench checks:
// - every received word, against the expected stream;
// - the start second of each run;
// - the number of transfers;
// - the record length in clocks (8192 x bin width);
// - that the design is idle after the stop word;
// - that no error flag is set.
module tb_chisdas_workloads;
  import chisdas_pkg::*;
  localparam int NMAX = 4;      // the top's default channel count
  localparam int RB   = 8192;
  localparam int AW   = 17;
  localparam int UPM  = 1000;
  localparam int CPU  = 8;      // clocks per microsecond
  localparam int T0   = 12 * 3600;

  logic clk = 0, rst_n = 0;
  logic fs_10mhz = 0;
  logic [NMAX-1:0] photon_in = '0;
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

  chisdas_top dut (.*);
  sram_model #(.AW(AW)) mem (.clk, .addr(sram_addr), .we(sram_we), .re(sram_re),
                             .wdata(sram_wdata), .rdata(sram_rdata));

  always #62.5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // 1 MHz frequency standard and the microsecond tick of the GPS model
  int tdiv = 0;
  logic tick;
  always @(negedge clk) begin
    tdiv <= (tdiv == CPU - 1) ? 0 : tdiv + 1;
    fstd_in <= (tdiv < CPU / 2);
  end
  assign tick = (tdiv == 0);
  irigb_gen #(.US_PER_MS(UPM)) gen (.clk, .tick, .irig(irig_in), .pps(pps_in));

  int sec_idx = -1;
  longint pps_cyc[int];
  always @(posedge pps_in) begin
    sec_idx = sec_idx + 1;
    pps_cyc[sec_idx] = cyc;
  end

  logic [31:0] inq[$];
  assign in_empty = (inq.size() == 0);
  always @(posedge clk) if (in_rd) in_data <= inq.pop_front();

  function automatic logic [31:0] mk_instr(int sod, int res, int nch, int code);
    instr_t i;
    i = '{start_sod: 17'(sod), res_us: 10'(res), xfer_code: 3'(code), nch_m1: 2'(nch - 1)};
    return 32'(i);
  endfunction

  function automatic int kcount(int n, int c, int run);
    return (7 * n + 3 * c + run) % 13;
  endfunction

  // the run whose words are arriving; taken over when the design arms
  int cur_run = 0, cur_res = 0, cur_nch = 1;
  logic [31:0] cur_instr = '0;
  int nxt_run, nxt_res, nxt_nch;
  logic [31:0] nxt_instr;
  int rx_idx = 0, n_xfer = 0, start_sec = -1;
  longint rec_cyc[$];

  function automatic logic [31:0] exp_word(int i);
    int L, r, j, n, c;
    longint m;
    L = HK_WORDS + RB * cur_nch;
    r = i / L;
    j = i % L;
    m = longint'(r) * RB * cur_res;        // one standard edge per microsecond
    case (j)
      0: return SECURITY_WORD;
      1: return cur_instr;
      2: return m[31:0];
      3: return {24'(r), m[39:32]};
      4: return 32'd0;
      default: begin
        n = r * RB + (j - 5) / cur_nch;
        c = (j - 5) % cur_nch;
        return (n < RB) ? 32'(kcount(n, c, cur_run)) : 32'd0;
      end
    endcase
  endfunction

  always @(negedge clk) out_full <= ($urandom_range(0, 3) == 0);

  always @(posedge clk) begin
    if (rst_n) begin
      if (out_wr) begin
        logic [31:0] e;
        e = exp_word(rx_idx);
        checks++;
        if (out_data !== e) begin
          failures++;
          if (failures < 12) $display("run %0d word %0d: %h expected %h", cur_run, rx_idx, out_data, e);
        end
        rx_idx++;
      end
      if (xfer_done) n_xfer++;
      // a word leaving in the arming clock still belongs to the old run
      if (dut.arm) begin
        cur_run = nxt_run; cur_res = nxt_res; cur_nch = nxt_nch; cur_instr = nxt_instr;
        rx_idx = 0; n_xfer = 0; start_sec = -1;
        rec_cyc.delete();
      end
      if (dut.rec_open && dut.run) rec_cyc.push_back(cyc);
      if ($rose(status.state == OBS_RUN)) start_sec = sec_idx;
    end
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (45_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one run: arm, give its photons for the first record, wait for the data
  task automatic observe(int run, int sec, int res, int nch, int code);
    longint t0, rec_len;
    int L, xfer, need;
    nxt_run = run; nxt_res = res; nxt_nch = nch;
    nxt_instr = mk_instr(T0 + sec, res, nch, code);
    inq.push_back(nxt_instr);
    wait (sec_idx == sec);
    t0 = pps_cyc[sec];
    for (int n = 0; n < RB; n++) begin
      while (cyc < t0 + longint'(n) * res * CPU + 40) @(negedge clk);
      for (int p = 0; p < 12; p++) begin
        for (int c = 0; c < nch; c++) photon_in[c] = (p < kcount(n, c, run));
        @(negedge clk); @(negedge clk);
        photon_in = '0;
        @(negedge clk); @(negedge clk);
      end
    end
    L = HK_WORDS + RB * nch;
    xfer = XFER_BASE_WORDS << code;
    need = L + HK_WORDS;
    while (rx_idx < need) @(negedge clk);
    check(start_sec == sec, $sformatf("run %0d started at second %0d", run, start_sec));
    check(n_xfer == rx_idx / xfer, $sformatf("run %0d: %0d transfers for %0d words", run, n_xfer, rx_idx));
    check(rec_cyc.size() >= 2, "second record opened");
    if (rec_cyc.size() >= 2) begin
      rec_len = rec_cyc[1] - rec_cyc[0];
      // 8192 bins of res us; the first bin may lose up to one us of phase
      check(rec_len >= longint'(RB) * res * CPU - longint'(CPU) && rec_len <= longint'(RB) * res * CPU,
            $sformatf("run %0d: record lasted %0d clocks", run, rec_len));
    end
    check(!status.overflow && !status.overrun && !status.irig_err, "no error flags");
    $display("run %0d: %0d bins of %0d us, %0d channels, %0d words in %0d transfers",
             run, RB, res, nch, rx_idx, n_xfer);
  endtask

  initial begin
    fork
      for (int k = 0; k < 5; k++) gen.send_frame(100, 12, 0, k, 1'b0, -1);
    join_none
    repeat (5) @(negedge clk);
    rst_n = 1;
    observe(1, 2, 20, 2, 3);
    inq.push_back(mk_instr(0, 0, 1, 0));     // stop
    repeat (20) @(negedge clk);
    check(status.state == OBS_IDLE, "idle after the stop word");
    observe(2, 4, 100, 1, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
