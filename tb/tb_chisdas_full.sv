// tb_chisdas_full -- one complete observation with every parameter of the
// design at its default: 8192-bin records, 128K-word SRAM, real IRIG-B timing
// (1000 us per ms, one frame per second). 40 clocks per microsecond, 10 MHz
// standard, 1 us bins, 4 channels, 512-word transfers.
// The GPS model sends IRIG-B frames for 12:00:00, 12:00:01, 12:00:02; the
// design locks on the second frame and must start on the 1PPS of 12:00:02.
// Photons: k(n,c) = (3n + 5c + 1) mod 6 pulses in bin n on channel c, for all
// 8192 bins of the first record. The host compares every word it receives
// with the expected stream until it has the whole first record and the next
// header, and checks the transfer count and that no word was lost.
module tb_chisdas_full;
  import chisdas_pkg::*;
  localparam int NCH  = 4;
  localparam int RB   = 8192;
  localparam int AW   = 17;
  localparam int UPM  = 1000;
  localparam int CPU  = 40;
  localparam int XFER = 512;
  localparam int T0   = 12 * 3600;
  localparam int L    = HK_WORDS + RB * NCH;

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

  chisdas_top dut (.*);
  sram_model #(.AW(AW)) mem (.clk, .addr(sram_addr), .we(sram_we), .re(sram_re),
                             .wdata(sram_wdata), .rdata(sram_rdata));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  int tdiv = 0;
  logic tick;
  always @(negedge clk) begin
    tdiv <= (tdiv == CPU - 1) ? 0 : tdiv + 1;
    fstd_in <= ((tdiv % 4) < 2);
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

  logic [31:0] instr_w;
  int rx_idx = 0, n_xfer = 0, start_pps = -1;
  longint first_word_cyc = 0;

  function automatic int kcount(int n, int c);
    return (3 * n + 5 * c + 1) % 6;
  endfunction

  function automatic logic [31:0] exp_word(int i);
    int r, j, n, c;
    longint m;
    r = i / L;
    j = i % L;
    m = longint'(r) * RB * 10;
    case (j)
      0: return SECURITY_WORD;
      1: return instr_w;
      2: return m[31:0];
      3: return {24'(r), m[39:32]};
      4: return 32'd0;
      default: begin
        n = r * RB + (j - 5) / NCH;
        c = (j - 5) % NCH;
        return (n < RB) ? 32'(kcount(n, c)) : 32'd0;
      end
    endcase
  endfunction

  always @(negedge clk) out_full <= ($urandom_range(0, 4) == 0);

  always @(posedge clk) begin
    if (rst_n) begin
      if (out_wr) begin
        logic [31:0] e;
        e = exp_word(rx_idx);
        checks++;
        if (out_data !== e) begin
          failures++;
          if (failures < 12) $display("word %0d: %h expected %h", rx_idx, out_data, e);
        end
        rx_idx++;
      end
      if (xfer_done) n_xfer++;
      if ($rose(status.state == OBS_RUN)) start_pps = sec_idx;
    end
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (100_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint t0;
    instr_t i;
    fork
      for (int k = 0; k < 3; k++) gen.send_frame(100, 12, 0, k, 1'b0, -1);
    join_none
    repeat (5) @(negedge clk);
    rst_n = 1;
    i = '{start_sod: 17'(T0 + 2), res_us: 10'd1, xfer_code: 3'd0, nch_m1: 2'd3};
    instr_w = 32'(i);
    inq.push_back(instr_w);
    wait (sec_idx == 2);
    t0 = pps_cyc[2];
    $display("1PPS of 12:00:02 at clock %0d", t0);
    for (int n = 0; n < RB; n++) begin
      while (cyc < t0 + longint'(n) * CPU + 12) @(negedge clk);
      for (int p = 0; p < 5; p++) begin
        for (int c = 0; c < NCH; c++) photon_in[c] = (p < kcount(n, c));
        @(negedge clk); @(negedge clk);
        photon_in = '0;
        @(negedge clk); @(negedge clk);
      end
    end
    while (rx_idx < L + HK_WORDS) @(negedge clk);
    check(start_pps == 2, $sformatf("started at second %0d", start_pps));
    check(n_xfer == rx_idx / XFER, $sformatf("%0d transfers for %0d words", n_xfer, rx_idx));
    check(!status.overflow && !status.overrun && !status.irig_err, "no error flags");
    $display("received %0d words in %0d transfers, %0d clocks after the start", rx_idx, n_xfer, cyc - t0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
