// tb_obs_timer -- checks bin, record and master counting against a reference.
// The frequency standard is an edge every 4 clocks. The reference counts the
// standard's nedges seen while running and predicts, one clock after the edge
// that completes res_us * divider nedges, a bin_end pulse with the counters'
// new values (master = nedges, bin within record, record number), and rec_open
// when a record boundary is crossed. Run with 8-bin records, both the 10 MHz
// (divide by 10) and 1 MHz settings, and a restart in the middle.
module tb_obs_timer;
  import chisdas_pkg::*;
  localparam int RB = 8;
  logic clk = 0, rst_n = 0;
  logic fstd_rise = 0, fs_10mhz = 1, start = 0, run = 0;
  logic [RES_W-1:0] res_us = 3;
  logic us_tick, bin_end, rec_open;
  hk_t hk;
  int checks = 0, failures = 0;
  int nedges = 0, nbins = 0, ticks_seen = 0, fcnt = 0;
  bit exp_bin = 0, exp_open = 0;

  obs_timer #(.RECORD_BINS(RB)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (300_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    fcnt <= (fcnt == 3) ? 0 : fcnt + 1;
    fstd_rise <= (fcnt == 2);
  end

  // reference model and comparison, evaluated before this edge's updates
  always @(posedge clk) begin
    if (rst_n) begin
      int div;
      div = fs_10mhz ? 10 : 1;
      checks++;
      if (bin_end !== exp_bin || rec_open !== exp_open) begin
        failures++;
        if (failures < 10) $display("%0t bin_end %0d/%0d rec_open %0d/%0d", $time, bin_end, exp_bin, rec_open, exp_open);
      end
      if (exp_bin) begin
        checks++;
        if (hk.master !== MASTER_W'(nedges) || hk.bin !== BIN_W'(nbins % RB) || hk.record !== RECORD_W'(nbins / RB)) begin
          failures++;
          if (failures < 10) $display("%0t hk %0d %0d %0d exp %0d %0d %0d", $time, hk.master, hk.record, hk.bin, nedges, nbins / RB, nbins % RB);
        end
      end
      if (us_tick) ticks_seen++;
      exp_bin  = 0;
      exp_open = 0;
      if (start) begin
        nedges = 0; nbins = 0;
        exp_open = 1;
      end else if (run && fstd_rise) begin
        nedges++;
        if (nedges % (int'(res_us) * div) == 0) begin
          nbins++;
          exp_bin = 1;
          exp_open = (nbins % RB == 0);
        end
      end
    end
  end

  task automatic do_start();
    @(negedge clk) start = 1;
    @(negedge clk) begin start = 0; run = 1; end
  endtask

  initial begin
    repeat (4) @(posedge clk);
    rst_n = 1;
    repeat (7) @(posedge clk);
    do_start();
    repeat (4 * 10 * 3 * RB * 2 + 50) @(posedge clk);   // two records and a bit
    checks++;
    if (nbins < 2 * RB) begin failures++; $display("only %0d nbins", nbins); end
    // restart at 1 MHz, 5 us nbins
    @(negedge clk) begin run = 0; fs_10mhz = 0; res_us = 5; end
    repeat (13) @(posedge clk);
    do_start();
    repeat (4 * 5 * RB * 3 + 20) @(posedge clk);
    checks++;
    if (nbins < 3 * RB) begin failures++; $display("only %0d nbins at 1 MHz", nbins); end
    checks++;
    if (ticks_seen == 0) begin failures++; $display("no us ticks"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
