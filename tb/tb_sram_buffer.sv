// tb_sram_buffer -- random write traffic and a randomly stalling reader on a
// 64-word SRAM with 16-word transfers. Checks: every word comes out in the
// order written; words leave only in whole transfers (the count read never
// exceeds the count written rounded down to a transfer); a write is never
// delayed (writes go to SRAM the clock they are offered); the full output rate
// of one word per clock is reached when the reader never stalls; with the
// reader stopped, a full SRAM sets overflow.
module tb_sram_buffer;
  import chisdas_pkg::*;
  localparam int AW = 6;
  localparam int XW = 16;
  logic clk = 0, rst_n = 0, clear = 0;
  logic wr_valid = 0;
  logic [31:0] wr_data = '0;
  logic [XFER_W-1:0] xfer_words = XFER_W'(XW);
  logic [AW-1:0] sram_addr;
  logic sram_we, sram_re;
  logic [31:0] sram_wdata, sram_rdata;
  logic out_valid, out_ready = 0, overflow;
  logic [31:0] out_data;
  logic [AW:0] level;
  int checks = 0, failures = 0;
  int nwr = 0, nrd = 0, run_len = 0, best_run = 0;

  sram_buffer #(.SRAM_AW(AW), .OFIFO_DEPTH(4)) dut (.*);
  sram_model #(.AW(AW)) mem (.clk, .addr(sram_addr), .we(sram_we), .re(sram_re), .wdata(sram_wdata), .rdata(sram_rdata));
  always #5 clk = ~clk;

  initial begin
    repeat (200_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n && !clear) begin
      if (wr_valid && 32'(level) != (1 << AW)) begin
        checks++;
        if (!sram_we || sram_wdata !== wr_data) begin failures++; $display("%0t write not taken", $time); end
        nwr++;
      end
      if (out_valid && out_ready) begin
        checks++;
        if (out_data !== 32'(nrd) * 32'h9E37_79B9) begin
          failures++;
          if (failures < 10) $display("%0t read %h expected word %0d", $time, out_data, nrd);
        end
        nrd++;
        run_len++;
        if (run_len > best_run) best_run = run_len;
      end else run_len = 0;
      checks++;
      if (nrd > (nwr / XW) * XW) begin failures++; $display("%0t read ahead of a whole transfer", $time); end
    end
  end

  task automatic push_words(input int n, input int gap_max);
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      wr_valid = 1;
      wr_data = 32'(nwr) * 32'h9E37_79B9;
      @(negedge clk) wr_valid = 0;
      repeat ($urandom_range(0, gap_max)) @(negedge clk);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // phase 1: random writes and random reader stalls
    fork
      push_words(400, 3);
      repeat (3000) @(negedge clk) out_ready = ($urandom_range(0, 3) != 0);
    join
    // phase 2: reader always ready, writes in a burst then silence
    out_ready = 1;
    push_words(2 * XW, 0);
    repeat (100) @(negedge clk);
    checks++;
    if (nrd != (nwr / XW) * XW) begin failures++; $display("read %0d of %0d", nrd, nwr); end
    checks++;
    if (best_run < XW / 2) begin failures++; $display("longest back-to-back run %0d", best_run); end
    checks++;
    if (overflow) begin failures++; $display("overflow without cause"); end
    // phase 3: reader stopped, fill past capacity
    out_ready = 0;
    push_words((1 << AW) + 8, 0);
    checks++;
    if (!overflow) begin failures++; $display("overflow not flagged"); end
    @(negedge clk) clear = 1;
    @(negedge clk) clear = 0;
    checks++;
    if (overflow || out_valid) begin failures++; $display("clear did not empty"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
