// tb_record_writer -- drives record openings and bin snapshots as the timer
// and counter would and checks the word stream. The expected stream is built
// here from the same events: five header words (security word, instruction,
// master[31:0], {record, master[39:32]}, bin) per record and nch count words per
// bin, with the last bin of a record before the next header. Also checks that
// each bin's words appear within NCH+1 clocks, channel counts of 1, 2 and 4, and
// that a bin arriving on top of a pending one sets overrun.
module tb_record_writer;
  import chisdas_pkg::*;
  localparam int N = 4;
  logic clk = 0, rst_n = 0, clear = 0;
  logic [1:0] nch_m1 = 2'd3;
  logic [31:0] instr_word = 32'h1234_5678;
  logic rec_open = 0, snap_valid = 0, bin_end = 0;
  hk_t hk = '0;
  logic [N-1:0][31:0] snap = '0;
  logic wr_valid, overrun;
  logic [31:0] wr_data;
  int checks = 0, failures = 0;
  logic [31:0] expq[$];
  int last_event = 0, cyc = 0, max_lat = 0;
  bit no_check = 0;

  record_writer #(.NCH_MAX(N)) dut (.clk, .rst_n, .clear, .nch_m1, .instr_word, .rec_open, .hk,
                                    .snap_valid, .snap, .wr_valid, .wr_data, .overrun);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (200_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n && wr_valid && !no_check) begin
      checks++;
      if (expq.size() == 0) begin failures++; $display("%0t unexpected word %h", $time, wr_data); end
      else begin
        logic [31:0] e;
        e = expq.pop_front();
        if (wr_data !== e) begin
          failures++;
          if (failures < 10) $display("%0t word %h expected %h", $time, wr_data, e);
        end
      end
      if (cyc - last_event > max_lat) max_lat = cyc - last_event;
    end
  end

  // one bin: bin_end (with rec_open when last) then snapshot one clock later
  task automatic do_bin(input bit last, input int rec, input longint master);
    logic [N-1:0][31:0] s;
    for (int c = 0; c < N; c++) s[c] = $urandom;
    @(negedge clk);
    rec_open = last;
    if (last) begin
      hk = '{master: MASTER_W'(master), record: RECORD_W'(rec), bin: '0};
    end
    last_event = cyc;
    @(negedge clk);
    rec_open = 0;
    snap = s;
    snap_valid = 1;
    for (int c = 0; c <= int'(nch_m1); c++) expq.push_back(s[c]);
    if (last) begin
      expq.push_back(SECURITY_WORD);
      expq.push_back(instr_word);
      expq.push_back(hk.master[31:0]);
      expq.push_back({hk.record, hk.master[39:32]});
      expq.push_back(hk.bin);
    end
    @(negedge clk) snap_valid = 0;
  endtask

  task automatic open_first(input longint master);
    @(negedge clk);
    rec_open = 1;
    hk = '{master: MASTER_W'(master), record: '0, bin: '0};
    last_event = cyc;
    @(negedge clk) rec_open = 0;
    expq.push_back(SECURITY_WORD);
    expq.push_back(instr_word);
    expq.push_back(hk.master[31:0]);
    expq.push_back({hk.record, hk.master[39:32]});
    expq.push_back(hk.bin);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int pass = 0; pass < 3; pass++) begin
      @(negedge clk) begin
        nch_m1 = (pass == 0) ? 2'd3 : (pass == 1) ? 2'd0 : 2'd1;
        instr_word = $urandom;
        clear = 1;
      end
      @(negedge clk) clear = 0;
      open_first(0);
      repeat (12) @(negedge clk);
      for (int r = 0; r < 3; r++)
        for (int b = 0; b < 4; b++) begin
          do_bin(b == 3, r + 1, 64'h12_3456_7890 + 64'(r) * 100);
          repeat ($urandom_range(8, 15)) @(negedge clk);
        end
      repeat (10) @(negedge clk);
      checks++;
      if (expq.size() != 0) begin failures++; $display("%0d words missing", expq.size()); end
      expq.delete();
    end
    checks++;
    if (max_lat > N + 5 + 2) begin failures++; $display("latency %0d clocks", max_lat); end
    checks++;
    if (overrun) begin failures++; $display("overrun without cause"); end
    no_check = 1;
    // overrun: two snapshots back to back while four words are pending
    @(negedge clk) begin nch_m1 = 2'd3; snap_valid = 1; end
    @(negedge clk) snap_valid = 1;
    @(negedge clk) snap_valid = 0;
    repeat (8) @(negedge clk);
    checks++;
    if (!overrun) begin failures++; $display("overrun not flagged"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
