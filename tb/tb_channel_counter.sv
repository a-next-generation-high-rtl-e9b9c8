// tb_channel_counter -- random photon edges on four channels, bins of random
// length. The reference keeps its own per-channel counts and, at each bin_end,
// predicts the snapshot seen with snap_valid one clock later. run drops once to
// check that counting stops and restarts from zero.
module tb_channel_counter;
  localparam int N = 4;
  logic clk = 0, rst_n = 0, run = 0, bin_end = 0;
  logic [N-1:0] photon_rise = '0;
  logic [N-1:0][31:0] snap;
  logic snap_valid;
  int checks = 0, failures = 0, nbin = 0;
  int ref_live[N], ref_snap[N];
  bit exp_valid = 0;

  channel_counter #(.NCH_MAX(N), .CNT_W(32)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n) begin
      checks++;
      if (snap_valid !== exp_valid) begin failures++; $display("%0t snap_valid", $time); end
      if (exp_valid) begin
        for (int c = 0; c < N; c++) begin
          checks++;
          if (snap[c] !== 32'(ref_snap[c])) begin
            failures++;
            if (failures < 10) $display("%0t ch%0d snap %0d exp %0d", $time, c, snap[c], ref_snap[c]);
          end
        end
      end
      exp_valid = bin_end;
      for (int c = 0; c < N; c++) begin
        if (!run) ref_live[c] = 0;
        else if (bin_end) begin ref_snap[c] = ref_live[c]; ref_live[c] = int'(photon_rise[c]); end
        else ref_live[c] += int'(photon_rise[c]);
      end
    end
  end

  initial begin
    for (int c = 0; c < N; c++) begin ref_live[c] = 0; ref_snap[c] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk) run = 1;
    for (int b = 0; b < 60; b++) begin
      int len;
      len = $urandom_range(3, 40);
      for (int i = 0; i < len; i++) begin
        @(negedge clk);
        photon_rise = N'($urandom) & N'($urandom);
        bin_end = (i == len - 1);
        if (b == 30 && i == 2) run = 0;
        if (b == 31 && i == 0) run = 1;
      end
      nbin++;
    end
    @(negedge clk) begin bin_end = 0; photon_rise = '0; end
    repeat (3) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
