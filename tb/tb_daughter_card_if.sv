// tb_daughter_card_if -- checks the input synchroniser and edge detectors.
// Random levels are applied between clock edges; a reference model keeps the
// sampled history and predicts each output pulse STAGES+1 = 3 clocks after the
// edge was sampled. Every output bit is compared every clock, and the number of
// photon pulses seen is compared with the number of rising edges applied.
module tb_daughter_card_if;
  localparam int N = 4;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] photon_in = '0;
  logic irig_in = 0, fstd_in = 0, pps_in = 0;
  logic [N-1:0] photon_rise;
  logic irig_lvl, fstd_rise, pps_rise;
  int checks = 0, failures = 0;

  daughter_card_if #(.NCH_MAX(N)) dut (.*);

  always #5 clk = ~clk;

  // sampled input history: h[0] = sampled at this edge
  logic [N+2:0] h [0:4];
  int edges_in = 0, pulses_out = 0;

  initial begin
    repeat (20_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 5; i++) h[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      @(negedge clk);
      if ($urandom_range(0, 2) == 0) photon_in = N'($urandom);
      if ($urandom_range(0, 1) == 0) fstd_in = ~fstd_in;
      if ($urandom_range(0, 20) == 0) pps_in = ~pps_in;
      if ($urandom_range(0, 10) == 0) irig_in = ~irig_in;
    end
    repeat (5) @(posedge clk);
    checks++;
    if (edges_in != pulses_out) begin
      failures++;
      $display("photon edges %0d, pulses %0d", edges_in, pulses_out);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference: outputs after edge k reflect inputs sampled at edges k-2 and k-3
  always @(posedge clk) begin
    if (rst_n) begin
      logic [N+2:0] cur, prv;
      cur = h[2]; prv = h[3];
      checks++;
      if (photon_rise !== (cur[N-1:0] & ~prv[N-1:0]) || fstd_rise !== (cur[N] & ~prv[N])
          || pps_rise !== (cur[N+1] & ~prv[N+1]) || irig_lvl !== cur[N+2]) begin
        failures++;
        if (failures < 10) $display("mismatch at %0t: rise %b exp %b", $time, photon_rise, cur[N-1:0] & ~prv[N-1:0]);
      end
      for (int c = 0; c < N; c++) begin
        pulses_out += int'(photon_rise[c]);
        edges_in   += int'(h[0][c] & ~h[1][c]);
      end
    end
    h[4] <= h[3]; h[3] <= h[2]; h[2] <= h[1]; h[1] <= h[0];
    h[0] <= {irig_in, pps_in, fstd_in, photon_in};
  end
endmodule
