// tb_obs_control -- checks arming, the start on the matching 1PPS, stop words
// and re-arming. 1PPS edges come with decoded seconds counting up; the start
// pulse must come exactly one clock after the 1PPS whose second equals the
// instructed start second, and at no other time.
module tb_obs_control;
  import chisdas_pkg::*;
  logic clk = 0, rst_n = 0;
  logic instr_valid = 0, pps_rise = 0, time_valid = 0;
  instr_t instr = '0;
  logic [SOD_W-1:0] sod_next = '0;
  obs_state_e state;
  logic start, run;
  instr_t cfg;
  int checks = 0, failures = 0, starts = 0;

  obs_control dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) if (start) starts++;

  initial begin
    repeat (100_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("%0t FAIL %s (state %0d)", $time, what, state); end
  endtask

  task automatic send(input logic [16:0] sod, input logic [9:0] res);
    @(negedge clk);
    instr = '{start_sod: sod, res_us: res, xfer_code: 3'd1, nch_m1: 2'd1};
    instr_valid = 1;
    @(negedge clk) instr_valid = 0;
  endtask

  // one second: time becomes valid, then the 1PPS for second 'sec'
  task automatic second(input int sec, input bit valid, output bit started);
    @(negedge clk) begin sod_next = 17'(sec); time_valid = valid; end
    repeat (5) @(negedge clk);
    pps_rise = 1;
    @(negedge clk) begin pps_rise = 0; time_valid = 0; end
    started = start;
    repeat (5) @(negedge clk);
  endtask

  initial begin
    bit st;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(state == OBS_IDLE && !run, "idle after reset");
    // a 1PPS while idle does nothing
    second(100, 1, st); check(!st && state == OBS_IDLE, "no start when idle");
    send(17'd103, 10'd20);
    check(state == OBS_ARMED && cfg.res_us == 10'd20 && cfg.start_sod == 17'd103, "armed");
    second(101, 1, st); check(!st && state == OBS_ARMED, "no start at 101");
    second(102, 1, st); check(!st, "no start at 102");
    second(103, 0, st); check(!st && state == OBS_ARMED, "no start without valid time");
    send(17'd105, 10'd100);
    second(104, 1, st); check(!st, "no start at 104");
    second(105, 1, st); check(st, "start at 105");
    check(state == OBS_RUN && run, "running");
    second(106, 1, st); check(!st && run, "still running, no second start");
    send(17'd0, 10'd0);
    check(state == OBS_IDLE && !run, "stop word");
    second(105, 1, st); check(!st, "no start after stop");
    check(starts == 1, "exactly one start");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
