// irigb_gen -- IRIG-B time code source for testbenches.
//
// Builds the 100 cells of a frame for a given day/hour/minute/second (BCD
// fields at cells 1-4, 6-8, 10-13, 15-17, 20-23, 25-26, 30-33, 35-38, 40-41,
// markers at cells 0, 9, 19, ... 99) and plays them as a TTL level: each 10 ms
// cell is high for 2 ms (0), 5 ms (1) or 8 ms (marker). Durations are counted in
// ticks of 'tick', US_PER_MS ticks per millisecond. With chop set, the high part
// is cut into one 0.5 ms pulse per 1 ms carrier cycle, as a comparator on the
// amplitude-modulated carrier would give. pps is pulsed at the leading edge of
// cell 0. corrupt_cell >= 0 turns that cell into a wrong symbol.
module irigb_gen #(
  parameter int unsigned US_PER_MS = 20
) (
  input  logic clk,
  input  logic tick,
  output logic irig,
  output logic pps
);
  initial begin
    irig = 1'b0;
    pps  = 1'b0;
  end

  task automatic wait_ticks(input int n);
    for (int i = 0; i < n; i++) begin
      @(posedge clk);
      while (!tick) @(posedge clk);
    end
  endtask

  function automatic int bcd_cell(input int v, input int pos);
    // cell value of a field; returns 0/1
    int d;
    case (pos)
      1,2,3,4:       d = (v % 10) >> (pos - 1);
      6,7,8,9:       d = ((v / 10) % 10) >> (pos - 6);
      default:       d = 0;
    endcase
    return d & 1;
  endfunction

  // symbol of a cell: 0, 1 or 2 (marker)
  function automatic int cell_sym(input int day, input int hr, input int mn, input int sc, input int c);
    if (c == 0 || (c % 10) == 9) return 2;
    if (c >= 1  && c <= 8)  return bcd_cell(sc, c);
    if (c >= 10 && c <= 18) return bcd_cell(mn, c - 9);
    if (c >= 20 && c <= 28) return bcd_cell(hr, c - 19);
    if (c >= 30 && c <= 38) return bcd_cell(day % 100, c - 29);
    if (c == 40 || c == 41) return ((day / 100) >> (c - 40)) & 1;
    return 0;
  endfunction

  task automatic play_cell(input int s, input bit chop);
    int hi_ms;
    hi_ms = (s == 2) ? 8 : (s == 1) ? 5 : 2;
    if (!chop) begin
      irig = 1'b1;
      wait_ticks(hi_ms * US_PER_MS);
      irig = 1'b0;
      wait_ticks((10 - hi_ms) * US_PER_MS);
    end else begin
      for (int k = 0; k < hi_ms; k++) begin
        irig = 1'b1;
        wait_ticks(US_PER_MS / 2);
        irig = 1'b0;
        wait_ticks(US_PER_MS - US_PER_MS / 2);
      end
      wait_ticks((10 - hi_ms) * US_PER_MS);
    end
  endtask

  task automatic send_frame(input int day, input int hr, input int mn, input int sc,
                            input bit chop, input int corrupt_cell);
    for (int c = 0; c < 100; c++) begin
      int s;
      s = cell_sym(day, hr, mn, sc, c);
      if (c == corrupt_cell) s = (s == 2) ? 0 : 2;
      if (c == 0) pps = 1'b1;
      fork
        begin
          if (c == 0) begin
            wait_ticks(US_PER_MS);
            pps = 1'b0;
          end
        end
      join_none
      play_cell(s, chop);
    end
  endtask
endmodule
