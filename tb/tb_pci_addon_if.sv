// tb_pci_addon_if -- models the two FIFOs of the PCI chip. Inbound: a queue of
// instruction words with an empty flag; each word must come out once, in order,
// as an instr_valid pulse. Outbound: a full flag that toggles at random; a
// stream source offers numbered words. Checks that nothing is written while
// full, that the words arrive in order, and that xfer_done pulses once per
// xfer_words words.
module tb_pci_addon_if;
  import chisdas_pkg::*;
  logic clk = 0, rst_n = 0, clear = 0;
  logic in_empty, in_rd, instr_valid;
  logic [31:0] in_data = '0, instr_word;
  logic out_full = 0, out_wr;
  logic [31:0] out_data;
  logic s_valid = 0, s_ready;
  logic [31:0] s_data;
  logic [XFER_W-1:0] xfer_words = XFER_W'(10);
  logic xfer_done;
  int checks = 0, failures = 0;
  logic [31:0] inq[$];
  int n_in = 0, n_instr = 0, n_out = 0, n_done = 0, sent = 0;

  pci_addon_if dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // inbound FIFO model: read data one clock after in_rd
  assign in_empty = (inq.size() == 0);
  always @(posedge clk) if (in_rd) in_data <= inq.pop_front();

  always @(posedge clk) begin
    if (rst_n) begin
      if (instr_valid) begin
        checks++;
        if (instr_word !== 32'(n_instr) * 32'h0101_0101 + 32'h5) begin
          failures++; $display("%0t instruction %h", $time, instr_word);
        end
        n_instr++;
      end
      if (out_wr) begin
        checks++;
        if (out_full) begin failures++; $display("%0t write while full", $time); end
        checks++;
        if (out_data !== 32'(n_out) + 32'hA000) begin failures++; $display("%0t out %h", $time, out_data); end
        n_out++;
      end
      if (xfer_done) n_done++;
    end
  end

  // stream source, valid/ready
  always @(posedge clk) begin
    if (rst_n && s_valid && s_ready) sent <= sent + 1;
  end
  always @(negedge clk) begin
    if (rst_n) begin
      if (!s_valid || s_ready) begin
        s_valid <= (sent < 95) && ($urandom_range(0, 3) != 0);
      end
      out_full <= ($urandom_range(0, 2) == 0);
    end
  end
  assign s_data = 32'(sent) + 32'hA000;

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 6; i++) begin
      repeat ($urandom_range(0, 5)) @(negedge clk);
      inq.push_back(32'(i) * 32'h0101_0101 + 32'h5);
    end
    repeat (2000) @(negedge clk);
    checks++;
    if (n_instr != 6) begin failures++; $display("%0d instructions", n_instr); end
    checks++;
    if (n_out != 95) begin failures++; $display("%0d words out", n_out); end
    checks++;
    if (n_done != 9) begin failures++; $display("%0d transfers done", n_done); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
