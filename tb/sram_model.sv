// sram_model -- synchronous single-port SRAM for testbenches: write at the
// clock edge when we is high, read data on rdata one clock after re.
module sram_model #(
  parameter int unsigned AW = 8
) (
  input  logic          clk,
  input  logic [AW-1:0] addr,
  input  logic          we,
  input  logic          re,
  input  logic [31:0]   wdata,
  output logic [31:0]   rdata
);
  logic [31:0] mem [1 << AW];
  initial rdata = '0;
  always_ff @(posedge clk) begin
    if (we) mem[addr] <= wdata;
    if (re) rdata <= mem[addr];
  end
endmodule
