// rota_sram -- dual-port SRAM of the I/O pool: 2^ADDR_W words of DATA_W
// bits (4096 x 32 bit = 16 KB by default), one write port and one read
// port on the same clock.  Read is synchronous: rdata holds the word at
// raddr one cycle after re.  A read and a write of the same address in one
// cycle return the old word.  Written as an array so that synthesis maps
// it to a block RAM / SRAM macro; contents are not reset.
module rota_sram #(
  parameter int unsigned ADDR_W = 12,
  parameter int unsigned DATA_W = 32
) (
  input  logic              clk,
  input  logic              we,
  input  logic [ADDR_W-1:0] waddr,
  input  logic [DATA_W-1:0] wdata,
  input  logic              re,
  input  logic [ADDR_W-1:0] raddr,
  output logic [DATA_W-1:0] rdata
);

  logic [DATA_W-1:0] mem [2**ADDR_W];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
