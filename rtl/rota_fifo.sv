// rota_fifo -- synchronous FIFO between the loader and the protocol
// translator.  DEPTH words of W bits, show-ahead output (dout is the oldest
// word while !empty), push and pop in the same cycle allowed, flush empties
// it in one cycle (used when a running ETS is terminated).  Pushing when
// full or popping when empty is a caller error and is checked by
// assertions.  DEPTH = 32 (one task's maximum) is this design's choice.
module rota_fifo #(
  parameter int unsigned DEPTH = 32,
  parameter int unsigned W     = 32
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       flush,
  input  logic                       push,
  input  logic [W-1:0]               din,
  input  logic                       pop,
  output logic [W-1:0]               dout,
  output logic                       empty,
  output logic                       full,
  output logic [$clog2(DEPTH+1)-1:0] count
);

  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [W-1:0]  mem [DEPTH];
  logic [PW-1:0] wp, rp;

  assign empty = (count == '0);
  assign full  = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign dout  = mem[rp];

  function automatic logic [PW-1:0] inc(logic [PW-1:0] p);
    return (p == PW'(DEPTH-1)) ? '0 : p + PW'(1);
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n || flush) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (push) begin
        mem[wp] <= din;
        wp      <= inc(wp);
      end
      if (pop) rp <= inc(rp);
      if (push && !pop)      count <= count + 1'b1;
      else if (pop && !push) count <= count - 1'b1;
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n || flush) push |-> (!full || pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n || flush) pop  |-> !empty);

endmodule
