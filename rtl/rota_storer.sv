// rota_storer -- SRAM controller on the write port of the I/O pool.
//
// Each payload word from the decoder (st = {TID, release order, data}) is
// written to the SRAM at the 12-bit pool address {TID (7 bits), release
// order (5 bits)} -- the address split the paper gives.  The 5-bit TID of
// an instruction is zero-extended into the 7-bit field.  The write is
// registered: we/waddr/wdata appear the cycle after st.valid.
module rota_storer
  import rota_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  store_t            st,
  output logic              we,
  output logic [ADDR_W-1:0] waddr,
  output logic [WORD_W-1:0] wdata
);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      we    <= 1'b0;
      waddr <= '0;
      wdata <= '0;
    end else begin
      we <= st.valid;
      if (st.valid) begin
        waddr <= pool_addr(st.tid, st.off);
        wdata <= st.data;
      end
    end
  end

endmodule
