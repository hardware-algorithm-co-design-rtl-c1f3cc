// rota_loader -- SRAM controller on the read port of the I/O pool.
//
// When a scheduled job {TID, P-Len} arrives (job.valid, only accepted while
// complete = 1) the loader reads the task's operations from pool addresses
// {TID, 0} .. {TID, P-Len-1}, in release order, and pushes each word into
// the FIFO one cycle after its read (synchronous SRAM).  A read is issued
// only when the FIFO has room for it and for the read already in flight,
// so the FIFO never overflows.  abort stops the job at once and suppresses
// the push of a read in flight.  complete is 1 while no job is being
// loaded; it drops the cycle after a job with P-Len > 0 is accepted.
// Throughput: one operation per cycle while the FIFO has room.
module rota_loader
  import rota_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 32
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  job_t                            job,
  input  logic                            abort,
  output logic                            re,
  output logic [ADDR_W-1:0]               raddr,
  input  logic [WORD_W-1:0]               rdata,
  output logic                            push,
  output logic [WORD_W-1:0]               push_data,
  input  logic [$clog2(FIFO_DEPTH+1)-1:0] fifo_count,
  output logic                            complete
);

  logic              active, rv_q;
  logic [TID_W-1:0]  tid;
  logic [PLEN_W-1:0] plen;
  logic [OFF_W-1:0]  off;

  always_comb begin
    re    = active && !abort && (int'(fifo_count) + int'(rv_q) < FIFO_DEPTH);
    raddr = pool_addr(tid, off);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      active <= 1'b0;
      rv_q   <= 1'b0;
      tid    <= '0;
      plen   <= '0;
      off    <= '0;
    end else if (abort) begin
      active <= 1'b0;
      rv_q   <= 1'b0;
    end else begin
      rv_q <= re;
      if (!active && !rv_q && job.valid && job.plen != '0) begin
        active <= 1'b1;
        tid    <= job.tid;
        plen   <= job.plen;
        off    <= '0;
      end else if (re) begin
        off <= off + OFF_W'(1);
        if (PLEN_W'(off) == plen - PLEN_W'(1)) active <= 1'b0;
      end
    end
  end

  assign push      = rv_q;
  assign push_data = rdata;
  assign complete  = !active && !rv_q;

endmodule
