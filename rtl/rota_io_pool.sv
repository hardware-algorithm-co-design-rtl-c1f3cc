// rota_io_pool -- the I/O pool: storer, dual-port SRAM, loader and FIFO.
//
// Payload words from the decoder are written by the storer into the SRAM
// at {TID, release order}; a job chosen by the scheduling engine is read
// back by the loader in release order and queued in the FIFO, whose head is
// offered to the protocol translator as op_valid/op_data (popped with
// op_ready).  abort (the running ETS was terminated) stops the loader and
// flushes the FIFO in the same cycle.  complete = loader idle, empty = FIFO
// empty.  Latency from job.valid to the first op_valid: 3 cycles.
module rota_io_pool
  import rota_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  store_t            st,
  input  job_t              job,
  input  logic              abort,
  output logic              op_valid,
  output logic [WORD_W-1:0] op_data,
  input  logic              op_ready,
  output logic              complete,
  output logic              empty
);

  logic                            we, re, push, full;
  logic [ADDR_W-1:0]               waddr, raddr;
  logic [WORD_W-1:0]               wdata, rdata, push_data;
  logic [$clog2(FIFO_DEPTH+1)-1:0] count;

  rota_storer u_storer (.clk, .rst_n, .st, .we, .waddr, .wdata);

  rota_sram #(.ADDR_W(ADDR_W), .DATA_W(WORD_W)) u_sram (
    .clk, .we, .waddr, .wdata, .re, .raddr, .rdata
  );

  rota_loader #(.FIFO_DEPTH(FIFO_DEPTH)) u_loader (
    .clk, .rst_n, .job, .abort, .re, .raddr, .rdata, .push, .push_data,
    .fifo_count(count), .complete
  );

  rota_fifo #(.DEPTH(FIFO_DEPTH), .W(WORD_W)) u_fifo (
    .clk, .rst_n, .flush(abort), .push, .din(push_data),
    .pop(op_valid && op_ready), .dout(op_data), .empty, .full, .count
  );

  assign op_valid = !empty;

endmodule
