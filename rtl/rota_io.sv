// rota_io -- top level of the real-time I/O co-processor.
//
// The co-processor sits between the on-chip router and one I/O device and
// runs I/O tasks at precise times.  Instructions from the cores arrive as
// 32-bit words (in_valid/in_data, in_priv = issued in kernel mode).  The
// mini decoder configures execution time servers (ETSs: start time, budget,
// priority, hyper-period), stores task operations in the I/O pool and
// registers the tasks with the local scheduler of their ETS.  Every
// hyper-period each ETS k owns the window [start_k, start_k + budget_k);
// the global scheduler picks the highest-priority ETS that is inside its
// window and has a ready task, its local scheduler picks the task, and the
// I/O pool streams the task's operations to the protocol translator
// (op_valid/op_data/op_ready, outside this module).  Tasks run to
// completion without pre-emption; when an ETS's budget runs out its
// unfinished tasks are dropped and, if one of them is being loaded or is
// queued, the loader is aborted and the queue flushed (terminated pulses).
//
// Find_Next_Job is raised when the loader is idle, the queue is empty, the
// translator reports io_idle and no scheduling decision is in flight; a
// job then appears on job.valid the next cycle (if an ETS is eligible) and
// its first operation reaches op_valid three cycles after that.
// SCH_PIPE = 1 builds the optional pipeline stage into the comparator trees
// of both scheduling levels; Find_Next_Job then also waits until no tick,
// configuration, task header, dispatch or termination has happened for
// four cycles, so that the pipelined decision reflects current state.  The
// default (0) is the unpipelined design.  The blocks and their connections
// follow the paper's micro-architecture; how Find_Next_Job is formed,
// termination of the running job, the placement of the pipeline stage and
// the status outputs are this design's choices.
module rota_io
  import rota_pkg::*;
#(
  parameter int unsigned N_ETS      = 8,
  parameter int unsigned TIB_DEPTH  = 8,
  parameter int unsigned TICK_DIV   = 1000,
  parameter int unsigned FIFO_DEPTH = 32,
  parameter bit          SCH_PIPE   = 1'b0
) (
  input  logic              clk,
  input  logic              rst_n,
  // router / interconnect side
  input  logic              in_valid,
  input  logic [WORD_W-1:0] in_data,
  input  logic              in_priv,
  // protocol translator side
  output logic              op_valid,
  output logic [WORD_W-1:0] op_data,
  input  logic              op_ready,
  input  logic              io_idle,
  // status
  output job_t              job,
  output logic [N_ETS-1:0]  ets_budget,
  output logic              hyp_start,
  output logic              terminated,
  output logic              priv_err,
  output logic              tib_overflow
);

  cfg_t             cfg;
  tpara_t           tpara;
  store_t           st;
  logic             tick, find_next_job, fnj_q;
  logic             complete, empty;
  logic [N_ETS-1:0] expire;
  logic             run_valid, abort;
  logic [SID_W-1:0] run_sid;

  rota_minid u_minid (.clk, .rst_n, .in_valid, .in_data, .in_priv, .cfg, .tpara, .st, .priv_err);

  rota_timebase #(.TICK_DIV(TICK_DIV)) u_timebase (.clk, .rst_n, .cfg, .tick, .hyp_start);

  rota_se #(.N_ETS(N_ETS), .TIB_DEPTH(TIB_DEPTH), .SCH_PIPE(SCH_PIPE)) u_se (
    .clk, .rst_n, .cfg, .tpara, .hyp_start, .tick, .find_next_job,
    .job, .budget(ets_budget), .expire, .tib_overflow
  );

  rota_io_pool #(.FIFO_DEPTH(FIFO_DEPTH)) u_pool (
    .clk, .rst_n, .st, .job, .abort, .op_valid, .op_data, .op_ready, .complete, .empty
  );

  // With the pipelined comparator trees a decision may only be taken once
  // the trees have caught up with every change of their inputs: a tick
  // (budgets move up to two cycles later), a configuration or task header,
  // a dispatch or a termination.  SETTLE covers TIB/budget update, the L-SE
  // stage and the G-SE stage.
  localparam int unsigned SETTLE = 4;
  logic       sch_event;
  logic [2:0] settle;
  assign sch_event = tick || cfg.valid || tpara.valid || job.valid || (|expire);
  always_ff @(posedge clk) begin
    if (!rst_n)         settle <= 3'(SETTLE);
    else if (sch_event) settle <= 3'(SETTLE);
    else if (settle != '0) settle <= settle - 3'd1;
  end
  logic sch_ready;
  assign sch_ready = !SCH_PIPE || (settle == '0 && !sch_event);

  assign find_next_job = complete && empty && io_idle && !fnj_q && !job.valid && sch_ready;
  always_comb begin
    abort = 1'b0;
    for (int k = 0; k < N_ETS; k++)
      if (run_valid && run_sid == SID_W'(k) && expire[k] && !(complete && empty)) abort = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      fnj_q      <= 1'b0;
      run_valid  <= 1'b0;
      run_sid    <= '0;
      terminated <= 1'b0;
    end else begin
      fnj_q      <= find_next_job;
      terminated <= abort;
      if (job.valid) begin
        run_valid <= 1'b1;
        run_sid   <= job.sid;
      end else if (abort || (complete && empty)) begin
        run_valid <= 1'b0;
      end
    end
  end

endmodule
