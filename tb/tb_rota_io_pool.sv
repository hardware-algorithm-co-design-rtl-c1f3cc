// tb_rota_io_pool -- store tasks through the storer interface, schedule
// jobs, and pop the operations with a random-ready consumer; the words must
// come out in release order, the first one 3 cycles after the job, and an
// abort must flush what is queued.
module tb_rota_io_pool;
  import rota_pkg::*;
  logic clk = 0, rst_n = 0, abort = 0, op_valid, op_ready = 0, complete, empty;
  logic [WORD_W-1:0] op_data;
  store_t st = '0;
  job_t job = '0;
  int checks = 0, failures = 0;
  logic [WORD_W-1:0] tasks [32][32];

  always #5 clk = ~clk;
  rota_io_pool #(.FIFO_DEPTH(32)) dut (.*);

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL t=%0t %s", $time, m); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic store_task(int tid, int plen);
    for (int i = 0; i < plen; i++) begin
      tasks[tid][i] = $urandom;
      @(negedge clk);
      st = '{valid: 1'b1, tid: TID_W'(tid), off: OFF_W'(i), data: tasks[tid][i]};
    end
    @(negedge clk); st = '0;
  endtask

  task automatic run(int tid, int plen, int ready_pct);
    int n, lat; bit first;
    @(negedge clk);
    job = '{valid: 1'b1, sid: '0, tid: TID_W'(tid), plen: PLEN_W'(plen)};
    @(negedge clk); job = '0;
    n = 0; lat = 1; first = 1;
    while (n < plen && lat < 5000) begin
      if (op_valid && first) begin first = 0; chk(lat == 3, $sformatf("first operation after 3 cycles (%0d)", lat)); end
      op_ready = ($urandom % 100) < ready_pct;
      #1;
      if (op_valid && op_ready) begin
        chk(op_data == tasks[tid][n], $sformatf("task %0d op %0d", tid, n));
        n++;
      end
      @(negedge clk); lat++;
      op_ready = 0;
    end
    chk(n == plen, "all operations delivered");
    @(negedge clk);
    chk(complete && empty, "idle after the job");
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 32; t++) store_task(t, 1 + (t % 31));
    run(3, 4, 100);
    for (int k = 0; k < 30; k++) begin
      int t; t = $urandom % 32;
      run(t, 1 + (t % 31), 20 + $urandom % 80);
    end
    // abort flushes the queue
    @(negedge clk); job = '{valid: 1'b1, sid: '0, tid: TID_W'(30), plen: PLEN_W'(31)};
    @(negedge clk); job = '0;
    repeat (10) @(negedge clk);
    chk(!empty, "queue filled");
    abort = 1; @(negedge clk); abort = 0;
    chk(empty && complete, "abort flushes and stops");
    repeat (5) @(negedge clk);
    chk(empty, "nothing after abort");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
