// tb_rota_loader -- the loader against a behavioural SRAM and a FIFO
// occupancy model: jobs of random TID/P-Len, the pushed words must be the
// task's words in release order, one per cycle while there is room
// (checked by cycle count), the FIFO count never exceeds the depth, and
// abort stops the job with no further pushes.
module tb_rota_loader;
  import rota_pkg::*;
  localparam int FD = 8;
  logic clk = 0, rst_n = 0, abort = 0, re, push, complete;
  logic [ADDR_W-1:0] raddr;
  logic [WORD_W-1:0] rdata, push_data;
  logic [$clog2(FD+1)-1:0] fifo_count = '0;
  job_t job = '0;
  logic [WORD_W-1:0] mem [2**ADDR_W];
  int checks = 0, failures = 0;
  int popping = 1;
  logic [WORD_W-1:0] got [$];

  always #5 clk = ~clk;
  rota_loader #(.FIFO_DEPTH(FD)) dut (.*);

  // behavioural SRAM, one-cycle read
  always @(posedge clk) if (re) rdata <= mem[raddr];
  // FIFO occupancy model, consumer pops one word per cycle when popping=1
  always @(posedge clk) begin
    int c; c = int'(fifo_count);
    if (push) begin c++; got.push_back(push_data); end
    if (popping && fifo_count != 0) c--;
    if (c > FD) begin failures++; $display("FAIL FIFO overflow"); end
    fifo_count <= ($clog2(FD+1))'(c);
  end

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL t=%0t %s", $time, m); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_job(int tid, int plen, bit slow, output int cycles);
    got.delete();
    popping = !slow;
    @(negedge clk);
    job = '{valid: 1'b1, sid: '0, tid: TID_W'(tid), plen: PLEN_W'(plen)};
    @(negedge clk);
    job = '0;
    cycles = 1;
    while (!complete) begin
      if (slow) popping = ($urandom % 4 == 0);
      @(negedge clk); cycles++;
    end
    popping = 1;
    repeat (FD + 2) @(negedge clk);
  endtask

  initial begin
    int cyc;
    foreach (mem[a]) mem[a] = {20'(a), 12'hC0D};
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(complete, "idle after reset");
    // full-speed job: P-Len operations in P-Len cycles
    run_job(5, 6, 0, cyc);
    chk(cyc == 6 + 2, $sformatf("6 reads: accept + 6 read cycles + last data (%0d)", cyc));
    chk(got.size() == 6, "6 words pushed");
    foreach (got[i]) chk(got[i] == {20'(5*32 + i), 12'hC0D}, "word order");
    // random jobs with a slow consumer (back-pressure)
    for (int n = 0; n < 40; n++) begin
      int tid, plen;
      tid = $urandom % 32; plen = 1 + $urandom % 31;
      run_job(tid, plen, 1, cyc);
      chk(got.size() == plen, "all words pushed under back-pressure");
      foreach (got[i]) chk(got[i] == {20'(tid*32 + i), 12'hC0D}, "word order under back-pressure");
    end
    // abort in the middle
    got.delete(); popping = 0;
    @(negedge clk); job = '{valid: 1'b1, sid: '0, tid: TID_W'(9), plen: PLEN_W'(20)};
    @(negedge clk); job = '0;
    repeat (3) @(negedge clk);
    abort = 1; @(negedge clk); abort = 0;
    begin int n0; n0 = got.size();
      chk(complete, "complete right after abort");
      repeat (10) @(negedge clk);
      chk(got.size() == n0 && n0 <= 4, "no pushes after abort");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
