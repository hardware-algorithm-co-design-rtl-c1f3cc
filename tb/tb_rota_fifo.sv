// tb_rota_fifo -- random push/pop/flush of the FIFO against a queue model:
// data order, empty/full/count every cycle.
module tb_rota_fifo;
  localparam int D = 8, W = 16;
  logic clk = 0, rst_n = 0, flush = 0, push = 0, pop = 0;
  logic [W-1:0] din = '0, dout;
  logic empty, full;
  logic [$clog2(D+1)-1:0] count;
  logic [W-1:0] q [$];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  rota_fifo #(.DEPTH(D), .W(W)) dut (.*);

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

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 6000; i++) begin
      @(negedge clk);
      chk(int'(count) == q.size(), "count");
      chk(empty == (q.size() == 0), "empty");
      chk(full == (q.size() == D), "full");
      if (q.size() > 0) chk(dout == q[0], "head data");
      flush = ($urandom % 97) == 0;
      pop   = (q.size() > 0) && ($urandom % 2);
      push  = (q.size() < D || pop) && ($urandom % ((i / 1000) % 2 ? 3 : 2)) == 0;
      din   = W'($urandom);
      if (flush) q.delete();
      else begin
        if (pop) void'(q.pop_front());
        if (push) q.push_back(din);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
