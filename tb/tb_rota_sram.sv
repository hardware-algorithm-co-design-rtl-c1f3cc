// tb_rota_sram -- random writes and reads of the dual-port SRAM against an
// associative-array model; checks the one-cycle read latency and that a
// same-cycle read of a written address returns the old word.
module tb_rota_sram;
  localparam int AW = 12, DW = 32;
  logic clk = 0;
  logic we = 0, re = 0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [DW-1:0] wdata = '0, rdata;
  logic [DW-1:0] model [int];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  rota_sram #(.ADDR_W(AW), .DATA_W(DW)) dut (.*);

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
    logic [DW-1:0] exp; bit pend;
    pend = 0;
    // fill a region so reads are defined
    for (int a = 0; a < 64; a++) begin
      @(negedge clk); we = 1; waddr = AW'(a); wdata = $urandom; model[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      if (pend) chk(rdata == exp, $sformatf("read data %h vs %h", rdata, exp));
      we = $urandom % 2; waddr = AW'($urandom % 64); wdata = $urandom;
      re = $urandom % 2; raddr = AW'($urandom % 64);
      pend = re; exp = model[int'(raddr)];  // old word even if written now
      if (we) model[int'(waddr)] = wdata;
    end
    // the top address
    @(negedge clk); re = 0; we = 1; waddr = '1; wdata = 32'hA5A5_0F0F;
    @(negedge clk); we = 0; re = 1; raddr = '1;
    @(negedge clk); re = 0;
    chk(rdata == 32'hA5A5_0F0F, "top address");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
