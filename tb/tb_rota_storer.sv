// tb_rota_storer -- payload words become SRAM writes at {TID, order} one
// cycle later; the address is formed independently here as tid*32 + off.
module tb_rota_storer;
  import rota_pkg::*;
  logic clk = 0, rst_n = 0, we;
  logic [ADDR_W-1:0] waddr;
  logic [WORD_W-1:0] wdata;
  store_t st = '0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  rota_storer dut (.*);

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL t=%0t %s", $time, m); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    store_t prev;
    repeat (3) @(negedge clk);
    rst_n = 1;
    prev = '0;
    for (int i = 0; i < 3000; i++) begin
      st.valid = $urandom % 2;
      st.tid   = TID_W'($urandom);
      st.off   = OFF_W'($urandom);
      st.data  = $urandom;
      @(negedge clk);
      chk(we == st.valid, "write strobe one cycle later");
      if (st.valid) begin
        chk(int'(waddr) == int'(st.tid) * 32 + int'(st.off), "address = tid*32 + order");
        chk(int'(waddr) < 1024, "5-bit TID stays in the low quarter");
        chk(wdata == st.data, "data");
      end
      prev = st;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
