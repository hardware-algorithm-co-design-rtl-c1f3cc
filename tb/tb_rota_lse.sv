// tb_rota_lse -- local scheduler of ETS 2 with a 4-entry TIB.  Loads the
// four example rows of the TIB figure (TID, P-Len, Prio-T) = (01,07,01),
// (04,1F,05), (02,08,03), (08,13,08), then checks the choice of the
// highest Prio-T, dispatch, i.run re-release, termination, loads for
// another ETS, TIB overflow and i.ld.
module tb_rota_lse;
  import rota_pkg::*;
  logic clk = 0, rst_n = 0, dispatch = 0, terminate = 0, has_t, overflow;
  logic [TID_W-1:0] dispatch_tid = '0, tid_sch;
  logic [PLEN_W-1:0] plen_sch;
  tpara_t tpara = '0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  rota_lse #(.MY_SID(2), .TIB_DEPTH(4)) dut (.*);

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

  task automatic tp(tpkind_e k, int sid, int tid, int plen, int prio);
    @(negedge clk);
    tpara = '{valid: 1'b1, kind: k, sid: SID_W'(sid), tid: TID_W'(tid), plen: PLEN_W'(plen), prio: PRIO_W'(prio)};
    @(negedge clk);
    tpara = '0;
  endtask

  task automatic disp(int tid);
    @(negedge clk); dispatch = 1; dispatch_tid = TID_W'(tid);
    @(negedge clk); dispatch = 0;
  endtask

  task automatic expect_best(bit h, int tid, int plen, string m);
    chk(has_t == h, {m, ": HasT?"});
    if (h) chk(tid_sch == TID_W'(tid) && plen_sch == PLEN_W'(plen), $sformatf("%s: TID-SCH %h P-Len %h", m, tid_sch, plen_sch));
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    expect_best(0, 0, 0, "empty TIB");
    tp(TP_PLD, 2, 'h01, 'h07, 0);
    tp(TP_PLD, 2, 'h04, 'h1F, 0);
    tp(TP_PLD, 2, 'h02, 'h08, 0);
    tp(TP_PLD, 2, 'h08, 'h13, 0);
    expect_best(0, 0, 0, "pre-loaded tasks are not ready");
    tp(TP_PLD, 3, 'h09, 'h02, 0);
    chk(!overflow, "load for another ETS ignored");
    tp(TP_IRUN, 0, 'h01, 0, 'h01);
    expect_best(1, 'h01, 'h07, "one released task");
    tp(TP_IRUN, 0, 'h04, 0, 'h05);
    tp(TP_IRUN, 0, 'h02, 0, 'h03);
    tp(TP_IRUN, 0, 'h08, 0, 'h08);
    expect_best(1, 'h08, 'h13, "figure rows: Prio-T 0x08 wins");
    disp('h08);
    expect_best(1, 'h04, 'h1F, "after dispatch: Prio-T 0x05");
    disp('h04);
    expect_best(1, 'h02, 'h08, "then Prio-T 0x03");
    tp(TP_IRUN, 0, 'h08, 0, 'h02);
    expect_best(1, 'h02, 'h08, "re-released 0x08 at Prio-T 2 loses to 3");
    tp(TP_IRUN, 0, 'h01, 0, 'h03);
    expect_best(1, 'h01, 'h07, "tie on Prio-T 3 goes to the lower slot (TID 0x01 in slot 0)");
    @(negedge clk); terminate = 1; @(negedge clk); terminate = 0;
    expect_best(0, 0, 0, "terminate drops every ready task");
    // TIB is full: a fifth task overflows
    @(negedge clk);
    tpara = '{valid: 1'b1, kind: TP_ILD, sid: 5'd2, tid: 5'h10, plen: 5'd3, prio: 8'd9};
    @(negedge clk); tpara = '0;
    chk(overflow, "fifth task overflows a 4-entry TIB");
    @(negedge clk);
    expect_best(0, 0, 0, "overflowing task not stored");
    // a load of TID 0x02 to ETS 5 frees its entry here; then the new task fits
    tp(TP_PLD, 5, 'h02, 'h01, 0);
    tp(TP_ILD, 2, 'h10, 'h03, 'h09);
    chk(!overflow, "freed entry reused");
    expect_best(1, 'h10, 'h03, "i.ld is ready at once");
    tp(TP_IRUN, 0, 'h02, 0, 'h40);
    expect_best(1, 'h10, 'h03, "moved task no longer here");
    // i.ld of an existing TID updates it in place
    tp(TP_ILD, 2, 'h01, 'h0A, 'h20);
    expect_best(1, 'h01, 'h0A, "i.ld updates entry");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
