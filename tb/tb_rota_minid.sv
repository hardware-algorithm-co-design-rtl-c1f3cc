// tb_rota_minid -- feeds instruction and payload words to the decoder and
// checks every output against the expected decode (built here from the
// field positions): c-type in kernel and user mode, p.ld and i.ld with
// payloads, zero-length loads, i.run, and the one-cycle output latency.
module tb_rota_minid;
  import rota_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, in_priv = 0, priv_err;
  logic [WORD_W-1:0] in_data = '0;
  cfg_t cfg; tpara_t tpara; store_t st;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  rota_minid dut (.*);

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

  function automatic logic [31:0] mk(int op, int sid, int tid, int service);
    return (32'(service) << 12) | (32'(tid) << 7) | (32'(sid) << 2) | 32'(op);
  endfunction

  // send one word; outputs are checked on the next cycle by the caller
  task automatic send(logic [31:0] w, bit priv);
    @(negedge clk);
    in_valid = 1; in_data = w; in_priv = priv;
    @(negedge clk);
    in_valid = 0;
  endtask

  initial begin
    logic [31:0] pay [5];
    repeat (3) @(negedge clk);
    rst_n = 1;
    // c.set budget 1234 to ETS 3 (kernel)
    send(mk(0, 3, 0, (0 << 18) | 1234), 1);
    chk(cfg.valid && cfg.sub == C_SET && cfg.sid == 3 && cfg.value == 1234, "c.set");
    chk(!priv_err && !tpara.valid && !st.valid, "c.set only cfg");
    // c.enr start 77 to ETS 6
    send(mk(0, 6, 0, (1 << 18) | 77), 1);
    chk(cfg.valid && cfg.sub == C_ENR && cfg.sid == 6 && cfg.value == 77, "c.enr");
    send(mk(0, 2, 0, (2 << 18) | 9), 1);
    chk(cfg.valid && cfg.sub == C_PRI && cfg.sid == 2 && cfg.value[7:0] == 9, "c.pri");
    send(mk(0, 0, 0, (3 << 18) | 144000), 1);
    chk(cfg.valid && cfg.sub == C_HYP && cfg.value == 144000, "c.hyp 1440 ms at 10 us");
    // user-mode c.set is rejected
    send(mk(0, 3, 0, 55), 0);
    chk(!cfg.valid && priv_err, "user-mode c-type rejected");
    // p.ld TID 17 to ETS 4 with 5 operations
    foreach (pay[i]) pay[i] = $urandom;
    send(mk(1, 4, 17, (5 << 15) | (8'h77 << 7)), 0);   // Prio-T bits of a p.ld are ignored
    chk(!tpara.valid && !st.valid, "p.ld header alone emits nothing");
    for (int i = 0; i < 5; i++) begin
      @(negedge clk); in_valid = 1; in_data = pay[i];
      @(negedge clk); in_valid = 0;
      chk(st.valid && st.tid == 17 && st.off == OFF_W'(i) && st.data == pay[i], $sformatf("payload %0d", i));
      chk(tpara.valid == (i == 4), "T-Para only with the last payload word");
      if (i == 4) chk(tpara.kind == TP_PLD && tpara.sid == 4 && tpara.tid == 17 && tpara.plen == 5 && tpara.prio == 0, "p.ld T-Para");
    end
    // i.ld TID 2 to ETS 1, 2 ops, prio 0x33, back-to-back words
    @(negedge clk); in_valid = 1; in_data = mk(2, 1, 2, (2 << 15) | (8'h33 << 7)); in_priv = 0;
    @(negedge clk); in_data = 32'hDEAD_0001;
    @(negedge clk); in_data = 32'hDEAD_0002;
    chk(st.valid && st.off == 0 && st.data == 32'hDEAD_0001, "i.ld payload 0");
    @(negedge clk); in_valid = 0;
    chk(st.valid && st.off == 1 && st.data == 32'hDEAD_0002, "i.ld payload 1");
    chk(tpara.valid && tpara.kind == TP_ILD && tpara.sid == 1 && tpara.tid == 2 && tpara.plen == 2 && tpara.prio == 8'h33, "i.ld T-Para");
    // zero-length p.ld and i.run
    send(mk(1, 7, 30, 0), 0);
    chk(tpara.valid && tpara.kind == TP_PLD && tpara.tid == 30 && tpara.plen == 0, "zero-length p.ld");
    send(mk(3, 0, 17, 8'h5A << 7), 0);
    chk(tpara.valid && tpara.kind == TP_IRUN && tpara.tid == 17 && tpara.prio == 8'h5A, "i.run");
    // a payload word that looks like c-type is still payload
    send(mk(1, 4, 3, 1 << 15), 0);
    send(mk(0, 1, 0, 99), 1);
    chk(st.valid && !cfg.valid && tpara.valid, "payload is not decoded");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
