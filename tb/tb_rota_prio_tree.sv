// tb_rota_prio_tree -- checks the comparator tree against a reference
// model: for random valid bits and keys the winner must be the valid
// candidate with the largest key, the lowest index among equal keys, and
// valid_o must say whether any candidate is valid (index and key 0 if
// none).  Four instances: N = 5 (padded to 8 leaves) and N = 8, each
// combinational and with the pipeline stage, whose outputs must match the
// reference for the inputs of the previous clock.  Keys are drawn from a
// small range so that ties are frequent.
module tb_rota_prio_tree;
  localparam int KW = 4, IW = 3;

  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [7:0]         v;
  logic [7:0][KW-1:0] k;
  logic               v5c, v5p, v8c, v8p;
  logic [IW-1:0]      i5c, i5p, i8c, i8p;
  logic [KW-1:0]      k5c, k5p, k8c, k8p;

  rota_prio_tree #(.N(5), .KEY_W(KW), .IDX_W(IW), .PIPE(1'b0)) u5c (.clk, .valid_i(v[4:0]), .key_i(k[4:0]), .valid_o(v5c), .idx_o(i5c), .key_o(k5c));
  rota_prio_tree #(.N(5), .KEY_W(KW), .IDX_W(IW), .PIPE(1'b1)) u5p (.clk, .valid_i(v[4:0]), .key_i(k[4:0]), .valid_o(v5p), .idx_o(i5p), .key_o(k5p));
  rota_prio_tree #(.N(8), .KEY_W(KW), .IDX_W(IW), .PIPE(1'b0)) u8c (.clk, .valid_i(v),      .key_i(k),      .valid_o(v8c), .idx_o(i8c), .key_o(k8c));
  rota_prio_tree #(.N(8), .KEY_W(KW), .IDX_W(IW), .PIPE(1'b1)) u8p (.clk, .valid_i(v),      .key_i(k),      .valid_o(v8p), .idx_o(i8p), .key_o(k8p));

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference: linear scan, strictly-greater replaces, so the lowest index wins ties
  task automatic ref_best(int n, logic [7:0] vv, logic [7:0][KW-1:0] kk,
                          output bit rv, output int ri, output int rk);
    rv = 0; ri = 0; rk = 0;
    for (int j = 0; j < n; j++)
      if (vv[j] && (!rv || int'(kk[j]) > rk)) begin rv = 1; ri = j; rk = int'(kk[j]); end
  endtask

  task automatic cmp(string name, int n, logic [7:0] vv, logic [7:0][KW-1:0] kk,
                     logic ov, logic [IW-1:0] oi, logic [KW-1:0] ok);
    bit rv; int ri, rk;
    ref_best(n, vv, kk, rv, ri, rk);
    checks++;
    if (ov !== rv || int'(oi) != ri || int'(ok) != rk) begin
      failures++;
      $display("FAIL %s v=%b k=%h: got %0d/%0d/%0d expected %0d/%0d/%0d", name, vv, kk, ov, oi, ok, rv, ri, rk);
    end
  endtask

  initial begin
    logic [7:0] pv; logic [7:0][KW-1:0] pk;
    v = '0; k = '0;
    @(negedge clk);
    for (int it = 0; it < 4000; it++) begin
      pv = v; pk = k;
      // mostly random, sometimes all invalid or all valid with equal keys
      case (it % 10)
        0: begin v = '0; k = 32'($urandom); end
        1: begin v = '1; for (int j = 0; j < 8; j++) k[j] = 4'd7; end
        default: begin v = 8'($urandom); for (int j = 0; j < 8; j++) k[j] = KW'($urandom_range(3)); end
      endcase
      #1;
      cmp("N5 comb", 5, v, k, v5c, i5c, k5c);
      cmp("N8 comb", 8, v, k, v8c, i8c, k8c);
      if (it > 0) begin
        cmp("N5 pipe", 5, pv, pk, v5p, i5p, k5p);
        cmp("N8 pipe", 8, pv, pk, v8p, i8p, k8p);
      end
      @(posedge clk); #1;
      // after the edge the pipelined trees show the inputs just applied
      cmp("N5 pipe", 5, v, k, v5p, i5p, k5p);
      cmp("N8 pipe", 8, v, k, v8p, i8p, k8p);
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
