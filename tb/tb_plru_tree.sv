// tb_plru_tree: compares the pseudo-LRU candidate against a reference tree
// walked by heap indexing (children of node n are 2n+1 and 2n+2), for random
// access sequences; also checks that sequential use of all entries makes
// entry 0 the victim, that the last used entry is never the victim, and that
// clear returns the tree to its reset state.
module tb_plru_tree;
  localparam int N = 16;
  logic clk = 0, rst_n = 0, clear = 0;
  logic [N-1:0] used, repl;
  logic [3:0]   repl_idx;
  int checks = 0, failures = 0;
  bit tree [N-1];

  plru_tree #(.ENTRIES(N)) dut (.clk_i(clk), .rst_ni(rst_n), .clear_i(clear), .used_i(used),
                                .repl_o(repl), .repl_idx_o(repl_idx));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic int ref_victim();
    int n = 0;
    for (int l = 0; l < 4; l++) n = 2 * n + 1 + int'(tree[n]);
    return n - (N - 1);
  endfunction

  function automatic void ref_touch(int e);
    int n = e + N - 1;
    while (n > 0) begin
      int p = (n - 1) / 2;
      tree[p] = (n == 2 * p + 1);   // used left child: point right
      n = p;
    end
  endfunction

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  task automatic access(int e);
    used = N'(1) << e;
    @(negedge clk);
    ref_touch(e);
    used = '0;
    #1;
    chk(int'(repl_idx) == ref_victim() && repl == (N'(1) << repl_idx),
        $sformatf("after use of %0d: dut %0d ref %0d", e, repl_idx, ref_victim()));
    chk(int'(repl_idx) != e, "last used entry is not the victim");
  endtask

  initial begin
    used = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(repl_idx == 0, "reset victim");
    for (int e = 0; e < N; e++) access(e);
    chk(repl_idx == 0, "sequential fill: victim 0");
    for (int i = 0; i < 300; i++) access($urandom_range(N - 1));
    clear = 1; @(negedge clk); clear = 0;
    foreach (tree[i]) tree[i] = 0;
    #1 chk(repl_idx == 0, "victim after clear");
    for (int i = 0; i < 50; i++) access($urandom_range(N - 1));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
