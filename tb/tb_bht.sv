// tb_bht: random training and lookups against a reference table of 2-bit
// saturating counters; checks saturation at both ends and that Microreset
// returns every counter to weakly not taken.
module tb_bht;
  import tp_pkg::*;
  localparam int N = 64;
  logic clk = 0, rst_n = 0, clear = 0, uv = 0, ut = 0, taken;
  logic [VLEN-1:0] lpc, upc;
  int checks = 0, failures = 0;
  int ctr [N];

  bht #(.ENTRIES(N)) dut (.clk_i(clk), .rst_ni(rst_n), .clear_i(clear), .lookup_pc_i(lpc),
    .taken_o(taken), .upd_valid_i(uv), .upd_pc_i(upc), .upd_taken_i(ut));

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  task automatic check_all();
    for (int i = 0; i < N; i++) begin
      lpc = VLEN'(i * 2 + 'h8000_0000 + N * 2 * ($urandom % 8));
      #1 chk(taken == (ctr[i] >= 2), $sformatf("entry %0d taken=%0d ctr=%0d", i, taken, ctr[i]));
    end
    @(negedge clk);
  endtask

  initial begin
    foreach (ctr[i]) ctr[i] = 1;
    lpc = '0; upc = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check_all();
    for (int t = 0; t < 3000; t++) begin
      int e;
      e  = (t < 200) ? 5 : $urandom_range(N - 1);   // first hammer one entry
      uv = 1; upc = VLEN'(e * 2 + 'h8000_0000); ut = (t < 100) ? 1'b1 : (t < 200) ? 1'b0 : 1'($urandom);
      lpc = VLEN'($urandom_range(N - 1) * 2);
      @(negedge clk);
      if (ut) ctr[e] = (ctr[e] < 3) ? ctr[e] + 1 : 3;
      else    ctr[e] = (ctr[e] > 0) ? ctr[e] - 1 : 0;
      uv = 0;
      lpc = VLEN'(e * 2); #1;
      chk(taken == (ctr[e] >= 2), "after update");
      if (t == 99)  check_all();
    end
    check_all();
    clear = 1; @(negedge clk); clear = 0;
    foreach (ctr[i]) ctr[i] = 1;
    check_all();
    // one taken update from the reset value flips the prediction
    uv = 1; ut = 1; upc = VLEN'(2 * 7); @(negedge clk); uv = 0;
    lpc = VLEN'(2 * 7); #1 chk(taken, "01 -> 10 predicts taken");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
