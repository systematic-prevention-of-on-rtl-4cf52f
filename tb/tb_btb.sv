// tb_btb: random target updates and lookups against a reference table;
// checks aliasing of addresses that share an index and that Microreset
// invalidates all entries.
module tb_btb;
  import tp_pkg::*;
  localparam int N = 16;
  logic clk = 0, rst_n = 0, clear = 0, uv = 0, valid;
  logic [VLEN-1:0] lpc, upc, utgt, tgt;
  int checks = 0, failures = 0;
  bit              rv [N];
  logic [VLEN-1:0] rt [N];

  btb #(.ENTRIES(N)) dut (.clk_i(clk), .rst_ni(rst_n), .clear_i(clear), .lookup_pc_i(lpc),
    .valid_o(valid), .target_o(tgt), .upd_valid_i(uv), .upd_pc_i(upc), .upd_target_i(utgt));

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
      lpc = VLEN'(i * 2 + N * 2 * $urandom_range(1000));
      #1;
      chk(valid == rv[i], $sformatf("valid %0d", i));
      if (rv[i]) chk(tgt == rt[i], $sformatf("target %0d", i));
    end
    @(negedge clk);
  endtask

  initial begin
    lpc = '0; upc = '0; utgt = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check_all();
    for (int t = 0; t < 400; t++) begin
      int e;
      e = $urandom_range(N - 1);
      uv = ($urandom % 3) != 0;
      upc  = VLEN'(e * 2 + N * 2 * $urandom_range(5000));
      utgt = VLEN'({$urandom, $urandom});
      @(negedge clk);
      if (uv) begin rv[e] = 1; rt[e] = utgt; end
      uv = 0;
      if (t % 50 == 0) check_all();
    end
    check_all();
    clear = 1; @(negedge clk); clear = 0;
    foreach (rv[i]) rv[i] = 0;
    check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
