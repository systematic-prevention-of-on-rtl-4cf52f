// tb_rr_arbiter: random requests and downstream readiness against a reference
// round-robin model; checks one-hot grants, fairness (a requester that keeps
// asking is served within N accepted grants) and clear.
module tb_rr_arbiter;
  localparam int N = 3;
  logic clk = 0, rst_n = 0, clear = 0, ready = 0;
  logic [N-1:0] req, gnt;
  logic [1:0]   gidx;
  logic         valid;
  int checks = 0, failures = 0;
  int ptr = 0;

  rr_arbiter #(.N(N)) dut (.clk_i(clk), .rst_ni(rst_n), .clear_i(clear), .req_i(req), .ready_i(ready),
                           .gnt_o(gnt), .gnt_idx_o(gidx), .valid_o(valid));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  initial begin
    int exp;
    int wait_cnt [N];
    req = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      req   = N'($urandom);
      if (t > 1000) req = '1;       // saturated phase for fairness
      ready = ($urandom % 4) != 0;
      clear = (t == 600);
      #1;
      exp = -1;
      for (int k = 0; k < N; k++) if (exp < 0 && req[(ptr + k) % N]) exp = (ptr + k) % N;
      chk(valid == (exp >= 0), "valid");
      if (exp >= 0) chk(int'(gidx) == exp && gnt == (N'(1) << exp), $sformatf("t=%0d grant %0d exp %0d", t, gidx, exp));
      else chk(gnt == '0, "no grant");
      if (clear) ptr = 0;
      else if (exp >= 0 && ready) ptr = (exp + 1) % N;
      if (t > 1000) begin
        for (int i = 0; i < N; i++) begin
          if (valid && ready && int'(gidx) == i) wait_cnt[i] = 0;
          else if (valid && ready) wait_cnt[i]++;
          chk(wait_cnt[i] < N, "fairness");
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
