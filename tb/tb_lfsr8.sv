// tb_lfsr8: checks the LFSR sequence against a reference of the polynomial
// x^8 + x^6 + x^5 + x^4 + 1, its full period of 255, hold when disabled, and
// that clear returns it to the seed.
module tb_lfsr8;
  logic clk = 0, rst_n = 0, clear = 0, en = 0;
  logic [7:0] q;
  logic [2:0] idx;
  int checks = 0, failures = 0;

  lfsr8 #(.WAYS(8)) dut (.clk_i(clk), .rst_ni(rst_n), .clear_i(clear), .en_i(en), .lfsr_o(q), .idx_o(idx));

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s (q=%h)", m, q); end
  endtask

  initial begin
    logic [7:0] ref_q;
    bit seen [256];
    int first_repeat;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(q == 8'h01, "seed after reset");
    ref_q = 8'h01;
    en = 1;
    first_repeat = -1;
    seen[8'h01] = 1;
    for (int i = 1; i <= 255; i++) begin
      @(negedge clk);
      // shift left, new bit 0 = xor of bits 7,5,4,3
      ref_q = {ref_q[6:0], ^(ref_q & 8'b1011_1000)};
      chk(q == ref_q, $sformatf("step %0d", i));
      chk(idx == q[2:0], "idx is low bits");
      if (seen[q] && first_repeat < 0) first_repeat = i;
      seen[q] = 1;
    end
    chk(q == 8'h01, "period 255");
    chk(first_repeat == 255, "no earlier repeat");
    repeat (7) @(negedge clk);
    en = 0;
    ref_q = q;
    repeat (3) @(negedge clk);
    chk(q == ref_q, "hold while disabled");
    chk(q != 8'h01, "moved away from seed");
    clear = 1; @(negedge clk); clear = 0;
    chk(q == 8'h01, "clear returns to seed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
