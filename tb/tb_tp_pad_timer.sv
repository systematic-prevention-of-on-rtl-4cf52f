// tb_tp_pad_timer: checks cspad CSR access, that pad_done rises exactly cspad
// cycles after the cycle the timer interrupt rises, that a held interrupt does
// not restart the interval, and that cspad = 0 disables padding. Each
// interval is checked cycle by cycle (pad_done_o and elapsed_o), for fixed
// and random pads and interrupt hold times.
module tb_tp_pad_timer;
  import tp_pkg::*;
  logic clk = 0, rst_n = 0, we = 0, irq = 0, hit, done;
  logic [11:0] addr = '0;
  logic [31:0] wdata = '0, rdata, elapsed;
  int checks = 0, failures = 0;
  int cyc = 0;

  tp_pad_timer dut (.clk_i(clk), .rst_ni(rst_n), .csr_we_i(we), .csr_addr_i(addr), .csr_wdata_i(wdata),
    .csr_hit_o(hit), .csr_rdata_o(rdata), .timer_irq_i(irq), .pad_done_o(done), .elapsed_o(elapsed));

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  task automatic csr_write(logic [11:0] a, logic [31:0] d);
    addr = a; wdata = d; we = 1; @(negedge clk); we = 0;
  endtask

  // interrupt rises in cycle T; done must be low up to T+pad-1 and high at T+pad
  task automatic interval(int pad, int hold);
    int t0, t_done;
    irq = 1; t0 = cyc;
    t_done = -1;
    for (int k = 0; k <= pad + 3; k++) begin
      #1;
      if (k == hold) irq = 0;
      if (k >= 1 && done && t_done < 0) t_done = cyc - t0;
      if (k >= 1) begin
        chk(done == (k >= pad), $sformatf("cspad=%0d: done=%0d %0d cycles after the interrupt", pad, done, k));
        chk(elapsed == 32'(k), $sformatf("elapsed %0d, expected %0d", elapsed, k));
      end
      @(negedge clk);
    end
    chk(t_done == pad, $sformatf("cspad=%0d: done after %0d cycles", pad, t_done));
    irq = 0;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    addr = CSR_CSPAD; #1;
    chk(hit && rdata == 0, "cspad resets to 0");
    chk(done, "done with padding disabled");
    csr_write(12'h300, 32'd77);               // another CSR: ignored
    addr = CSR_CSPAD; #1 chk(rdata == 0, "write to other CSR ignored");
    addr = 12'h300; #1 chk(!hit && rdata == 0, "no hit on other address");
    csr_write(CSR_CSPAD, 32'd25);
    addr = CSR_CSPAD; #1 chk(rdata == 25, "cspad readback");
    interval(25, 1);
    interval(25, 40);                         // interrupt held high: one interval
    csr_write(CSR_CSPAD, 32'd1);
    interval(1, 1);
    csr_write(CSR_CSPAD, 32'd3000);
    interval(3000, 5);
    // random pads, interrupt hold times and gaps between interrupts
    for (int i = 0; i < 40; i++) begin
      int p, h;
      p = 1 + $urandom_range(299);
      h = 1 + $urandom_range(p + 2);
      csr_write(CSR_CSPAD, 32'(p));
      repeat ($urandom_range(5)) @(negedge clk);
      interval(p, h);
    end
    for (int i = 0; i < 20; i++) begin          // full 32-bit CSR value
      logic [31:0] v;
      v = $urandom;
      csr_write(CSR_CSPAD, v);
      addr = CSR_CSPAD; #1 chk(hit && rdata == v, "cspad 32-bit readback");
      @(negedge clk);
    end
    csr_write(CSR_CSPAD, 32'd0);
    irq = 1; #1 chk(done, "cspad=0: done immediately");
    @(negedge clk); irq = 0; #1 chk(done, "cspad=0: still done");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
