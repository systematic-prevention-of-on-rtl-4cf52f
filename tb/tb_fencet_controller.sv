// tb_fencet_controller: runs fence.t against simple cache, memory and pad
// models and checks the order and the length of every step: write-back until
// the cache reports done, at least 16 drain cycles and until memory is idle,
// clearing until both caches report done, exactly 16 cycles of Microreset,
// waiting for the pad, one resume cycle with the PC of the next instruction.
module tb_fencet_controller;
  import tp_pkg::*;
  logic clk = 0, rst_n = 0;
  logic fencet = 0, flush, busy, rvalid, wb_req, wb_done, idle, clr_req, dclr, iclr, urst, pad_done;
  logic [VLEN-1:0] pc = '0, rpc;
  ft_state_e st;
  int checks = 0, failures = 0;
  int cyc = 0;
  // model settings
  int wb_lat, dclr_lat, iclr_lat, busy_in_drain, pad_at;
  int wb_cnt, clr_cnt, drain_cnt;

  fencet_controller #(.URST_CYCLES(16), .DRAIN_CYCLES(16)) dut (
    .clk_i(clk), .rst_ni(rst_n), .fencet_i(fencet), .pc_i(pc), .flush_pipeline_o(flush), .busy_o(busy),
    .resume_valid_o(rvalid), .resume_pc_o(rpc), .dcache_wb_req_o(wb_req), .dcache_wb_done_i(wb_done),
    .mem_idle_i(idle), .clear_req_o(clr_req), .dcache_clr_done_i(dclr), .icache_clr_done_i(iclr),
    .urst_o(urst), .pad_done_i(pad_done), .state_o(st));

  always #5 clk = ~clk;

  // models: done pulses in the n-th cycle of the request
  always_ff @(posedge clk) begin
    cyc       <= cyc + 1;
    wb_cnt    <= wb_req ? wb_cnt + 1 : 0;
    clr_cnt   <= clr_req ? clr_cnt + 1 : 0;
    drain_cnt <= (st == FT_DRAIN) ? drain_cnt + 1 : 0;
  end
  assign wb_done  = wb_req && (wb_cnt == wb_lat - 1);
  assign dclr     = clr_req && (clr_cnt == dclr_lat - 1);
  assign iclr     = clr_req && (clr_cnt == iclr_lat - 1);
  assign idle     = !((st == FT_DRAIN) && drain_cnt < busy_in_drain);
  assign pad_done = cyc >= pad_at;

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  // run one fence.t and measure the cycles spent in each state
  task automatic run(int wl, int dl, int il, int bd, int pad, logic [VLEN-1:0] p);
    int len [ft_state_e];
    int t0, t_res, n_res;
    ft_state_e order [$];
    wb_lat = wl; dclr_lat = dl; iclr_lat = il; busy_in_drain = bd;
    @(negedge clk);
    t0 = cyc; pad_at = cyc + pad;
    fencet = 1; pc = p; #1;
    chk(flush && !busy, "pipeline flush in the fence.t cycle");
    @(negedge clk); fencet = 0;
    n_res = 0; t_res = -1;
    while (st != FT_IDLE) begin
      if (order.size() == 0 || order[$] != st) order.push_back(st);
      len[st] = len.exists(st) ? len[st] + 1 : 1;
      chk(busy, "busy during fence.t");
      chk(urst == (st == FT_URST), "urst only in step 5");
      if (rvalid) begin n_res++; t_res = cyc; chk(rpc == p + 4, "resume pc"); end
      @(negedge clk);
    end
    chk(order.size() == 6 && order[0] == FT_WB && order[1] == FT_DRAIN && order[2] == FT_CLEAR &&
        order[3] == FT_URST && order[4] == FT_PAD && order[5] == FT_RESUME, "step order");
    chk(len[FT_WB] == wl, $sformatf("write-back %0d cycles, exp %0d", len[FT_WB], wl));
    chk(len[FT_DRAIN] == ((bd + 1 > 16) ? bd + 1 : 16), $sformatf("drain %0d cycles", len[FT_DRAIN]));
    chk(len[FT_CLEAR] == ((dl > il) ? dl : il), $sformatf("clear %0d cycles", len[FT_CLEAR]));
    chk(len[FT_URST] == 16, $sformatf("microreset %0d cycles", len[FT_URST]));
    chk(n_res == 1, "one resume cycle");
    begin
      int t_urst_end = t0 + 1 + wl + len[FT_DRAIN] + len[FT_CLEAR] + 16;   // first PAD cycle
      int exp_res = ((t0 + pad > t_urst_end) ? t0 + pad : t_urst_end) + 1;
      chk(t_res == exp_res, $sformatf("resume at %0d, exp %0d", t_res - t0, exp_res - t0));
    end
    chk(!busy && !rvalid && !urst, "idle afterwards");
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (3) @(negedge clk);
    chk(!busy && !urst && !wb_req && !clr_req, "idle after reset");
    run(50, 20, 10, 0, 1000, 39'h80_0000_1000);      // padded: resume at T+1000+1
    run(3, 5, 9, 30, 0, 39'h00_0000_0ffc);           // no padding, slow drain
    run(1, 1, 1, 0, 10, 39'h12_3456_7000);           // pad shorter than the fence
    run(200, 256, 256, 5, 2000, 39'h7f_ffff_fff0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
