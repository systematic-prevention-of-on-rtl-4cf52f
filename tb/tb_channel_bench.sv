// tb_channel_bench: the prime-and-probe covert-channel experiment run on the
// whole core at its default size. A spy fills a stateful component, the OS
// switches to a Trojan that touches a secret number s of entries, the OS
// switches back, and the spy measures how much of its state survived. This
// is done for five components: the L1 data cache and the L1 instruction cache
// (the spy measures the cycles its probe takes), the data TLB (misses), the
// BTB (targets still predicted) and the BHT (branches still predicted taken).
//
// Each experiment runs in three modes. With a plain context switch (the
// interrupt handler's 3077 cycles and nothing else), the spy's measurement
// must depend on s: this is the channel. With fence.t and cspad = 22000, it
// must be the same for every s, and every context switch must take exactly
// cspad + 1 cycles from the interrupt. With fence.t but no padding
// (cspad = 0), the spy's measurement must still be constant, but the switch
// from the Trojan back to the spy must take longer the more L1D lines the
// Trojan dirtied. This is the latency channel that padding closes.
//
// Secrets run over 0..256 lines for the caches (in steps of 32) and over the
// whole structure for the TLB (16), BTB (16) and BHT (64). The L2 is a
// 4-cycle behavioural model and the kernel is a fixed delay, so the
// measurements are this design's, not those of a full system.
module tb_channel_bench;
  import tp_pkg::*;

  localparam int CSPAD = 22000;
  localparam int KERNEL = 3077;   // cycles from the timer interrupt to fence.t

  logic clk = 0, rst_n = 0;
  // issue
  logic instr_valid = 0; logic [31:0] instr = '0; logic [VLEN-1:0] instr_pc = '0;
  logic flush_pipe, ft_busy, resume_valid, urst; logic [19:0] ft_imm; logic [VLEN-1:0] resume_pc;
  ft_state_e ft_state;
  // csr
  logic csr_we = 0; logic [11:0] csr_addr = CSR_CSPAD; logic [31:0] csr_wdata = '0, csr_rdata; logic csr_hit;
  logic timer_irq = 0;
  // fetch
  logic if_valid = 0, if_ready, if_tlb_miss, if_rsp_valid; logic [VLEN-1:0] if_vaddr = '0; logic [31:0] if_rdata;
  logic itlb_uv = 0; logic [VPN_BITS-1:0] itlb_uvpn = '0; logic [PPN_BITS-1:0] itlb_uppn = '0;
  // data translation
  logic sfence = 0, dtlb_lv = 0, dtlb_hit; logic [VLEN-1:0] dtlb_vaddr = '0; logic [PLEN-1:0] dtlb_paddr;
  logic dtlb_uv = 0; logic [VPN_BITS-1:0] dtlb_uvpn = '0; logic [PPN_BITS-1:0] dtlb_uppn = '0;
  // data ports
  logic [2:0] dc_valid = '0, dc_ready, dc_rsp; dreq_t [2:0] dc_req = '0; logic [XLEN-1:0] dc_rdata;
  // branch prediction
  logic [VLEN-1:0] bp_pc = '0; logic bht_taken, btb_valid; logic [VLEN-1:0] btb_target;
  logic bht_uv = 0, bht_ut = 0, btb_uv = 0; logic [VLEN-1:0] bht_upc = '0, btb_upc = '0, btb_utgt = '0;
  // memory
  logic dmem_valid, dmem_ready, dmem_rsp_valid, imem_valid, imem_ready, imem_rsp_valid;
  mem_req_t dmem_req, imem_req; mem_rsp_t dmem_rsp, imem_rsp;
  logic dc_miss, dc_wb_line, ic_miss;

  tp_core dut (
    .clk_i(clk), .rst_ni(rst_n),
    .instr_valid_i(instr_valid), .instr_i(instr), .instr_pc_i(instr_pc),
    .flush_pipeline_o(flush_pipe), .fencet_busy_o(ft_busy), .fencet_imm_o(ft_imm),
    .resume_valid_o(resume_valid), .resume_pc_o(resume_pc), .urst_o(urst), .ft_state_o(ft_state),
    .csr_we_i(csr_we), .csr_addr_i(csr_addr), .csr_wdata_i(csr_wdata), .csr_hit_o(csr_hit), .csr_rdata_o(csr_rdata),
    .timer_irq_i(timer_irq),
    .if_req_valid_i(if_valid), .if_vaddr_i(if_vaddr), .if_req_ready_o(if_ready), .if_tlb_miss_o(if_tlb_miss),
    .if_rsp_valid_o(if_rsp_valid), .if_rsp_rdata_o(if_rdata),
    .itlb_upd_valid_i(itlb_uv), .itlb_upd_vpn_i(itlb_uvpn), .itlb_upd_ppn_i(itlb_uppn),
    .sfence_i(sfence), .dtlb_lookup_valid_i(dtlb_lv), .dtlb_vaddr_i(dtlb_vaddr), .dtlb_hit_o(dtlb_hit),
    .dtlb_paddr_o(dtlb_paddr), .dtlb_upd_valid_i(dtlb_uv), .dtlb_upd_vpn_i(dtlb_uvpn), .dtlb_upd_ppn_i(dtlb_uppn),
    .dc_req_valid_i(dc_valid), .dc_req_i(dc_req), .dc_req_ready_o(dc_ready), .dc_rsp_valid_o(dc_rsp),
    .dc_rsp_rdata_o(dc_rdata),
    .bp_pc_i(bp_pc), .bht_taken_o(bht_taken), .btb_valid_o(btb_valid), .btb_target_o(btb_target),
    .bht_upd_valid_i(bht_uv), .bht_upd_pc_i(bht_upc), .bht_upd_taken_i(bht_ut),
    .btb_upd_valid_i(btb_uv), .btb_upd_pc_i(btb_upc), .btb_upd_target_i(btb_utgt),
    .dmem_req_valid_o(dmem_valid), .dmem_req_o(dmem_req), .dmem_req_ready_i(dmem_ready),
    .dmem_rsp_valid_i(dmem_rsp_valid), .dmem_rsp_i(dmem_rsp),
    .imem_req_valid_o(imem_valid), .imem_req_o(imem_req), .imem_req_ready_i(imem_ready),
    .imem_rsp_valid_i(imem_rsp_valid), .imem_rsp_i(imem_rsp),
    .dc_miss_o(dc_miss), .dc_wb_line_o(dc_wb_line), .ic_miss_o(ic_miss)
  );

  tb_mem_model #(.LATENCY(4)) l2d (.clk_i(clk), .rst_ni(rst_n), .req_valid_i(dmem_valid), .req_i(dmem_req),
    .req_ready_o(dmem_ready), .rsp_valid_o(dmem_rsp_valid), .rsp_o(dmem_rsp));
  tb_mem_model #(.LATENCY(4)) l2i (.clk_i(clk), .rst_ni(rst_n), .req_valid_i(imem_valid), .req_i(imem_req),
    .req_ready_o(imem_ready), .rsp_valid_o(imem_rsp_valid), .rsp_o(imem_rsp));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cyc = 0;
  logic [XLEN-1:0] refm [logic [PLEN-1:0]];
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20_000_000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; if (failures < 30) $display("FAIL %s", m); end
  endtask

  function automatic logic [XLEN-1:0] ref_word(logic [PLEN-1:0] a);
    logic [LINE_BITS-1:0] l;
    a[2:0] = 3'b0;
    if (refm.exists(a)) return refm[a];
    l = l2d.init_line({a[PLEN-1:4], 4'h0});
    return a[3] ? l[127:64] : l[63:0];
  endfunction

  function automatic logic [PPN_BITS-1:0] pmap(logic [VPN_BITS-1:0] v);
    return PPN_BITS'(v) + 44'h8_0000;
  endfunction

  // one access on data port 0, checked against the reference memory
  task automatic dport(logic [PLEN-1:0] a, bit we, logic [XLEN-1:0] d);
    a[2:0] = 3'b0;
    dc_valid[0] = 1; dc_req[0].addr = a; dc_req[0].we = we; dc_req[0].wdata = d; dc_req[0].be = 8'hFF;
    @(posedge clk);
    while (!dc_ready[0]) @(posedge clk);
    @(negedge clk); dc_valid[0] = 0;
    while (!dc_rsp[0]) @(negedge clk);
    if (we) refm[a] = d;
    else chk(dc_rdata == ref_word(a), $sformatf("load %h", a));
    @(negedge clk);
  endtask

  // one fetch through the ITLB (refilled on a miss) and the L1I
  task automatic fetch(logic [VLEN-1:0] va);
    logic [LINE_BITS-1:0] l;
    logic [PLEN-1:0] pa;
    va[1:0] = 2'b0;
    if_vaddr = va; if_valid = 1; #1;
    if (if_tlb_miss) begin
      if_valid = 0;
      itlb_uv = 1; itlb_uvpn = va[VLEN-1:PAGE_BITS]; itlb_uppn = pmap(va[VLEN-1:PAGE_BITS]);
      @(negedge clk); itlb_uv = 0; if_valid = 1;
    end
    @(posedge clk);
    while (!if_ready) @(posedge clk);
    @(negedge clk); if_valid = 0;
    while (!if_rsp_valid) @(negedge clk);
    pa = {pmap(va[VLEN-1:PAGE_BITS]), va[PAGE_BITS-1:0]};
    l = l2i.init_line({pa[PLEN-1:4], 4'h0});
    chk(if_rdata == l[pa[3:2]*32 +: 32], $sformatf("fetch %h", va));
    @(negedge clk);
  endtask

  // one DTLB access; refills on a miss and returns 1 for a miss
  task automatic dtlb_access(logic [VLEN-1:0] va, output bit miss);
    dtlb_vaddr = va; dtlb_lv = 1; #1;
    miss = !dtlb_hit;
    @(negedge clk); dtlb_lv = 0;
    if (miss) begin
      dtlb_uv = 1; dtlb_uvpn = va[VLEN-1:PAGE_BITS]; dtlb_uppn = pmap(va[VLEN-1:PAGE_BITS]);
      @(negedge clk); dtlb_uv = 0;
    end
  endtask

  task automatic bht_train(logic [VLEN-1:0] pc, bit t);
    bht_uv = 1; bht_upc = pc; bht_ut = t; @(negedge clk); bht_uv = 0;
  endtask

  task automatic btb_train(logic [VLEN-1:0] pc, logic [VLEN-1:0] tgt);
    btb_uv = 1; btb_upc = pc; btb_utgt = tgt; @(negedge clk); btb_uv = 0;
  endtask

  // OS context switch; with_fence = 0 is the unprotected switch
  task automatic context_switch(bit with_fence, output int lat);
    int t_irq;
    @(negedge clk);
    timer_irq = 1; t_irq = cyc;
    repeat (KERNEL) @(negedge clk);
    timer_irq = 0;
    if (with_fence) begin
      instr = 32'h0000_000B; instr_pc = VLEN'('h8000_0000); instr_valid = 1;
      @(negedge clk); instr_valid = 0;
      while (!resume_valid) @(negedge clk);
    end
    lat = cyc - t_irq;
    @(negedge clk);
  endtask

  task automatic csr_write(logic [31:0] d);
    csr_addr = CSR_CSPAD; csr_wdata = d; csr_we = 1; @(negedge clk); csr_we = 0;
  endtask

  localparam int SPY_D = 32'h1000_0000, TRJ_D = 32'h2000_0000;
  localparam int SPY_I = 32'h0040_0000, TRJ_I = 32'h0080_0000;
  localparam int SPY_T = 32'h0100_0000, TRJ_T = 32'h0200_0000;
  localparam int D_LINES = 2048, I_LINES = 1024;

  // one round: prime, switch, Trojan encodes s, switch, probe; returns the
  // spy's measurement and the latency of the switch back to the spy
  task automatic round(int ch, int s, bit fence, output int meas, output int lat_back);
    int t0, lat_fwd; bit miss;
    meas = 0;
    // prime
    case (ch)
      0: for (int i = 0; i < D_LINES; i++) dport(PLEN'(SPY_D + i * 16), 0, '0);
      1: for (int i = 0; i < I_LINES; i++) fetch(VLEN'(SPY_I + i * 16));
      2: for (int i = 0; i < 16; i++) dtlb_access(VLEN'(SPY_T + i * 4096), miss);
      3: for (int i = 0; i < 16; i++) btb_train(VLEN'('h40_0000 + i * 2), VLEN'('h50_0000 + i * 64));
      default: for (int i = 0; i < 64; i++) repeat (3) bht_train(VLEN'('h40_0000 + i * 2), 1);
    endcase
    context_switch(fence, lat_fwd);
    if (fence && CSPAD_NOW != 0) chk(lat_fwd == CSPAD_NOW + 1, $sformatf("switch to Trojan took %0d", lat_fwd));
    // the Trojan encodes the secret
    case (ch)
      0: for (int i = 0; i < s; i++) dport(PLEN'(TRJ_D + i * 16), 1, {32'(s), 32'(i)});
      1: for (int i = 0; i < s; i++) fetch(VLEN'(TRJ_I + i * 16));
      2: for (int i = 0; i < s; i++) dtlb_access(VLEN'(TRJ_T + i * 4096), miss);
      3: for (int i = 0; i < s; i++) btb_train(VLEN'('h90_0000 + i * 2), VLEN'('h60_0000 + i * 64));
      default: for (int i = 0; i < s; i++) repeat (3) bht_train(VLEN'('h90_0000 + i * 2), 0);
    endcase
    context_switch(fence, lat_back);
    if (fence && CSPAD_NOW != 0) chk(lat_back == CSPAD_NOW + 1, $sformatf("switch to spy took %0d", lat_back));
    // probe
    t0 = cyc;
    case (ch)
      0: begin for (int i = 0; i < D_LINES; i++) dport(PLEN'(SPY_D + i * 16), 0, '0); meas = cyc - t0; end
      1: begin for (int i = 0; i < I_LINES; i++) fetch(VLEN'(SPY_I + i * 16)); meas = cyc - t0; end
      2: for (int i = 0; i < 16; i++) begin dtlb_access(VLEN'(SPY_T + i * 4096), miss); meas += int'(miss); end
      3: for (int i = 0; i < 16; i++) begin
           bp_pc = VLEN'('h40_0000 + i * 2); #1;
           meas += int'(btb_valid && btb_target == VLEN'('h50_0000 + i * 64));
           @(negedge clk);
         end
      default: for (int i = 0; i < 64; i++) begin
           bp_pc = VLEN'('h40_0000 + i * 2); #1;
           meas += int'(bht_taken);
           @(negedge clk);
         end
    endcase
  endtask

  int CSPAD_NOW = 0;
  string CH_NAME [5] = '{"L1D", "L1I", "DTLB", "BTB", "BHT"};
  int    CH_MAX  [5] = '{256, 256, 16, 16, 64};
  int    CH_STEP [5] = '{32, 32, 4, 4, 16};

  initial begin
    int meas [3][5][10];
    int lat  [3][5][10];
    int n, ch, mode, s, distinct;
    bit leaks;
    repeat (5) @(negedge clk);
    rst_n = 1;
    repeat (300) @(negedge clk);       // cache clear sweeps after reset
    for (mode = 0; mode < 3; mode++) begin
      // mode 0: no fence.t; mode 1: fence.t, cspad = 22000; mode 2: fence.t, cspad = 0
      CSPAD_NOW = (mode == 1) ? CSPAD : 0;
      csr_write(32'(CSPAD_NOW));
      for (ch = 0; ch < 5; ch++) begin
        n = CH_MAX[ch] / CH_STEP[ch] + 1;
        for (int k = 0; k < n; k++) begin
          s = k * CH_STEP[ch];
          round(ch, s, mode != 0, meas[mode][ch][k], lat[mode][ch][k]);
        end
        $write("mode %0d %-4s spy:", mode, CH_NAME[ch]);
        for (int k = 0; k < n; k++) $write(" %0d", meas[mode][ch][k]);
        $write("  switch back:");
        for (int k = 0; k < n; k++) $write(" %0d", lat[mode][ch][k]);
        $display("");
        distinct = 0;
        for (int k = 1; k < n; k++) if (meas[mode][ch][k] != meas[mode][ch][0]) distinct++;
        if (mode == 0) begin
          // the unprotected switch leaks: the spy sees the Trojan's footprint
          leaks = (ch <= 1) ? (meas[0][ch][n-1] > meas[0][ch][0] + CH_MAX[ch])
                            : (meas[0][ch][n-1] != meas[0][ch][0]);
          chk(leaks, $sformatf("%s: no channel without fence.t", CH_NAME[ch]));
        end else begin
          chk(distinct == 0, $sformatf("%s: spy measurement depends on the secret with fence.t (mode %0d)",
                                       CH_NAME[ch], mode));
        end
      end
    end
    // without padding the switch back to the spy reveals the Trojan's dirty lines
    chk(lat[2][0][8] > lat[2][0][0] + 256, "L1D: unpadded fence.t latency does not depend on dirty lines");
    // with padding it does not
    for (int k = 0; k < 9; k++) chk(lat[1][0][k] == CSPAD + 1, "L1D: padded switch latency");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
