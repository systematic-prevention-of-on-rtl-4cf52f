// tb_tp_core: end-to-end test of the time-protected core microarchitecture at
// its full default size (8-way 32 KiB L1D, 4-way 16 KiB L1I, 16-entry TLBs,
// 64-entry BHT, 16-entry BTB, cspad = 22000 as derived for the write-back
// configuration).
//
// It plays the part of the pipeline, the page-table walker and the L2: a
// "Trojan" phase trains every stateful component (fetches through the ITLB and
// L1I, loads, stores and MMU reads on all three data-cache ports at once,
// branch training), then a context switch starts with the CLINT timer
// interrupt and fence.t is issued. The test checks that fence.t ends exactly
// cspad cycles after the interrupt whatever the number of dirty lines (a
// few, or the whole cache), that every stored word reached L2, that caches,
// TLBs, predictors, LFSRs and the arbiter are back in their reset state while
// cspad survives, and that nothing is accepted while fence.t runs. With
// cspad = 0 the fence.t latency must differ between a clean and a dirty cache,
// which is the channel that padding closes. In the first switch a store miss
// is still in flight when fence.t issues: it must complete before the
// write-back step, its data must reach L2, and it must leave no trace after
// Microreset. Every mechanism is counted and must occur at least once.
module tb_tp_core;
  import tp_pkg::*;

  localparam int CSPAD = 22000;

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

  // mechanism counters
  int n_dc_miss = 0, n_evict_wb = 0, n_fence_wb = 0, n_ic_miss = 0, n_conflict = 0, n_urst = 0;
  int n_drain = 0, n_pad_wait = 0, n_clear = 0, n_blocked = 0, n_itlb_miss = 0, n_dtlb_miss = 0;
  int n_sfence = 0, n_bht_taken = 0, n_btb_hit = 0, n_fencet = 0, n_inflight = 0, n_inflight_done = 0, n_rsp_in_fence = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (dc_miss) n_dc_miss++;
    if (dc_wb_line && !ft_busy) n_evict_wb++;
    if (dc_wb_line && ft_busy) n_fence_wb++;
    if (ic_miss) n_ic_miss++;
    if ($countones(dc_valid) > 1 && !ft_busy) n_conflict++;
    if (urst) n_urst++;
    if (ft_state == FT_DRAIN) n_drain++;
    if (ft_state == FT_PAD) n_pad_wait++;
    if (ft_state == FT_CLEAR) n_clear++;
    if (ft_busy && (if_valid || dc_valid != 0) && (if_ready || dc_ready != 0)) begin
      failures++; $display("FAIL request accepted during fence.t");
    end
    if (ft_busy && (if_valid || dc_valid != 0)) n_blocked++;
    if (flush_pipe) n_fencet++;
    if (ft_busy && dc_rsp != 0) n_rsp_in_fence++;
  end

  initial begin
    repeat (2_000_000) @(posedge clk);
    $display("FAIL watchdog: fence.t state %s, %0d checks done", ft_state.name(), checks);
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

  // page mapping used by the page-table walker model
  function automatic logic [PPN_BITS-1:0] pmap(logic [VPN_BITS-1:0] v);
    return PPN_BITS'(v) + 44'h8_0000;
  endfunction

  // ---------------- data-side port drivers ----------------
  task automatic dport(int p, logic [PLEN-1:0] a, bit we, logic [XLEN-1:0] d);
    logic [XLEN-1:0] exp;
    a[2:0] = 3'b0;
    dc_valid[p] = 1; dc_req[p].addr = a; dc_req[p].we = we; dc_req[p].wdata = d; dc_req[p].be = 8'hFF;
    @(posedge clk);
    while (!dc_ready[p]) @(posedge clk);
    @(negedge clk); dc_valid[p] = 0;
    while (!dc_rsp[p]) @(negedge clk);
    if (we) refm[a] = d;
    else begin
      exp = ref_word(a);
      chk(dc_rdata == exp, $sformatf("port %0d load %h: %h exp %h", p, a, dc_rdata, exp));
    end
    @(negedge clk);
  endtask

  // load unit: translate through the DTLB (refilling it on a miss), then load
  task automatic vload(logic [VLEN-1:0] va);
    logic [PLEN-1:0] pa;
    dtlb_vaddr = va; dtlb_lv = 1; #1;
    if (!dtlb_hit) begin
      n_dtlb_miss++;
      dtlb_lv = 0;
      dtlb_uv = 1; dtlb_uvpn = va[VLEN-1:PAGE_BITS]; dtlb_uppn = pmap(va[VLEN-1:PAGE_BITS]);
      @(negedge clk); dtlb_uv = 0; dtlb_lv = 1; #1;
    end
    chk(dtlb_hit && dtlb_paddr == {pmap(va[VLEN-1:PAGE_BITS]), va[PAGE_BITS-1:0]}, "DTLB translation");
    pa = dtlb_paddr;
    @(negedge clk); dtlb_lv = 0;
    dport(0, pa, 0, '0);
  endtask

  // fetch through the ITLB (refilling it on a miss)
  task automatic fetch(logic [VLEN-1:0] va);
    logic [LINE_BITS-1:0] l;
    logic [PLEN-1:0] pa;
    va[1:0] = 2'b0;
    if_vaddr = va; if_valid = 1; #1;
    if (if_tlb_miss) begin
      n_itlb_miss++;
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

  task automatic csr_write(logic [31:0] d);
    csr_addr = CSR_CSPAD; csr_wdata = d; csr_we = 1; @(negedge clk); csr_we = 0;
  endtask

  // Trojan: exercise every component; stores n_dirty distinct lines at the end
  task automatic trojan(int n_dirty, int seed);
    for (int i = 0; i < 40; i++) fetch(VLEN'('h40_0000 + (seed * 4096) + i * 52));
    for (int i = 0; i < 20; i++) fetch(VLEN'('h40_0000 + (seed * 4096) + i * 52));   // hits
    for (int i = 0; i < 30; i++) vload(VLEN'('h10_0000 + i * 4104 + seed * 8));
    // all three data ports at once: loads (0), stores (1), page-table reads (2)
    fork
      for (int i = 0; i < 150; i++) dport(0, PLEN'('h2000_0000 + $urandom_range(8191) * 8), 0, '0);
      for (int i = 0; i < 300; i++) dport(1, PLEN'('h3000_0000 + $urandom_range(16383) * 8), 1, {$urandom, $urandom});
      for (int i = 0; i < 150; i++) dport(2, PLEN'('h5000_0000 + $urandom_range(8191) * 8), 0, '0);
    join
    // 20 stores to lines of one set: dirty lines must be evicted
    for (int i = 0; i < 20; i++) dport(1, PLEN'('h3800_0000 + i * 4096 + seed * 16), 1, {$urandom, $urandom});
    for (int i = 0; i < 200; i++) dport(0, PLEN'('h3000_0000 + $urandom_range(16383) * 8), 0, '0);
    // branch training
    for (int i = 0; i < 40; i++) begin
      bht_uv = 1; bht_upc = VLEN'('h40_0000 + (i % 8) * 2); bht_ut = 1;
      btb_uv = (i % 2 == 0); btb_upc = VLEN'('h40_0100 + (i % 16) * 2); btb_utgt = VLEN'('h41_0000 + i * 64);
      @(negedge clk);
    end
    bht_uv = 0; btb_uv = 0;
    bp_pc = VLEN'('h40_0002); #1;
    if (bht_taken) n_bht_taken++;
    bp_pc = VLEN'('h40_0100); #1;
    if (btb_valid) n_btb_hit++;
    // the secret: the number of lines dirtied (distinct lines in one region)
    for (int i = 0; i < n_dirty; i++) dport(1, PLEN'('h6000_0000 + i * 16), 1, {32'(i), 32'(seed)});
  endtask

  // context switch: timer interrupt, some kernel cycles, fence.t; returns the
  // cycles from the interrupt to the end of fence.t. With inflight set, a store
  // miss is accepted in the cycle before fence.t issues; its line must be
  // refilled, written and then written back by the same fence.t.
  task automatic context_switch(int kernel_cycles, logic [VLEN-1:0] pc, output int lat, input bit inflight = 0);
    int t_irq;
    @(negedge clk);
    timer_irq = 1; t_irq = cyc;
    repeat (kernel_cycles) @(negedge clk);
    timer_irq = 0;
    if (inflight) begin
      fork
        begin
          dport(0, PLEN'('h7900_0000 + kernel_cycles * 16), 1, {32'hCAFE, 32'(kernel_cycles)});
          n_inflight_done++;
        end
      join_none
      @(negedge clk);
      n_inflight++;
    end
    instr = 32'hABCD_E00B; instr_pc = pc; instr_valid = 1; #1;
    chk(flush_pipe && ft_imm == 20'hABCDE, "fence.t decoded");
    @(negedge clk); instr_valid = 0;
    // try to fetch and to load while fence.t runs: must not be accepted
    if_vaddr = VLEN'('h40_0000); if_valid = 1; dc_valid = 3'b111;
    repeat (20) @(negedge clk);
    if_valid = 0; dc_valid = '0;
    while (!resume_valid) @(negedge clk);
    lat = cyc - t_irq;
    chk(resume_pc == pc + 4, "resume at the instruction after fence.t");
    @(negedge clk);
    chk(!ft_busy, "fence.t finished");
    wait (n_inflight_done == n_inflight);
  endtask

  // everything non-architectural back at its reset state
  task automatic check_cleared(string when);
    logic [LINE_BITS-1:0] l;
    for (int s = 0; s < 256; s++) begin
      chk(dut.i_dcache.valid_ram[s] == '0 && dut.i_dcache.dirty_ram[s] == '0, {when, ": L1D set invalid"});
      chk(dut.i_icache.valid_ram[s] == '0, {when, ": L1I set invalid"});
    end
    chk(dut.i_dcache.i_lfsr.q == 8'h01 && dut.i_icache.i_lfsr.q == 8'h01, {when, ": LFSRs at seed"});
    chk(dut.i_itlb.valid_q == '0 && dut.i_dtlb.valid_q == '0, {when, ": TLBs empty"});
    chk(dut.i_itlb.i_plru.tree_q == '0 && dut.i_dtlb.i_plru.tree_q == '0, {when, ": PLRU trees reset"});
    chk(dut.i_arb.ptr_q == '0, {when, ": arbiter pointer reset"});
    for (int i = 0; i < 64; i++) begin
      bp_pc = VLEN'(i * 2); #1;
      chk(!bht_taken && dut.i_bht.ctr_q[i] == 2'b01, {when, ": BHT weakly not taken"});
      chk(!btb_valid, {when, ": BTB empty"});
    end
    csr_addr = CSR_CSPAD; #1;
    chk(csr_hit && csr_rdata == dut.i_pad.cspad_q, {when, ": cspad readable"});
    // all stored data reached L2
    foreach (refm[k]) begin
      l = l2d.peek(k);
      chk((k[3] ? l[127:64] : l[63:0]) == refm[k], $sformatf("%s: L2 word %h", when, k));
    end
    @(negedge clk);
  endtask

  initial begin
    int lat_few, lat_full, lat_np_clean, lat_np_dirty, m0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (!(dut.i_dcache.idle_o && dut.i_icache.idle_o)) @(negedge clk);
    csr_write(CSPAD);
    #1 chk(csr_rdata == CSPAD, "cspad written");

    // context switch 1: a few dirty lines on top of the mixed traffic
    trojan(7, 1);
    context_switch(500, VLEN'('h8000_1000), lat_few, 1'b1);
    chk(lat_few == CSPAD + 1, $sformatf("padded latency %0d, exp %0d", lat_few, CSPAD + 1));
    chk(n_urst == 16, $sformatf("Microreset held %0d cycles", n_urst));
    check_cleared("switch 1");
    chk(csr_rdata == CSPAD, "cspad kept across Microreset");

    // context switch 2: the whole L1D dirty (worst case for the write-back)
    for (int i = 0; i < 2048; i++) dport(1, PLEN'('h7000_0000 + i * 16), 1, {32'(i), 32'hF00D});
    chk(dut.i_dcache.valid_ram[100] == '1 && dut.i_dcache.dirty_ram[100] == '1, "cache fully dirty");
    m0 = n_fence_wb;
    context_switch(300, VLEN'('h8000_2000), lat_full);
    chk(n_fence_wb - m0 == 2048, $sformatf("fence.t wrote back %0d lines", n_fence_wb - m0));
    chk(lat_full == lat_few, $sformatf("latency independent of history: %0d vs %0d", lat_full, lat_few));
    check_cleared("switch 2");

    // after fence.t the old data come back from L2 through misses
    m0 = n_dc_miss;
    for (int i = 0; i < 16; i++) dport(0, PLEN'('h7000_0000 + i * 16), 0, '0);
    chk(n_dc_miss - m0 == 16, "cold cache after fence.t");
    // sfence.vma flushes the TLBs (architectural, outside fence.t)
    vload(VLEN'('h10_0000));
    sfence = 1; @(negedge clk); sfence = 0; n_sfence++;
    dtlb_vaddr = VLEN'('h10_0000); #1 chk(!dtlb_hit, "sfence flushed the DTLB");

    // without padding the latency reveals the number of dirty lines
    csr_write(0);
    context_switch(10, VLEN'('h8000_3000), lat_np_clean);
    for (int i = 0; i < 600; i++) dport(1, PLEN'('h7100_0000 + i * 16), 1, {32'(i), 32'hBEEF});
    context_switch(10, VLEN'('h8000_4000), lat_np_dirty);
    chk(lat_np_dirty > lat_np_clean + 600, $sformatf("unpadded latency %0d (clean) vs %0d (600 dirty)", lat_np_clean, lat_np_dirty));
    check_cleared("switch 4");

    $display("latency from interrupt to end of fence.t: padded %0d / %0d, unpadded %0d / %0d",
             lat_few, lat_full, lat_np_clean, lat_np_dirty);
    $display("events: dcache misses %0d, dirty evictions %0d, fence.t write-backs %0d, icache misses %0d",
             n_dc_miss, n_evict_wb, n_fence_wb, n_ic_miss);
    $display("events: port conflicts %0d, itlb misses %0d, dtlb misses %0d, fence.t %0d, microreset cycles %0d",
             n_conflict, n_itlb_miss, n_dtlb_miss, n_fencet, n_urst);
    $display("events: drain cycles %0d, clear cycles %0d, pad wait cycles %0d, blocked request cycles %0d",
             n_drain, n_clear, n_pad_wait, n_blocked);
    $display("events: responses during fence.t to requests in flight at its issue %0d", n_rsp_in_fence);
    chk(n_dc_miss > 0,  "mechanism: L1D miss");
    chk(n_evict_wb > 0, "mechanism: dirty eviction");
    chk(n_fence_wb > 0, "mechanism: fence.t write-back");
    chk(n_ic_miss > 0,  "mechanism: L1I miss");
    chk(n_conflict > 0, "mechanism: arbitration conflict");
    chk(n_itlb_miss > 0 && n_dtlb_miss > 0, "mechanism: TLB refill");
    chk(n_urst == 4 * 16, "mechanism: Microreset, 16 cycles per fence.t");
    chk(n_drain >= 4 * 16, "mechanism: drain");
    chk(n_clear > 0,    "mechanism: SRAM clear");
    chk(n_pad_wait > 2, "mechanism: pad stall");
    chk(n_blocked > 0,  "mechanism: requests held off during fence.t");
    chk(n_bht_taken > 0 && n_btb_hit > 0, "mechanism: branch prediction");
    chk(n_sfence > 0,   "mechanism: sfence");
    chk(n_fencet == 4,  "mechanism: fence.t");
    chk(n_inflight > 0 && n_rsp_in_fence > 0, "mechanism: request in flight at fence.t served during it");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
