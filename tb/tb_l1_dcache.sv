// tb_l1_dcache: the write-back L1 data cache at its full size (8 ways,
// 32 KiB) against a word-level reference memory and a behavioural L2.
// Checks: random loads and stores over four times the cache size return the
// reference data; a hit answers in the cycle after acceptance; a fully dirty
// cache writes back all 2048 lines on wb_req and L2 then holds every stored
// word; a clean write-back scan takes one cycle per set plus the request cycle
// (SETS + 1); the clear sweep takes the same and leaves every line invalid;
// Microreset returns the LFSR to its seed.
module tb_l1_dcache;
  import tp_pkg::*;
  localparam int SETS = 256, LINES = 2048;
  logic clk = 0, rst_n = 0, clear = 0;
  logic req_valid = 0, req_ready, rsp_valid;
  dreq_t req = '0;
  logic [XLEN-1:0] rdata;
  logic wb_req = 0, wb_done, clr_req = 0, clr_done, idle, miss, wb_line;
  logic mreq_valid, mreq_ready, mrsp_valid;
  mem_req_t mreq;
  mem_rsp_t mrsp;
  int checks = 0, failures = 0;
  int cyc = 0, n_miss = 0, n_wb = 0;
  logic [XLEN-1:0] refm [logic [PLEN-1:0]];

  l1_dcache dut (.clk_i(clk), .rst_ni(rst_n), .clear_i(clear), .req_valid_i(req_valid), .req_i(req),
    .req_ready_o(req_ready), .rsp_valid_o(rsp_valid), .rsp_rdata_o(rdata), .wb_req_i(wb_req),
    .wb_done_o(wb_done), .clr_req_i(clr_req), .clr_done_o(clr_done), .idle_o(idle),
    .mem_req_valid_o(mreq_valid), .mem_req_o(mreq), .mem_req_ready_i(mreq_ready),
    .mem_rsp_valid_i(mrsp_valid), .mem_rsp_i(mrsp), .miss_o(miss), .wb_line_o(wb_line));

  tb_mem_model #(.LATENCY(4)) l2 (.clk_i(clk), .rst_ni(rst_n), .req_valid_i(mreq_valid), .req_i(mreq),
    .req_ready_o(mreq_ready), .rsp_valid_o(mrsp_valid), .rsp_o(mrsp));

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (miss) n_miss <= n_miss + 1;
    if (wb_line) n_wb <= n_wb + 1;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL %s", m); end
  endtask

  function automatic logic [XLEN-1:0] ref_word(logic [PLEN-1:0] a);
    logic [LINE_BITS-1:0] l;
    a[2:0] = 3'b0;
    if (refm.exists(a)) return refm[a];
    l = l2.init_line({a[PLEN-1:4], 4'h0});
    return a[3] ? l[127:64] : l[63:0];
  endfunction

  // one access; returns the cycles from acceptance to response
  task automatic access(logic [PLEN-1:0] a, bit we, logic [XLEN-1:0] d, logic [7:0] be, output int lat);
    int t_acc;
    logic [XLEN-1:0] old;
    a[2:0] = 3'b0;
    req_valid = 1; req.addr = a; req.we = we; req.wdata = d; req.be = be;
    @(posedge clk);
    while (!req_ready) @(posedge clk);
    t_acc = cyc;
    @(negedge clk); req_valid = 0;
    while (!rsp_valid) @(negedge clk);
    lat = cyc - t_acc;
    old = ref_word(a);
    if (we) begin
      for (int b = 0; b < 8; b++) if (be[b]) old[b*8 +: 8] = d[b*8 +: 8];
      refm[a] = old;
    end else begin
      chk(rdata == old, $sformatf("load %h: %h exp %h", a, rdata, old));
    end
    @(negedge clk);
  endtask

  task automatic flush_cmd(bit wb, output int dur);
    int t0 = cyc;
    if (wb) wb_req = 1; else clr_req = 1;
    @(posedge clk);
    while (!(wb ? wb_done : clr_done)) @(posedge clk);
    dur = cyc - t0 + 1;
    @(negedge clk); wb_req = 0; clr_req = 0;
  endtask

  initial begin
    int lat, dur, m0, w0;
    logic [PLEN-1:0] a;
    repeat (2) @(posedge clk);
    rst_n = 1;
    while (!idle) @(negedge clk);
    @(negedge clk);
    // hit latency
    access(56'h1000, 0, 0, 0, lat);
    chk(lat > 2, $sformatf("miss latency %0d", lat));
    access(56'h1008, 0, 0, 0, lat);
    chk(lat == 1, $sformatf("hit latency %0d", lat));
    // random traffic over 128 KiB
    for (int i = 0; i < 6000; i++) begin
      a = 56'h8000_0000 + PLEN'($urandom_range(16383) * 8);
      access(a, 1'($urandom % 2), {$urandom, $urandom}, 8'($urandom), lat);
    end
    chk(n_miss > 1000 && n_wb > 100, $sformatf("evictions happened (%0d misses, %0d write-backs)", n_miss, n_wb));
    // make every line dirty: write back and clear, then one store per line
    // over exactly the cache size (free ways are filled first)
    flush_cmd(1, dur);
    flush_cmd(0, dur);
    for (int i = 0; i < LINES; i++) access(56'h4000_0000 + PLEN'(i * 16), 1, PLEN'(i) * 3, 8'hFF, lat);
    w0 = n_wb;
    flush_cmd(1, dur);
    @(negedge clk);
    chk(n_wb - w0 == LINES, $sformatf("fully dirty write-back wrote %0d lines", n_wb - w0));
    $display("fully dirty write-back: %0d cycles for %0d lines", dur, n_wb - w0);
    // L2 now holds every stored word
    foreach (refm[k]) begin
      logic [LINE_BITS-1:0] l;
      l = l2.peek(k);
      chk((k[3] ? l[127:64] : l[63:0]) == refm[k], $sformatf("L2 word %h: %h exp %h", k, (k[3] ? l[127:64] : l[63:0]), refm[k]));
    end
    w0 = n_wb;
    flush_cmd(1, dur);
    chk(dur == SETS + 1 && n_wb == w0, $sformatf("clean write-back scan (one idle cycle + one per set) %0d cycles", dur));
    // the write-back left the data cached: hit
    access(56'h4000_0000, 0, 0, 0, lat);
    chk(lat == 1, "line still cached after write-back");
    flush_cmd(0, dur);
    chk(dur == SETS + 1, $sformatf("clear sweep (one idle cycle + one per set) %0d cycles", dur));
    @(negedge clk);
    for (int s = 0; s < SETS; s++) chk(dut.valid_ram[s] == '0 && dut.dirty_ram[s] == '0, "set cleared");
    m0 = n_miss;
    for (int i = 0; i < 64; i++) access(56'h4000_0000 + PLEN'(i * 16), 0, 0, 0, lat);
    chk(n_miss - m0 == 64, "all lines miss after clear");
    // Microreset: LFSR back to its seed, cache still works
    chk(dut.i_lfsr.q != 8'h01, "LFSR has moved");
    clear = 1; @(negedge clk); clear = 0;
    chk(dut.i_lfsr.q == 8'h01 && idle, "Microreset: LFSR seed, FSM idle");
    for (int i = 0; i < 200; i++) begin
      a = 56'h8000_0000 + PLEN'($urandom_range(16383) * 8);
      access(a, 1'($urandom % 2), {$urandom, $urandom}, 8'($urandom), lat);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
