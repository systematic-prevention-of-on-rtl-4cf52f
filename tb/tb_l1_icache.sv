// tb_l1_icache: the L1 instruction cache at its full size (4 ways, 16 KiB)
// against a behavioural L2 holding a known pattern. Checks fetched words over
// four times the cache size, a one-cycle hit, that the cache never writes to
// L2, the clear sweep (one cycle per set, SETS + 1 cycles from the request) leaving all lines invalid, and that
// Microreset returns the LFSR to its seed.
module tb_l1_icache;
  import tp_pkg::*;
  localparam int SETS = 256;
  logic clk = 0, rst_n = 0, clear = 0;
  logic req_valid = 0, req_ready, rsp_valid;
  logic [PLEN-1:0] addr = '0;
  logic [31:0] rdata;
  logic clr_req = 0, clr_done, idle, miss;
  logic mreq_valid, mreq_ready, mrsp_valid;
  mem_req_t mreq;
  mem_rsp_t mrsp;
  int checks = 0, failures = 0;
  int cyc = 0, n_miss = 0;

  l1_icache dut (.clk_i(clk), .rst_ni(rst_n), .clear_i(clear), .req_valid_i(req_valid), .req_addr_i(addr),
    .req_ready_o(req_ready), .rsp_valid_o(rsp_valid), .rsp_rdata_o(rdata), .clr_req_i(clr_req),
    .clr_done_o(clr_done), .idle_o(idle), .mem_req_valid_o(mreq_valid), .mem_req_o(mreq),
    .mem_req_ready_i(mreq_ready), .mem_rsp_valid_i(mrsp_valid), .mem_rsp_i(mrsp), .miss_o(miss));

  tb_mem_model #(.LATENCY(6)) l2 (.clk_i(clk), .rst_ni(rst_n), .req_valid_i(mreq_valid), .req_i(mreq),
    .req_ready_o(mreq_ready), .rsp_valid_o(mrsp_valid), .rsp_o(mrsp));

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (miss) n_miss <= n_miss + 1;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL %s", m); end
  endtask

  task automatic fetch(logic [PLEN-1:0] a, output int lat);
    int t_acc;
    logic [LINE_BITS-1:0] l;
    a[1:0] = 2'b0;
    req_valid = 1; addr = a;
    @(posedge clk);
    while (!req_ready) @(posedge clk);
    t_acc = cyc;
    @(negedge clk); req_valid = 0;
    while (!rsp_valid) @(negedge clk);
    lat = cyc - t_acc;
    l = l2.init_line({a[PLEN-1:4], 4'h0});
    chk(rdata == l[a[3:2]*32 +: 32], $sformatf("fetch %h", a));
    @(negedge clk);
  endtask

  initial begin
    int lat, m0, t0;
    logic [PLEN-1:0] a;
    repeat (2) @(posedge clk);
    rst_n = 1;
    while (!idle) @(negedge clk);
    @(negedge clk);
    fetch(56'h8000_0000, lat);
    chk(lat > 6, $sformatf("miss latency %0d", lat));
    fetch(56'h8000_0004, lat);
    chk(lat == 1, $sformatf("hit latency %0d", lat));
    for (int i = 0; i < 5000; i++) begin
      a = 56'h8000_0000 + PLEN'($urandom_range(16383) * 4);
      fetch(a, lat);
    end
    chk(n_miss > 500, $sformatf("replacements happened (%0d misses)", n_miss));
    chk(l2.n_writes == 0, "no writes to L2");
    // fill with sequential code, then clear
    for (int i = 0; i < 1024; i++) fetch(56'h1_0000 + PLEN'(i * 16), lat);
    t0 = cyc;
    clr_req = 1;
    @(posedge clk);
    while (!clr_done) @(posedge clk);
    chk(cyc - t0 + 1 == SETS + 1, $sformatf("clear sweep %0d cycles", cyc - t0 + 1));
    @(negedge clk); clr_req = 0;
    for (int s = 0; s < SETS; s++) chk(dut.valid_ram[s] == '0, "set cleared");
    m0 = n_miss;
    for (int i = 0; i < 32; i++) fetch(56'h1_0000 + PLEN'(i * 16), lat);
    chk(n_miss - m0 == 32, "all lines miss after clear");
    chk(dut.i_lfsr.q != 8'h01, "LFSR has moved");
    clear = 1; @(negedge clk); clear = 0;
    chk(dut.i_lfsr.q == 8'h01 && idle, "Microreset: LFSR seed, FSM idle");
    for (int i = 0; i < 100; i++) fetch(56'h8000_0000 + PLEN'($urandom_range(16383) * 4), lat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
