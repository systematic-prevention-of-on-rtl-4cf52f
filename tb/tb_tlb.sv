// tb_tlb: fills the TLB, checks translations, checks that a refill of a full
// TLB replaces the least recently used entry after a sequential fill, that a
// hit protects an entry from replacement, and that sfence and Microreset
// invalidate everything.
module tb_tlb;
  import tp_pkg::*;
  localparam int N = 16;
  logic clk = 0, rst_n = 0, clear = 0, flush = 0;
  logic lv = 0, uv = 0, hit;
  logic [VPN_BITS-1:0] lvpn, uvpn;
  logic [PPN_BITS-1:0] ppn, uppn;
  int checks = 0, failures = 0;

  tlb #(.ENTRIES(N)) dut (.clk_i(clk), .rst_ni(rst_n), .clear_i(clear), .flush_i(flush),
    .lookup_valid_i(lv), .lookup_vpn_i(lvpn), .hit_o(hit), .ppn_o(ppn),
    .upd_valid_i(uv), .upd_vpn_i(uvpn), .upd_ppn_i(uppn));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic logic [PPN_BITS-1:0] map(logic [VPN_BITS-1:0] v);
    return PPN_BITS'(v) * 44'd7919 + 44'h123;
  endfunction

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  task automatic fill(logic [VPN_BITS-1:0] v);
    uv = 1; uvpn = v; uppn = map(v);
    @(negedge clk); uv = 0;
  endtask

  task automatic probe(logic [VPN_BITS-1:0] v, bit exp_hit, bit touch);
    lvpn = v; lv = touch; #1;
    chk(hit == exp_hit, $sformatf("vpn %h hit=%0d exp %0d", v, hit, exp_hit));
    if (exp_hit) chk(ppn == map(v), "ppn");
    @(negedge clk); lv = 0;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < N; i++) probe(VPN_BITS'(i * 3 + 100), 0, 0);
    for (int i = 0; i < N; i++) fill(VPN_BITS'(i * 3 + 100));
    for (int i = 0; i < N; i++) probe(VPN_BITS'(i * 3 + 100), 1, 0);
    fill(VPN_BITS'(999));                          // replaces entry 0 (LRU)
    probe(VPN_BITS'(100), 0, 0);
    probe(VPN_BITS'(999), 1, 0);
    for (int i = 1; i < N; i++) probe(VPN_BITS'(i * 3 + 100), 1, 0);
    // The next candidate is entry 8 (the other half of the tree); touching it
    // moves the candidate elsewhere.
    probe(VPN_BITS'(8 * 3 + 100), 1, 1);
    fill(VPN_BITS'(1234));
    probe(VPN_BITS'(8 * 3 + 100), 1, 0);
    probe(VPN_BITS'(1234), 1, 0);
    flush = 1; @(negedge clk); flush = 0;
    probe(VPN_BITS'(1234), 0, 0);
    probe(VPN_BITS'(999), 0, 0);
    for (int i = 0; i < 5; i++) fill(VPN_BITS'(i + 7));
    probe(VPN_BITS'(9), 1, 0);
    clear = 1; @(negedge clk); clear = 0;
    for (int i = 0; i < 5; i++) probe(VPN_BITS'(i + 7), 0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
