// tlb: single-level fully associative translation lookaside buffer.
//
// ENTRIES entries, each mapping a 4 KiB virtual page (Sv39 VPN) to a physical
// page number. Lookup is combinational: lookup_vpn_i is compared against every
// valid entry and hit_o/ppn_o are returned in the same cycle. A hit with
// lookup_valid_i updates the pseudo-LRU tree. Refills come from the page-table
// walker through upd_valid_i and go to the first invalid entry, or to the
// pseudo-LRU candidate if all are valid. flush_i (sfence.vma) invalidates all
// entries. The entries and the tree are non-architectural, so clear_i
// (Microreset) invalidates the entries and clears the tree as well.
// Address-space identifiers and superpages are left out in this design.
module tlb
  import tp_pkg::*;
#(
  parameter int unsigned ENTRIES = 16
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  input  logic                clear_i,
  input  logic                flush_i,
  input  logic                lookup_valid_i,
  input  logic [VPN_BITS-1:0] lookup_vpn_i,
  output logic                hit_o,
  output logic [PPN_BITS-1:0] ppn_o,
  input  logic                upd_valid_i,
  input  logic [VPN_BITS-1:0] upd_vpn_i,
  input  logic [PPN_BITS-1:0] upd_ppn_i
);

  localparam int unsigned IW = $clog2(ENTRIES);

  logic [ENTRIES-1:0]               valid_q;
  logic [ENTRIES-1:0][VPN_BITS-1:0] vpn_q;
  logic [ENTRIES-1:0][PPN_BITS-1:0] ppn_q;
  logic [ENTRIES-1:0]               hit_vec, used;
  logic [IW-1:0]                    repl_idx, upd_idx;

  always_comb begin
    hit_o = 1'b0;
    ppn_o = '0;
    for (int unsigned i = 0; i < ENTRIES; i++) begin
      hit_vec[i] = valid_q[i] && (vpn_q[i] == lookup_vpn_i);
      if (hit_vec[i]) begin
        hit_o = 1'b1;
        ppn_o = ppn_q[i];
      end
    end
  end

  // Victim: first invalid entry, else the pseudo-LRU candidate.
  always_comb begin
    upd_idx   = repl_idx;
    for (int i = ENTRIES - 1; i >= 0; i--) begin
      if (!valid_q[i]) begin
        upd_idx   = IW'(i);
      end
    end
  end

  always_comb begin
    used = '0;
    if (lookup_valid_i) used = hit_vec;
    if (upd_valid_i)    used = ENTRIES'(1) << upd_idx;
  end

  plru_tree #(.ENTRIES(ENTRIES)) i_plru (
    .clk_i, .rst_ni, .clear_i,
    .used_i(used), .repl_o(), .repl_idx_o(repl_idx)
  );

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      valid_q <= '0;
      vpn_q   <= '0;
      ppn_q   <= '0;
    end else if (clear_i) begin
      valid_q <= '0;
      vpn_q   <= '0;
      ppn_q   <= '0;
    end else if (flush_i) begin
      valid_q <= '0;
    end else if (upd_valid_i) begin
      valid_q[upd_idx] <= 1'b1;
      vpn_q[upd_idx]   <= upd_vpn_i;
      ppn_q[upd_idx]   <= upd_ppn_i;
    end
  end

endmodule
