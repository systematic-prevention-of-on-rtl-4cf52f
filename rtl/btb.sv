// btb: branch target buffer for indirect jumps.
//
// ENTRIES direct-mapped entries, indexed by the instruction address bits above
// bit 0, each holding a valid bit and a predicted target. Lookup is
// combinational (valid_o, target_o). A resolved jump (upd_valid_i) writes its
// target into its entry. The entries are the state a BTB prime-and-probe
// attack observes, so clear_i (Microreset) invalidates them and zeroes the
// targets, as rst_ni does. Like the core it models, the table has no tag, so
// aliasing addresses share an entry; the 16 entries follow the evaluated core.
module btb
  import tp_pkg::*;
#(
  parameter int unsigned ENTRIES = 16
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  input  logic            clear_i,
  input  logic [VLEN-1:0] lookup_pc_i,
  output logic            valid_o,
  output logic [VLEN-1:0] target_o,
  input  logic            upd_valid_i,
  input  logic [VLEN-1:0] upd_pc_i,
  input  logic [VLEN-1:0] upd_target_i
);

  localparam int unsigned IW = $clog2(ENTRIES);

  logic [ENTRIES-1:0]           valid_q;
  logic [ENTRIES-1:0][VLEN-1:0] target_q;
  logic [IW-1:0]                lidx, uidx;

  assign lidx     = lookup_pc_i[IW:1];
  assign uidx     = upd_pc_i[IW:1];
  assign valid_o  = valid_q[lidx];
  assign target_o = target_q[lidx];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      valid_q  <= '0;
      target_q <= '0;
    end else if (clear_i) begin
      valid_q  <= '0;
      target_q <= '0;
    end else if (upd_valid_i) begin
      valid_q[uidx]  <= 1'b1;
      target_q[uidx] <= upd_target_i;
    end
  end

endmodule
