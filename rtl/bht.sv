// bht: branch history table of 2-bit saturating counters.
//
// ENTRIES counters, indexed by the instruction address bits above bit 0
// (RV64GC has 2-byte aligned instructions). The prediction for lookup_pc_i is
// combinational: taken_o is the counter's upper bit. A resolved branch
// (upd_valid_i) moves its counter one step towards taken or not taken,
// saturating at 3 and 0. The counters hold execution history, the channel the
// BHT attack uses, so clear_i (Microreset) sets all of them back to 01 (weakly
// not taken), as rst_ni does. Index function and reset value are this
// design's choices; the 64 entries follow the evaluated core.
module bht
  import tp_pkg::*;
#(
  parameter int unsigned ENTRIES = 64
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  input  logic            clear_i,
  input  logic [VLEN-1:0] lookup_pc_i,
  output logic            taken_o,
  input  logic            upd_valid_i,
  input  logic [VLEN-1:0] upd_pc_i,
  input  logic            upd_taken_i
);

  localparam int unsigned IW = $clog2(ENTRIES);
  localparam logic [1:0]  CTR_INIT = 2'b01;

  logic [ENTRIES-1:0][1:0] ctr_q;
  logic [IW-1:0]           lidx, uidx;

  assign lidx    = lookup_pc_i[IW:1];
  assign uidx    = upd_pc_i[IW:1];
  assign taken_o = ctr_q[lidx][1];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ctr_q <= {ENTRIES{CTR_INIT}};
    end else if (clear_i) begin
      ctr_q <= {ENTRIES{CTR_INIT}};
    end else if (upd_valid_i) begin
      if (upd_taken_i && ctr_q[uidx] != 2'b11)       ctr_q[uidx] <= ctr_q[uidx] + 2'b01;
      else if (!upd_taken_i && ctr_q[uidx] != 2'b00) ctr_q[uidx] <= ctr_q[uidx] - 2'b01;
    end
  end

endmodule
