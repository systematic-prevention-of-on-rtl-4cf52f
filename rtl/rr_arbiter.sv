// rr_arbiter: round-robin arbiter in front of the L1 data cache.
//
// Arbitrates the cache port between N requesters (load unit, store unit and
// memory-management unit in the core). Requester i raises req_i[i]; exactly one
// request is granted per cycle (gnt_o one-hot, gnt_idx_o), starting the search
// at the requester after the one last served. The grant is combinational; the
// priority pointer moves only when the downstream port accepts the granted
// request (ready_i). The pointer depends on past accesses, so clear_i
// (Microreset) returns it to requester 0, as rst_ni does. The pointer is the
// only state.
module rr_arbiter #(
  parameter int unsigned N = 3
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  logic                 clear_i,
  input  logic [N-1:0]         req_i,
  input  logic                 ready_i,
  output logic [N-1:0]         gnt_o,
  output logic [$clog2(N)-1:0] gnt_idx_o,
  output logic                 valid_o
);

  localparam int unsigned IW = $clog2(N);

  logic [IW-1:0] ptr_q;   // highest-priority requester

  always_comb begin
    logic found;
    found     = 1'b0;
    gnt_idx_o = '0;
    for (int unsigned k = 0; k < N; k++) begin
      int unsigned i;
      i = (32'(ptr_q) + k) % N;
      if (!found && req_i[i]) begin
        found     = 1'b1;
        gnt_idx_o = IW'(i);
      end
    end
    valid_o = found;
    gnt_o   = found ? (N'(1) << gnt_idx_o) : '0;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)                 ptr_q <= '0;
    else if (clear_i)            ptr_q <= '0;
    else if (valid_o && ready_i) ptr_q <= (gnt_idx_o == IW'(N - 1)) ? '0 : gnt_idx_o + 1'b1;
  end

  // One grant at most, and only to a requester that asked.
  assert property (@(posedge clk_i) disable iff (!rst_ni) $onehot0(gnt_o) && ((gnt_o & ~req_i) == '0));

endmodule
