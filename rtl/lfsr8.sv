// lfsr8: 8-bit linear-feedback shift register for cache way replacement.
//
// Each L1 cache picks its victim way pseudo-randomly from this register. It is
// a Fibonacci LFSR with the maximal-length polynomial x^8 + x^6 + x^5 + x^4 + 1
// (period 255), advanced by one step in every cycle en_i is high. Its state
// depends on past cache misses, so it is non-architectural state: clear_i
// (Microreset) returns it to SEED, just as rst_ni does. The way index idx_o is
// the low bits of the register. The 8-bit width follows the evaluated core; the
// polynomial and the seed are choices of this design.
module lfsr8 #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned WAYS  = 8,
  parameter logic [WIDTH-1:0] SEED = 8'h01
) (
  input  logic                              clk_i,
  input  logic                              rst_ni,
  input  logic                              clear_i,
  input  logic                              en_i,
  output logic [WIDTH-1:0]                  lfsr_o,
  output logic [$clog2(WAYS > 1 ? WAYS : 2)-1:0] idx_o
);

  logic [WIDTH-1:0] q;
  logic             fb;

  // Taps 8, 6, 5, 4 (bits 7, 5, 4, 3).
  assign fb = q[7] ^ q[5] ^ q[4] ^ q[3];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)      q <= SEED;
    else if (clear_i) q <= SEED;
    else if (en_i)    q <= {q[WIDTH-2:0], fb};
  end

  assign lfsr_o = q;
  assign idx_o  = q[$bits(idx_o)-1:0];

  initial assert (WIDTH == 8) else $error("lfsr8: only WIDTH = 8 is supported");

endmodule
