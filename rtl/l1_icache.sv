// l1_icache: read-only, set-associative L1 instruction cache with fence.t
// support.
//
// Geometry: WAYS ways of SIZE_BYTES in total with 16-byte lines (4 ways,
// 16 KiB, 256 sets by default). Tags, valid bits and data are arrays without
// reset (the SRAM macros). The cache is blocking: it accepts one fetch
// (req_valid_i/req_ready_o) with a physical address in its idle state, looks it
// up in the next cycle and, on a hit, returns the 32-bit word at that address
// with a one-cycle rsp_valid_o. On a miss the victim is the first invalid way,
// else the way given by an 8-bit LFSR; the line is refilled from the next level
// and the lookup replayed. The instruction cache holds no dirty state, so
// fence.t needs no write-back here:
//  * clr_req_i (step 4): overwrite tags, valid bits and data with zeros, one
//    set per cycle; clr_done_o is high in the last cycle. The same sweep runs
//    once after rst_ni.
//  * clear_i (step 5, Microreset): returns the FSM, the request and victim
//    registers and the LFSR to their reset values.
// Geometry and replacement follow the evaluated core; the 32-bit fetch width,
// the blocking organisation and the handshakes are this design's choices.
module l1_icache
  import tp_pkg::*;
#(
  parameter int unsigned WAYS       = 4,
  parameter int unsigned SIZE_BYTES = 16384
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  input  logic            clear_i,
  // fetch port
  input  logic            req_valid_i,
  input  logic [PLEN-1:0] req_addr_i,
  output logic            req_ready_o,
  output logic            rsp_valid_o,
  output logic [31:0]     rsp_rdata_o,
  // fence.t
  input  logic            clr_req_i,
  output logic            clr_done_o,
  output logic            idle_o,
  // next level (refills only)
  output logic            mem_req_valid_o,
  output mem_req_t        mem_req_o,
  input  logic            mem_req_ready_i,
  input  logic            mem_rsp_valid_i,
  input  mem_rsp_t        mem_rsp_i,
  output logic            miss_o
);

  localparam int unsigned SETS = SIZE_BYTES / (WAYS * LINE_BYTES);
  localparam int unsigned OW   = $clog2(LINE_BYTES);
  localparam int unsigned IW   = $clog2(SETS);
  localparam int unsigned WW   = $clog2(WAYS);
  localparam int unsigned TW   = PLEN - IW - OW;

  typedef enum logic [2:0] {
    S_INIT, S_IDLE, S_LOOKUP, S_REFILL, S_REFILL_WAIT, S_CLEAR
  } state_e;

  logic [TW-1:0]        tag_ram   [SETS][WAYS];
  logic [LINE_BITS-1:0] data_ram  [SETS][WAYS];
  logic [WAYS-1:0]      valid_ram [SETS];

  state_e          state_q;
  logic [PLEN-1:0] addr_q;
  logic [WW-1:0]   vict_q;
  logic [IW-1:0]   set_q;

  logic [IW-1:0]   idx;
  logic [TW-1:0]   tag;
  logic [WAYS-1:0] hit_vec;
  logic            hit, have_free, lfsr_en;
  logic [WW-1:0]   hit_way, free_way, lfsr_way;

  assign idx = addr_q[OW +: IW];
  assign tag = addr_q[PLEN-1 -: TW];

  always_comb begin
    hit_vec   = '0;
    hit_way   = '0;
    free_way  = '0;
    have_free = 1'b0;
    for (int w = WAYS - 1; w >= 0; w--) begin
      hit_vec[w] = valid_ram[idx][w] && (tag_ram[idx][w] == tag);
      if (hit_vec[w]) hit_way = WW'(w);
      if (!valid_ram[idx][w]) begin
        have_free = 1'b1;
        free_way  = WW'(w);
      end
    end
    hit = |hit_vec;
  end

  assign lfsr_en = (state_q == S_LOOKUP) && !hit;

  lfsr8 #(.WAYS(WAYS)) i_lfsr (
    .clk_i, .rst_ni, .clear_i, .en_i(lfsr_en), .lfsr_o(), .idx_o(lfsr_way)
  );

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= S_INIT;
      addr_q  <= '0;
      vict_q  <= '0;
      set_q   <= '0;
    end else if (clear_i) begin
      state_q <= S_IDLE;
      addr_q  <= '0;
      vict_q  <= '0;
      set_q   <= '0;
    end else begin
      unique case (state_q)
        S_INIT, S_CLEAR: begin
          set_q <= set_q + 1'b1;
          if (set_q == IW'(SETS - 1)) state_q <= S_IDLE;
        end
        S_IDLE: begin
          set_q <= '0;
          if (clr_req_i) state_q <= S_CLEAR;
          else if (req_valid_i) begin
            addr_q  <= req_addr_i;
            state_q <= S_LOOKUP;
          end
        end
        S_LOOKUP: if (!hit) begin
          vict_q  <= have_free ? free_way : lfsr_way;
          state_q <= S_REFILL;
        end else begin
          state_q <= S_IDLE;
        end
        S_REFILL:      if (mem_req_ready_i) state_q <= S_REFILL_WAIT;
        S_REFILL_WAIT: if (mem_rsp_valid_i) state_q <= S_LOOKUP;
        default: state_q <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk_i) begin
    unique case (state_q)
      S_INIT, S_CLEAR: begin
        valid_ram[set_q] <= '0;
        for (int w = 0; w < WAYS; w++) begin
          tag_ram[set_q][w]  <= '0;
          data_ram[set_q][w] <= '0;
        end
      end
      S_REFILL_WAIT: if (mem_rsp_valid_i) begin
        data_ram[idx][vict_q]  <= mem_rsp_i.rdata;
        tag_ram[idx][vict_q]   <= tag;
        valid_ram[idx][vict_q] <= 1'b1;
      end
      default: ;
    endcase
  end

  always_comb begin
    mem_req_o       = '0;
    mem_req_o.addr  = {tag, idx, OW'(0)};
    mem_req_valid_o = (state_q == S_REFILL);
  end

  assign req_ready_o = (state_q == S_IDLE) && !clr_req_i;
  assign rsp_valid_o = (state_q == S_LOOKUP) && hit;
  assign rsp_rdata_o = data_ram[idx][hit_way][addr_q[OW-1:2]*32 +: 32];
  assign clr_done_o  = (state_q == S_CLEAR) && (set_q == IW'(SETS - 1));
  assign idle_o      = (state_q == S_IDLE);
  assign miss_o      = lfsr_en;

  assert property (@(posedge clk_i) disable iff (!rst_ni)
    mem_rsp_valid_i |-> (state_q == S_REFILL_WAIT));

endmodule
