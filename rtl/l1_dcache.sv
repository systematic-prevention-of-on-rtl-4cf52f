// l1_dcache: write-back, set-associative L1 data cache with fence.t support.
//
// Geometry: WAYS ways of SIZE_BYTES in total with 16-byte lines (8 ways,
// 32 KiB, 256 sets by default). Tags, valid and dirty bits and data are kept
// in arrays without reset, standing for the SRAM macros of a real cache. The
// cache is blocking: it accepts one 64-bit request (req_valid_i/req_ready_o)
// in FT-idle state, looks it up in the next cycle and, on a hit, answers with a
// one-cycle rsp_valid_o (read data, or the acknowledge of a store). On a miss
// it picks a victim (first invalid way, else the way given by an 8-bit LFSR),
// writes the victim back if it is dirty, refills the line from the next level
// and replays the lookup. Stores allocate on a miss and mark the line dirty.
//
// fence.t support, driven by the fence.t controller:
//  * wb_req_i (step 2): scan all sets and write back every dirty line, one
//    memory write at a time, then clear its dirty bit; wb_done_o is high in the
//    last cycle of the scan. Its latency grows with the number of dirty lines,
//    which is why fence.t is padded to a fixed latency.
//  * clr_req_i (step 4): overwrite tags, valid and dirty bits and data with
//    zeros, one set per cycle; clr_done_o is high in the last cycle. The same
//    sweep runs once after rst_ni, since the arrays have no reset.
//  Both requests are taken up only in the idle state, so a request accepted
//  just before fence.t is completed first and its line is written back too.
//  * clear_i (step 5, Microreset): returns every flip-flop (FSM, request and
//    victim registers, LFSR) to its reset value; the arrays are not touched.
// The next level is reached through a valid/ready line request and a response
// pulse that carries refill data or acknowledges a write-back. The geometry
// and the LFSR replacement follow the evaluated core; write-allocate, the
// blocking organisation and the handshakes are this design's choices.
module l1_dcache
  import tp_pkg::*;
#(
  parameter int unsigned WAYS       = 8,
  parameter int unsigned SIZE_BYTES = 32768
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  input  logic            clear_i,
  // request port (from the memory arbiter)
  input  logic            req_valid_i,
  input  dreq_t           req_i,
  output logic            req_ready_o,
  output logic            rsp_valid_o,
  output logic [XLEN-1:0] rsp_rdata_o,
  // fence.t
  input  logic            wb_req_i,
  output logic            wb_done_o,
  input  logic            clr_req_i,
  output logic            clr_done_o,
  output logic            idle_o,
  // next level
  output logic            mem_req_valid_o,
  output mem_req_t        mem_req_o,
  input  logic            mem_req_ready_i,
  input  logic            mem_rsp_valid_i,
  input  mem_rsp_t        mem_rsp_i,
  // event pulses
  output logic            miss_o,
  output logic            wb_line_o
);

  localparam int unsigned SETS = SIZE_BYTES / (WAYS * LINE_BYTES);
  localparam int unsigned OW   = $clog2(LINE_BYTES);
  localparam int unsigned IW   = $clog2(SETS);
  localparam int unsigned WW   = $clog2(WAYS);
  localparam int unsigned TW   = PLEN - IW - OW;

  typedef enum logic [3:0] {
    S_INIT, S_IDLE, S_LOOKUP, S_EVICT, S_EVICT_WAIT, S_REFILL, S_REFILL_WAIT,
    S_FLUSH, S_FLUSH_WAIT, S_CLEAR
  } state_e;

  // SRAM arrays (no reset; cleared by the sweep)
  logic [TW-1:0]        tag_ram   [SETS][WAYS];
  logic [LINE_BITS-1:0] data_ram  [SETS][WAYS];
  logic [WAYS-1:0]      valid_ram [SETS];
  logic [WAYS-1:0]      dirty_ram [SETS];

  // flip-flops (cleared by Microreset)
  state_e        state_q;
  dreq_t         req_q;
  logic [WW-1:0] vict_q;
  logic [IW-1:0] set_q;     // sweep / flush pointer
  logic [WW-1:0] fway_q;    // way being written back by the flush scan

  logic [IW-1:0]   idx;
  logic [TW-1:0]   tag;
  logic [WAYS-1:0] hit_vec;
  logic            hit;
  logic [WW-1:0]   hit_way, free_way, lfsr_way, vict;
  logic            have_free;
  logic [WAYS-1:0] fdirty;
  logic            fany;
  logic [WW-1:0]   ffirst;
  logic            lfsr_en;

  assign idx = req_q.addr[OW +: IW];
  assign tag = req_q.addr[PLEN-1 -: TW];

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
    hit  = |hit_vec;
    vict = have_free ? free_way : lfsr_way;
  end

  // dirty lines of the set under the flush pointer
  always_comb begin
    fdirty = valid_ram[set_q] & dirty_ram[set_q];
    fany   = |fdirty;
    ffirst = '0;
    for (int w = WAYS - 1; w >= 0; w--) if (fdirty[w]) ffirst = WW'(w);
  end

  assign lfsr_en = (state_q == S_LOOKUP) && !hit;

  lfsr8 #(.WAYS(WAYS)) i_lfsr (
    .clk_i, .rst_ni, .clear_i, .en_i(lfsr_en), .lfsr_o(), .idx_o(lfsr_way)
  );

  // ---------------- control ----------------
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= S_INIT;
      req_q   <= '0;
      vict_q  <= '0;
      set_q   <= '0;
      fway_q  <= '0;
    end else if (clear_i) begin
      state_q <= S_IDLE;
      req_q   <= '0;
      vict_q  <= '0;
      set_q   <= '0;
      fway_q  <= '0;
    end else begin
      unique case (state_q)
        S_INIT, S_CLEAR: begin
          set_q <= set_q + 1'b1;
          if (set_q == IW'(SETS - 1)) state_q <= S_IDLE;
        end
        S_IDLE: begin
          set_q <= '0;
          if (clr_req_i)        state_q <= S_CLEAR;
          else if (wb_req_i)    state_q <= S_FLUSH;
          else if (req_valid_i) begin
            req_q   <= req_i;
            state_q <= S_LOOKUP;
          end
        end
        S_LOOKUP: if (!hit) begin
          vict_q  <= vict;
          state_q <= (valid_ram[idx][vict] && dirty_ram[idx][vict]) ? S_EVICT : S_REFILL;
        end else begin
          state_q <= S_IDLE;
        end
        S_EVICT:       if (mem_req_ready_i) state_q <= S_EVICT_WAIT;
        S_EVICT_WAIT:  if (mem_rsp_valid_i) state_q <= S_REFILL;
        S_REFILL:      if (mem_req_ready_i) state_q <= S_REFILL_WAIT;
        S_REFILL_WAIT: if (mem_rsp_valid_i) state_q <= S_LOOKUP;
        S_FLUSH: begin
          if (fany) begin
            fway_q <= ffirst;
            if (mem_req_ready_i) state_q <= S_FLUSH_WAIT;
          end else begin
            set_q <= set_q + 1'b1;
            if (set_q == IW'(SETS - 1)) state_q <= S_IDLE;
          end
        end
        S_FLUSH_WAIT: if (mem_rsp_valid_i) state_q <= S_FLUSH;
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // ---------------- arrays ----------------
  always_ff @(posedge clk_i) begin
    unique case (state_q)
      S_INIT, S_CLEAR: begin
        valid_ram[set_q] <= '0;
        dirty_ram[set_q] <= '0;
        for (int w = 0; w < WAYS; w++) begin
          tag_ram[set_q][w]  <= '0;
          data_ram[set_q][w] <= '0;
        end
      end
      S_LOOKUP: if (hit && req_q.we) begin
        for (int b = 0; b < XLEN / 8; b++)
          if (req_q.be[b]) data_ram[idx][hit_way][{req_q.addr[OW-1:3], 3'(b), 3'b000} +: 8] <= req_q.wdata[b*8 +: 8];
        dirty_ram[idx][hit_way] <= 1'b1;
      end
      S_REFILL_WAIT: if (mem_rsp_valid_i) begin
        data_ram[idx][vict_q]  <= mem_rsp_i.rdata;
        tag_ram[idx][vict_q]   <= tag;
        valid_ram[idx][vict_q] <= 1'b1;
        dirty_ram[idx][vict_q] <= 1'b0;
      end
      S_FLUSH_WAIT: if (mem_rsp_valid_i) dirty_ram[set_q][fway_q] <= 1'b0;
      default: ;
    endcase
  end

  // ---------------- outputs ----------------
  always_comb begin
    mem_req_valid_o = 1'b0;
    mem_req_o       = '0;
    unique case (state_q)
      S_EVICT: begin
        mem_req_valid_o = 1'b1;
        mem_req_o.we    = 1'b1;
        mem_req_o.addr  = {tag_ram[idx][vict_q], idx, OW'(0)};
        mem_req_o.wdata = data_ram[idx][vict_q];
      end
      S_REFILL: begin
        mem_req_valid_o = 1'b1;
        mem_req_o.addr  = {tag, idx, OW'(0)};
      end
      S_FLUSH: if (fany) begin
        mem_req_valid_o = 1'b1;
        mem_req_o.we    = 1'b1;
        mem_req_o.addr  = {tag_ram[set_q][ffirst], set_q, OW'(0)};
        mem_req_o.wdata = data_ram[set_q][ffirst];
      end
      default: ;
    endcase
  end

  assign req_ready_o = (state_q == S_IDLE) && !wb_req_i && !clr_req_i;
  assign rsp_valid_o = (state_q == S_LOOKUP) && hit;
  assign rsp_rdata_o = data_ram[idx][hit_way][req_q.addr[OW-1:3]*XLEN +: XLEN];
  assign wb_done_o   = (state_q == S_FLUSH) && !fany && (set_q == IW'(SETS - 1));
  assign clr_done_o  = (state_q == S_CLEAR) && (set_q == IW'(SETS - 1));
  assign idle_o      = (state_q == S_IDLE);
  assign miss_o      = lfsr_en;
  assign wb_line_o   = mem_rsp_valid_i && (state_q == S_EVICT_WAIT || state_q == S_FLUSH_WAIT);

  // A response from the next level only arrives while one is awaited.
  assert property (@(posedge clk_i) disable iff (!rst_ni)
    mem_rsp_valid_i |-> (state_q inside {S_EVICT_WAIT, S_REFILL_WAIT, S_FLUSH_WAIT}));

endmodule
