// tp_core: the stateful on-core microarchitecture of a RISC-V application core
// with full temporal partitioning by fence.t and Microreset.
//
// Contents: the fence.t decoder, controller and time-padding counter (cspad);
// the write-back L1 data cache and the L1 instruction cache, each with its
// replacement LFSR; the data and instruction TLBs with pseudo-LRU trees; the
// branch history table and branch target buffer; and the round-robin arbiter
// that shares the data cache between load unit, store unit and MMU. The core
// pipeline, register files, CSR file, page-table walker and L2 are outside;
// their connections are ports.
//
// Microreset: the controller's urst signal drives the clear input of every
// flip-flop here that holds non-architectural state (caches' control, LFSRs,
// TLBs, PLRU trees, BHT, BTB, arbiter, response routing). Excluded are the
// controller itself and the cspad timer (architectural); the cache SRAM arrays
// are not resettable and are instead overwritten line by line in step 4.
//
// Interfaces, all synchronous to clk_i:
//  * instr_*: the instruction being issued; a fence.t there starts the
//    sequence, flush_pipeline_o asks the pipeline to drop younger work, and
//    resume_valid_o/resume_pc_o restart fetch after it.
//  * if_*: fetch with a virtual address, translated by the ITLB in the same
//    cycle; a TLB miss is reported (if_tlb_miss_o) and refilled by the
//    page-table walker through itlb_upd_*.
//  * dtlb_*: combinational data translation for the load/store unit.
//  * dc_*[0..2]: physical-address requests of load unit (0), store unit (1)
//    and MMU (2) to the data cache; the response goes to the requester that
//    was granted.
//  * bp_*, bht_upd_*, btb_upd_*: branch prediction lookup and training.
//  * dmem_*, imem_*: line requests of the two L1 caches to the L2.
// While fence.t runs (fencet_busy_o) no fetch, data request, TLB refill or
// predictor update is accepted. The component sizes are those of the
// evaluated core; the interfaces are this design's choices.
module tp_core
  import tp_pkg::*;
#(
  parameter int unsigned DCACHE_WAYS  = 8,
  parameter int unsigned DCACHE_BYTES = 32768,
  parameter int unsigned ICACHE_WAYS  = 4,
  parameter int unsigned ICACHE_BYTES = 16384,
  parameter int unsigned TLB_ENTRIES  = 16,
  parameter int unsigned BHT_ENTRIES  = 64,
  parameter int unsigned BTB_ENTRIES  = 16,
  parameter int unsigned URST_CYCLES  = 16,
  parameter int unsigned DRAIN_CYCLES = 16
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  // issue stage
  input  logic                 instr_valid_i,
  input  logic [31:0]          instr_i,
  input  logic [VLEN-1:0]      instr_pc_i,
  output logic                 flush_pipeline_o,
  output logic                 fencet_busy_o,
  output logic [19:0]          fencet_imm_o,
  output logic                 resume_valid_o,
  output logic [VLEN-1:0]      resume_pc_o,
  output logic                 urst_o,
  output ft_state_e            ft_state_o,
  // CSR file access to cspad
  input  logic                 csr_we_i,
  input  logic [11:0]          csr_addr_i,
  input  logic [31:0]          csr_wdata_i,
  output logic                 csr_hit_o,
  output logic [31:0]          csr_rdata_o,
  // CLINT
  input  logic                 timer_irq_i,
  // instruction fetch
  input  logic                 if_req_valid_i,
  input  logic [VLEN-1:0]      if_vaddr_i,
  output logic                 if_req_ready_o,
  output logic                 if_tlb_miss_o,
  output logic                 if_rsp_valid_o,
  output logic [31:0]          if_rsp_rdata_o,
  input  logic                 itlb_upd_valid_i,
  input  logic [VPN_BITS-1:0]  itlb_upd_vpn_i,
  input  logic [PPN_BITS-1:0]  itlb_upd_ppn_i,
  // data translation
  input  logic                 sfence_i,
  input  logic                 dtlb_lookup_valid_i,
  input  logic [VLEN-1:0]      dtlb_vaddr_i,
  output logic                 dtlb_hit_o,
  output logic [PLEN-1:0]      dtlb_paddr_o,
  input  logic                 dtlb_upd_valid_i,
  input  logic [VPN_BITS-1:0]  dtlb_upd_vpn_i,
  input  logic [PPN_BITS-1:0]  dtlb_upd_ppn_i,
  // data cache ports: 0 load unit, 1 store unit, 2 MMU
  input  logic [2:0]           dc_req_valid_i,
  input  dreq_t [2:0]          dc_req_i,
  output logic [2:0]           dc_req_ready_o,
  output logic [2:0]           dc_rsp_valid_o,
  output logic [XLEN-1:0]      dc_rsp_rdata_o,
  // branch prediction
  input  logic [VLEN-1:0]      bp_pc_i,
  output logic                 bht_taken_o,
  output logic                 btb_valid_o,
  output logic [VLEN-1:0]      btb_target_o,
  input  logic                 bht_upd_valid_i,
  input  logic [VLEN-1:0]      bht_upd_pc_i,
  input  logic                 bht_upd_taken_i,
  input  logic                 btb_upd_valid_i,
  input  logic [VLEN-1:0]      btb_upd_pc_i,
  input  logic [VLEN-1:0]      btb_upd_target_i,
  // L2 side of the data cache
  output logic                 dmem_req_valid_o,
  output mem_req_t             dmem_req_o,
  input  logic                 dmem_req_ready_i,
  input  logic                 dmem_rsp_valid_i,
  input  mem_rsp_t             dmem_rsp_i,
  // L2 side of the instruction cache
  output logic                 imem_req_valid_o,
  output mem_req_t             imem_req_o,
  input  logic                 imem_req_ready_i,
  input  logic                 imem_rsp_valid_i,
  input  mem_rsp_t             imem_rsp_i,
  // event pulses
  output logic                 dc_miss_o,
  output logic                 dc_wb_line_o,
  output logic                 ic_miss_o
);

  logic urst, busy, is_fencet;
  logic dc_wb_req, dc_wb_done, clr_req, dc_clr_done, ic_clr_done;
  logic dc_idle, ic_idle, pad_done;

  // ---------------- fence.t ----------------
  fencet_decoder i_dec (
    .valid_i(instr_valid_i && !busy), .instr_i, .is_fencet_o(is_fencet),
    .imm_o(fencet_imm_o), .rd_o()
  );

  fencet_controller #(.URST_CYCLES(URST_CYCLES), .DRAIN_CYCLES(DRAIN_CYCLES)) i_ctrl (
    .clk_i, .rst_ni,
    .fencet_i(is_fencet), .pc_i(instr_pc_i),
    .flush_pipeline_o, .busy_o(busy), .resume_valid_o, .resume_pc_o,
    .dcache_wb_req_o(dc_wb_req), .dcache_wb_done_i(dc_wb_done),
    .mem_idle_i(dc_idle && ic_idle),
    .clear_req_o(clr_req), .dcache_clr_done_i(dc_clr_done), .icache_clr_done_i(ic_clr_done),
    .urst_o(urst), .pad_done_i(pad_done), .state_o(ft_state_o)
  );

  tp_pad_timer i_pad (
    .clk_i, .rst_ni, .csr_we_i, .csr_addr_i, .csr_wdata_i, .csr_hit_o, .csr_rdata_o,
    .timer_irq_i, .pad_done_o(pad_done), .elapsed_o()
  );

  assign fencet_busy_o = busy;
  assign urst_o        = urst;

  // ---------------- instruction side ----------------
  logic                itlb_hit;
  logic [PPN_BITS-1:0] itlb_ppn;
  logic                ic_ready;

  tlb #(.ENTRIES(TLB_ENTRIES)) i_itlb (
    .clk_i, .rst_ni, .clear_i(urst), .flush_i(sfence_i),
    .lookup_valid_i(if_req_valid_i && if_req_ready_o), .lookup_vpn_i(if_vaddr_i[VLEN-1:PAGE_BITS]),
    .hit_o(itlb_hit), .ppn_o(itlb_ppn),
    .upd_valid_i(itlb_upd_valid_i && !busy), .upd_vpn_i(itlb_upd_vpn_i), .upd_ppn_i(itlb_upd_ppn_i)
  );

  assign if_req_ready_o = ic_ready && itlb_hit && !busy;
  assign if_tlb_miss_o  = if_req_valid_i && !itlb_hit;

  l1_icache #(.WAYS(ICACHE_WAYS), .SIZE_BYTES(ICACHE_BYTES)) i_icache (
    .clk_i, .rst_ni, .clear_i(urst),
    .req_valid_i(if_req_valid_i && itlb_hit && !busy),
    .req_addr_i({itlb_ppn, if_vaddr_i[PAGE_BITS-1:0]}),
    .req_ready_o(ic_ready), .rsp_valid_o(if_rsp_valid_o), .rsp_rdata_o(if_rsp_rdata_o),
    .clr_req_i(clr_req), .clr_done_o(ic_clr_done), .idle_o(ic_idle),
    .mem_req_valid_o(imem_req_valid_o), .mem_req_o(imem_req_o), .mem_req_ready_i(imem_req_ready_i),
    .mem_rsp_valid_i(imem_rsp_valid_i), .mem_rsp_i(imem_rsp_i), .miss_o(ic_miss_o)
  );

  // ---------------- branch prediction ----------------
  bht #(.ENTRIES(BHT_ENTRIES)) i_bht (
    .clk_i, .rst_ni, .clear_i(urst), .lookup_pc_i(bp_pc_i), .taken_o(bht_taken_o),
    .upd_valid_i(bht_upd_valid_i && !busy), .upd_pc_i(bht_upd_pc_i), .upd_taken_i(bht_upd_taken_i)
  );

  btb #(.ENTRIES(BTB_ENTRIES)) i_btb (
    .clk_i, .rst_ni, .clear_i(urst), .lookup_pc_i(bp_pc_i), .valid_o(btb_valid_o),
    .target_o(btb_target_o), .upd_valid_i(btb_upd_valid_i && !busy), .upd_pc_i(btb_upd_pc_i),
    .upd_target_i(btb_upd_target_i)
  );

  // ---------------- data side ----------------
  logic [PPN_BITS-1:0] dtlb_ppn;

  tlb #(.ENTRIES(TLB_ENTRIES)) i_dtlb (
    .clk_i, .rst_ni, .clear_i(urst), .flush_i(sfence_i),
    .lookup_valid_i(dtlb_lookup_valid_i), .lookup_vpn_i(dtlb_vaddr_i[VLEN-1:PAGE_BITS]),
    .hit_o(dtlb_hit_o), .ppn_o(dtlb_ppn),
    .upd_valid_i(dtlb_upd_valid_i && !busy), .upd_vpn_i(dtlb_upd_vpn_i), .upd_ppn_i(dtlb_upd_ppn_i)
  );

  assign dtlb_paddr_o = {dtlb_ppn, dtlb_vaddr_i[PAGE_BITS-1:0]};

  logic [2:0] gnt;
  logic [1:0] gnt_idx, owner_q;
  logic       arb_valid, dc_ready, dc_rsp_valid;

  rr_arbiter #(.N(3)) i_arb (
    .clk_i, .rst_ni, .clear_i(urst),
    .req_i(dc_req_valid_i & {3{!busy}}), .ready_i(dc_ready),
    .gnt_o(gnt), .gnt_idx_o(gnt_idx), .valid_o(arb_valid)
  );

  // The cache is blocking: remember who was served to route the response.
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)                    owner_q <= '0;
    else if (urst)                  owner_q <= '0;
    else if (arb_valid && dc_ready) owner_q <= gnt_idx;
  end

  assign dc_req_ready_o = gnt & {3{dc_ready}};
  assign dc_rsp_valid_o = dc_rsp_valid ? (3'b001 << owner_q) : 3'b000;

  l1_dcache #(.WAYS(DCACHE_WAYS), .SIZE_BYTES(DCACHE_BYTES)) i_dcache (
    .clk_i, .rst_ni, .clear_i(urst),
    .req_valid_i(arb_valid), .req_i(dc_req_i[gnt_idx]), .req_ready_o(dc_ready),
    .rsp_valid_o(dc_rsp_valid), .rsp_rdata_o(dc_rsp_rdata_o),
    .wb_req_i(dc_wb_req), .wb_done_o(dc_wb_done), .clr_req_i(clr_req), .clr_done_o(dc_clr_done),
    .idle_o(dc_idle),
    .mem_req_valid_o(dmem_req_valid_o), .mem_req_o(dmem_req_o), .mem_req_ready_i(dmem_req_ready_i),
    .mem_rsp_valid_i(dmem_rsp_valid_i), .mem_rsp_i(dmem_rsp_i),
    .miss_o(dc_miss_o), .wb_line_o(dc_wb_line_o)
  );

endmodule
