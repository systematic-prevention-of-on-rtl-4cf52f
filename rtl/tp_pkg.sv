// tp_pkg: shared widths and request/response types of the time-protected core.
//
// The core is a 64-bit RISC-V core with Sv39 virtual memory (39-bit virtual
// addresses, 4 KiB pages) and 56-bit physical addresses. The L1 caches use
// 16-byte lines, so every transfer to the next cache level moves one 128-bit
// line. The widths follow RV64/Sv39; the line size follows the evaluated core
// configuration. The custom-0 opcode is the value of the RISC-V base opcode map.
package tp_pkg;

  localparam int unsigned XLEN       = 64;
  localparam int unsigned VLEN       = 39;
  localparam int unsigned PLEN       = 56;
  localparam int unsigned PAGE_BITS  = 12;
  localparam int unsigned VPN_BITS   = VLEN - PAGE_BITS;  // 27
  localparam int unsigned PPN_BITS   = PLEN - PAGE_BITS;  // 44
  localparam int unsigned LINE_BYTES = 16;
  localparam int unsigned LINE_BITS  = LINE_BYTES * 8;

  // fence.t: U-type instruction in the custom-0 opcode space.
  localparam logic [6:0] OPCODE_CUSTOM0 = 7'b0001011;
  // cspad CSR: custom machine-mode read/write CSR space (0x7C0-0x7FF).
  localparam logic [11:0] CSR_CSPAD = 12'h7C0;

  // Request from the load unit, store unit or MMU to the L1 data cache
  // (physical address, one 64-bit word).
  typedef struct packed {
    logic [PLEN-1:0]   addr;
    logic              we;
    logic [XLEN-1:0]   wdata;
    logic [XLEN/8-1:0] be;
  } dreq_t;

  // Line transfer between an L1 cache and the next level (L2).
  typedef struct packed {
    logic [PLEN-1:0]      addr;   // line aligned
    logic                 we;     // 1: write back a line, 0: refill a line
    logic [LINE_BITS-1:0] wdata;
  } mem_req_t;

  typedef struct packed {
    logic [LINE_BITS-1:0] rdata;  // refill data; ignored for write acks
  } mem_rsp_t;

  // States of the fence.t controller, one per step of the sequence.
  typedef enum logic [2:0] {
    FT_IDLE,     // no fence.t in progress
    FT_WB,       // step 2: write back dirty L1 data cache lines
    FT_DRAIN,    // step 3: drain pending memory transactions
    FT_CLEAR,    // step 4: overwrite cache SRAMs line by line
    FT_URST,     // step 5: assert Microreset
    FT_PAD,      // time padding: wait until cspad cycles after the interrupt
    FT_RESUME    // step 6: resume fetch at the saved PC
  } ft_state_e;

endpackage
