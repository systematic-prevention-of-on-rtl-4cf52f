// tp_pad_timer: the cspad CSR and the pad interval counter.
//
// cspad is a custom 32-bit machine-mode CSR (address CSR_CSPAD, 0x7C0). The
// rising edge of the CLINT timer interrupt timer_irq_i, which opens a context
// switch, restarts a cycle counter; call T the cycle in which timer_irq_i is
// first seen high. pad_done_o is high from cycle T + cspad on, until the next
// interrupt edge. The fence.t controller holds the end of fence.t back until
// then, so the context switch always ends a fixed time after the interrupt.
// cspad = 0 disables padding (pad_done_o is then always high). The counter
// saturates instead of wrapping. These registers, the interrupt edge detector
// included, survive Microreset (clearing the edge detector would fake a new
// interrupt edge), so this module has no clear input. The 32-bit cspad and the
// interrupt as the start of the interval follow the described mechanism; the
// CSR address, the saturating counter and the reset value 0 are this design's
// choices.
module tp_pad_timer
  import tp_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  // CSR access from the CSR file (one write port, combinational read)
  input  logic        csr_we_i,
  input  logic [11:0] csr_addr_i,
  input  logic [31:0] csr_wdata_i,
  output logic        csr_hit_o,
  output logic [31:0] csr_rdata_o,
  // pad interval
  input  logic        timer_irq_i,
  output logic        pad_done_o,
  output logic [31:0] elapsed_o
);

  logic [31:0] cspad_q;
  logic [31:0] cnt_q;
  logic        irq_q;
  logic        start;

  assign start = timer_irq_i && !irq_q;

  assign csr_hit_o   = (csr_addr_i == CSR_CSPAD);
  assign csr_rdata_o = csr_hit_o ? cspad_q : '0;
  assign pad_done_o  = (cnt_q >= cspad_q);
  assign elapsed_o   = cnt_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)                     cspad_q <= '0;
    else if (csr_we_i && csr_hit_o)  cspad_q <= csr_wdata_i;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) irq_q <= 1'b0;
    else         irq_q <= timer_irq_i;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)                cnt_q <= '1;      // no interval open: done
    else if (start)             cnt_q <= 32'd1;
    else if (cnt_q != '1)       cnt_q <= cnt_q + 32'd1;
  end

endmodule
