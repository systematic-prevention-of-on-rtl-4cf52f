// fencet_controller: sequencer of the temporal fence fence.t with Microreset.
//
// When the decoder reports a fence.t (fencet_i, with the address pc_i of the
// fence.t itself), the controller flushes the pipeline and then walks through
// the Microreset sequence, one state per step:
//   1. save the program counter: pc_i + 4 goes to a register that Microreset
//      does not touch (done in the cycle fence.t is taken);
//   2. FT_WB: hold dcache_wb_req_o until the L1 data cache reports, with a
//      pulse on dcache_wb_done_i, that all dirty lines are written back;
//   3. FT_DRAIN: issue nothing for DRAIN_CYCLES cycles and until mem_idle_i
//      shows that no memory transaction is outstanding;
//   4. FT_CLEAR: hold clear_req_o until both caches have overwritten their
//      SRAMs line by line (pulses on dcache_clr_done_i and icache_clr_done_i);
//   5. FT_URST: assert urst_o, the clear input of every non-architectural
//      flip-flop, for URST_CYCLES consecutive cycles so that it reaches all of
//      them before any is released;
//   FT_PAD: wait for pad_done_i from the time-padding counter (cspad);
//   6. FT_RESUME: one cycle with resume_valid_o and resume_pc_o = saved PC.
// busy_o is high from the cycle after fence.t is taken until the end of
// FT_RESUME; the core accepts no new memory requests while it is high. The
// controller's own flip-flops are excluded from Microreset (it drives it).
// The six steps, the write-back/clear split and the 16 cycles of draining and
// of Microreset follow the described implementation; the handshakes and the
// fixed drain length are this design's choices.
module fencet_controller
  import tp_pkg::*;
#(
  parameter int unsigned URST_CYCLES  = 16,
  parameter int unsigned DRAIN_CYCLES = 16
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  // from the decoder (issue stage)
  input  logic            fencet_i,
  input  logic [VLEN-1:0] pc_i,
  // to the pipeline
  output logic            flush_pipeline_o,
  output logic            busy_o,
  output logic            resume_valid_o,
  output logic [VLEN-1:0] resume_pc_o,
  // caches and memory
  output logic            dcache_wb_req_o,
  input  logic            dcache_wb_done_i,
  input  logic            mem_idle_i,
  output logic            clear_req_o,
  input  logic            dcache_clr_done_i,
  input  logic            icache_clr_done_i,
  // Microreset
  output logic            urst_o,
  // time padding
  input  logic            pad_done_i,
  output ft_state_e       state_o
);

  localparam int unsigned CW = $clog2((URST_CYCLES > DRAIN_CYCLES ? URST_CYCLES : DRAIN_CYCLES) + 1);

  ft_state_e       state_q, state_d;
  logic [CW-1:0]   cnt_q, cnt_d;
  logic [VLEN-1:0] saved_pc_q;
  logic            dclr_q, iclr_q, dclr_d, iclr_d;

  always_comb begin
    state_d = state_q;
    cnt_d   = cnt_q;
    dclr_d  = dclr_q;
    iclr_d  = iclr_q;
    unique case (state_q)
      FT_IDLE: if (fencet_i) state_d = FT_WB;
      FT_WB: if (dcache_wb_done_i) begin
        state_d = FT_DRAIN;
        cnt_d   = '0;
      end
      FT_DRAIN: begin
        if (cnt_q != CW'(DRAIN_CYCLES)) cnt_d = cnt_q + 1'b1;
        if (cnt_q >= CW'(DRAIN_CYCLES - 1) && mem_idle_i) begin
          state_d = FT_CLEAR;
          dclr_d  = 1'b0;
          iclr_d  = 1'b0;
        end
      end
      FT_CLEAR: begin
        if (dcache_clr_done_i) dclr_d = 1'b1;
        if (icache_clr_done_i) iclr_d = 1'b1;
        if (dclr_d && iclr_d) begin
          state_d = FT_URST;
          cnt_d   = '0;
        end
      end
      FT_URST: begin
        cnt_d = cnt_q + 1'b1;
        if (cnt_q == CW'(URST_CYCLES - 1)) state_d = FT_PAD;
      end
      FT_PAD:    if (pad_done_i) state_d = FT_RESUME;
      FT_RESUME: state_d = FT_IDLE;
      default:   state_d = FT_IDLE;
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q    <= FT_IDLE;
      cnt_q      <= '0;
      dclr_q     <= 1'b0;
      iclr_q     <= 1'b0;
      saved_pc_q <= '0;
    end else begin
      state_q <= state_d;
      cnt_q   <= cnt_d;
      dclr_q  <= dclr_d;
      iclr_q  <= iclr_d;
      // Step 1: save the address of the instruction after fence.t.
      if (state_q == FT_IDLE && fencet_i) saved_pc_q <= pc_i + VLEN'(4);
    end
  end

  assign flush_pipeline_o = (state_q == FT_IDLE) && fencet_i;
  assign busy_o           = (state_q != FT_IDLE);
  assign dcache_wb_req_o  = (state_q == FT_WB);
  assign clear_req_o      = (state_q == FT_CLEAR);
  assign urst_o           = (state_q == FT_URST);
  assign resume_valid_o   = (state_q == FT_RESUME);
  assign resume_pc_o      = saved_pc_q;
  assign state_o          = state_q;

  // Microreset lasts exactly URST_CYCLES cycles.
  assert property (@(posedge clk_i) disable iff (!rst_ni)
    $rose(urst_o) |-> urst_o [*URST_CYCLES] ##1 !urst_o);

endmodule
