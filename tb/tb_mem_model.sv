// tb_mem_model: behavioural model of the next memory level (L2 and DRAM) for
// testbenches; not synthesizable.
//
// Accepts one line request at a time (req_ready_o high while no request is
// pending) and answers LATENCY cycles later with a one-cycle rsp_valid_o. A
// read returns the stored line, or, for a line never written, a pattern given
// by the function init_line() of its address. A write stores the line and is
// acknowledged the same way. Counts reads and writes and the requests that
// are outstanding (for drain checks).
module tb_mem_model
  import tp_pkg::*;
#(
  parameter int unsigned LATENCY = 4
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  logic     req_valid_i,
  input  mem_req_t req_i,
  output logic     req_ready_o,
  output logic     rsp_valid_o,
  output mem_rsp_t rsp_o
);

  logic [LINE_BITS-1:0] mem [logic [PLEN-1:0]];
  int unsigned          n_reads, n_writes;
  logic                 busy;
  int unsigned          cnt;
  mem_req_t             cur;

  function automatic logic [LINE_BITS-1:0] init_line(logic [PLEN-1:0] a);
    logic [63:0] h;
    h = {8'(0), a} * 64'h9E37_79B9_7F4A_7C15;
    return {h ^ 64'h0123_4567_89AB_CDEF, h};
  endfunction

  function automatic logic [LINE_BITS-1:0] peek(logic [PLEN-1:0] a);
    logic [PLEN-1:0] la;
    la = {a[PLEN-1:4], 4'h0};
    return mem.exists(la) ? mem[la] : init_line(la);
  endfunction

  assign req_ready_o = !busy;

  always @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      busy        <= 1'b0;
      cnt         <= 0;
      rsp_valid_o <= 1'b0;
      rsp_o       <= '0;
      n_reads     <= 0;
      n_writes    <= 0;
      cur         <= '0;
    end else begin
      rsp_valid_o <= 1'b0;
      if (!busy && req_valid_i) begin
        busy <= 1'b1;
        cnt  <= LATENCY;
        cur  <= req_i;
      end else if (busy) begin
        if (cnt > 1) cnt <= cnt - 1;
        else begin
          busy        <= 1'b0;
          rsp_valid_o <= 1'b1;
          if (cur.we) begin
            mem[{cur.addr[PLEN-1:4], 4'h0}] = cur.wdata;
            rsp_o    <= '0;
            n_writes <= n_writes + 1;
          end else begin
            rsp_o.rdata <= peek(cur.addr);
            n_reads     <= n_reads + 1;
          end
        end
      end
    end
  end

endmodule
