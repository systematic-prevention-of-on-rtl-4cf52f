// tb_fencet_decoder: checks fence.t recognition and immediate extraction
// against the U-type field layout, for random words and for words with the
// custom-0 opcode forced, and for all 128 opcode values.
module tb_fencet_decoder;
  logic        valid;
  logic [31:0] instr;
  logic        is_ft;
  logic [19:0] imm;
  logic [4:0]  rd;
  int checks = 0, failures = 0;

  fencet_decoder dut (.valid_i(valid), .instr_i(instr), .is_fencet_o(is_ft), .imm_o(imm), .rd_o(rd));

  task automatic check(logic [31:0] w, logic v);
    logic exp;
    valid = v; instr = w; #1;
    exp = v && (w % 128 == 32'h0B);
    checks++;
    if (is_ft !== exp || imm !== w[31:12] || rd !== w[11:7]) begin
      failures++;
      $display("FAIL instr=%h valid=%0d is_fencet=%0d imm=%h", w, v, is_ft, imm);
    end
  endtask

  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [31:0] w;
    check(32'h0000_000B, 1'b1);          // fence.t, empty bitmap
    check(32'hFFFF_F00B, 1'b1);          // fence.t, all components
    check(32'h0000_000B, 1'b0);          // not valid
    check(32'h0000_0013, 1'b1);          // addi (OP-IMM)
    check(32'h0000_000F, 1'b1);          // fence (MISC-MEM)
    check(32'h0000_002B, 1'b1);          // custom-1
    check(32'h0000_004B, 1'b1);          // FNMSUB: differs from custom-0 only in bit 6
    for (int op = 0; op < 128; op++) begin  // every opcode, random upper bits
      w = $urandom;
      w[6:0] = 7'(op);
      check(w, 1'b1);
    end
    for (int i = 0; i < 500; i++) begin
      w = $urandom;
      if (i % 2 == 0) w[6:0] = 7'h0B;
      check(w, 1'($urandom));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
